// tb_tdc: start and stop edges at known clocks on the selected trigger
// lines. Single stop: one value (stop clock - start clock) per start, later
// stops ignored. Multi stop: every stop until the next start is measured and
// a new start restarts the count. Also checks the 16-bit low-half-first
// readout, that non-selected lines do nothing, the enable, and the 24-bit
// range limit (largest value 2^24-1, a later stop is dropped).
module tb_tdc;
  import uctm2_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst = 1, enable = 0;
  logic [7:0] trig = '0;
  logic [2:0] sel_start = 3'd1, sel_stop = 3'd6;
  tdc_mode_t  tdc_mode = TDC_SINGLE;
  logic       rd_en = 0, empty, overflow;
  logic [15:0] rd_data;
  logic [10:0] level;
  int checks = 0, failures = 0;
  int cyc = 0;
  int expq [$];

  tdc dut (.*);
  always #2.5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // one-clock pulse on line ch; `at` is the clock edge that samples it
  task automatic pulse(int ch, output int at);
    @(negedge clk) trig[ch] = 1;
    @(posedge clk) at = cyc;
    @(negedge clk) trig[ch] = 0;
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  // read every stored word as two 16-bit halves and compare
  task automatic drain();
    while (!empty) begin
      logic [31:0] w;
      w[15:0] = rd_data;
      rd_en = 1;
      @(negedge clk);
      w[31:16] = rd_data;
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected value %0d", w);
      end else begin
        int e;
        e = expq.pop_front();
        if (w !== 32'(e)) begin
          failures++;
          if (failures < 20) $display("FAIL value %0d expected %0d", w, e);
        end
      end
      @(negedge clk);
    end
    chk(expq.size() == 0, $sformatf("%0d expected values missing", expq.size()));
  endtask

  initial begin
    int s, t;
    repeat (3) @(negedge clk);
    rst = 0;
    enable = 1;
    // single stop mode
    for (int k = 0; k < 20; k++) begin
      int d;
      d = $urandom_range(3, 300);
      pulse(1, s);
      idle(d - 2);
      pulse(6, t);
      expq.push_back(t - s);
      idle($urandom_range(1, 20));
      pulse(6, t);              // ignored: counter stopped
      pulse(3, t);              // non-selected line
      idle(5);
    end
    chk(level == 11'd20, $sformatf("single stop level %0d", level));
    drain();
    // stop on the clock after the start: 1 count (5 ns)
    @(negedge clk) trig[1] = 1;
    @(posedge clk) s = cyc;
    @(negedge clk) begin trig[1] = 0; trig[6] = 1; end
    @(posedge clk) t = cyc;
    @(negedge clk) trig[6] = 0;
    expq.push_back(t - s);
    chk(t - s == 1, "adjacent start/stop");
    idle(3);
    drain();
    // multi stop mode with restarts
    tdc_mode = TDC_MULTI;
    for (int k = 0; k < 5; k++) begin
      pulse(1, s);
      for (int j = 0; j < 6; j++) begin
        idle($urandom_range(0, 50));
        pulse(6, t);
        expq.push_back(t - s);
      end
    end
    idle(5);
    chk(level == 11'd30, $sformatf("multi stop level %0d", level));
    drain();
    // disabled: nothing recorded
    enable = 0;
    pulse(1, s); idle(5); pulse(6, t); idle(5);
    chk(empty, "disabled channel records nothing");
    enable = 1;
    // 24-bit range
    tdc_mode = TDC_SINGLE;
    pulse(1, s);
    idle((1 << 24) - 3);
    pulse(6, t);
    expq.push_back(t - s);
    chk(t - s == (1 << 24) - 1, $sformatf("max interval %0d", t - s));
    idle(3);
    drain();
    pulse(1, s);
    idle(1 << 24);
    pulse(6, t);
    idle(3);
    chk(empty, "out-of-range stop dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
