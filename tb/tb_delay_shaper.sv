// tb_delay_shaper: random pulse trains with several delay/width settings
// (including delay 0, width 1 and long values). A cycle model written from
// the specification (edge at e -> output on e+delay .. e+delay+width-1,
// edges while busy ignored) predicts sig_out on every clock; the dead and
// live time counters are compared with the busy clocks of the model.
module tb_delay_shaper;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst = 1, sig_in = 0, cnt_en = 0, cnt_clr = 0;
  logic [15:0] delay = '0, width = 16'd1;
  logic sig_out, busy;
  logic [31:0] dead_time, live_time;
  int checks = 0, failures = 0;

  delay_shaper dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // one run: n_cyc clocks of random input with pulse probability 1/p
  task automatic run(int d, int w, int n_cyc, int p);
    longint out_from, out_to, free_at, dead, enabled, accepted;
    logic prev;
    out_from = -1; out_to = -2; free_at = 0; dead = 0; enabled = 0; accepted = 0;
    prev = 0;
    @(negedge clk) begin delay = 16'(d); width = 16'(w); cnt_clr = 1; sig_in = 0; end
    @(negedge clk) begin cnt_clr = 0; cnt_en = 1; end
    for (int n = 0; n < n_cyc; n++) begin
      logic s;
      s = (n < n_cyc - d - w - 10) && ($urandom_range(1, p) == 1 || (prev && $urandom_range(0,1) == 1));
      sig_in = s;
      @(posedge clk);
      if (s && !prev && n >= free_at) begin
        out_from = n + d; out_to = n + d + w - 1; free_at = n + d + w + 1;
        dead += d + w;
        accepted++;
      end
      enabled++;
      prev = s;
      #0.5;
      chk(sig_out == (n >= out_from && n <= out_to),
          $sformatf("d=%0d w=%0d clock %0d sig_out=%0b", d, w, n, sig_out));
      @(negedge clk);
    end
    cnt_en = 0;
    #0.1;
    // counters: every enabled clock was either dead or live
    chk(dead_time == 32'(dead), $sformatf("dead %0d expected %0d", dead_time, dead));
    chk(dead_time + live_time == 32'(enabled),
        $sformatf("dead+live %0d expected %0d", dead_time + live_time, enabled));
    chk(accepted > 0, "at least one pulse accepted");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    run(0, 1, 2000, 5);
    run(0, 5, 2000, 8);
    run(3, 2, 2000, 10);
    run(10, 40, 5000, 20);
    run(1, 1, 2000, 3);
    run(200, 1000, 30000, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
