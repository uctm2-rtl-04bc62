// tb_run_timer: a timed run must stay active exactly `duration` clocks; an
// unlimited run (duration 0) lasts until stop; elapsed counts run clocks.
module tb_run_timer;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst = 1, start = 0, stop = 0;
  logic [47:0] duration = '0;
  logic running;
  logic [47:0] elapsed;
  int checks = 0, failures = 0;

  run_timer #(.W(48)) dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic timed(int d);
    int hi = 0;
    @(negedge clk) begin duration = 48'(d); start = 1; end
    @(negedge clk) start = 0;
    for (int n = 0; n < d + 20; n++) begin
      if (running) hi++;
      @(negedge clk);
    end
    chk(hi == d, $sformatf("timed run %0d lasted %0d", d, hi));
    chk(elapsed == 48'(d), $sformatf("elapsed %0d for %0d", elapsed, d));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    chk(!running, "idle after reset");
    timed(1);
    timed(7);
    timed(1000);
    // unlimited
    @(negedge clk) begin duration = '0; start = 1; end
    @(negedge clk) start = 0;
    repeat (3000) @(negedge clk);
    chk(running, "unlimited still running");
    @(negedge clk) stop = 1;
    @(negedge clk) stop = 0;
    chk(!running, "stopped");
    chk(elapsed == 48'd3001, $sformatf("unlimited elapsed %0d", elapsed));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
