// tb_event_counter: counts random pulse trains with and without the enable
// and checks the count against edges counted in the testbench; checks clear.
module tb_event_counter;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst = 1, clr = 0, en = 0, sig = 0;
  logic [31:0] count;
  int checks = 0, failures = 0;
  int expected = 0;
  logic prev = 0;

  event_counter #(.W(32)) dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(int exp, string what);
    checks++;
    if (count !== 32'(exp)) begin
      failures++;
      $display("FAIL %s: count=%0d expected %0d", what, count, exp);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int phase = 0; phase < 6; phase++) begin
      for (int n = 0; n < 500; n++) begin
        logic s;
        @(negedge clk);
        s = ($urandom_range(0, 2) == 0);
        en = (phase % 2 == 0) || ($urandom_range(0, 1) == 1);
        sig = s;
        if (en && s && !prev) expected++;
        prev = s;
      end
      @(negedge clk) en = 0;
      @(negedge clk);
      chk(expected, "random train");
    end
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    chk(0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
