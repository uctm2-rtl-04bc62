// tb_duplication_block: loads a random 256 x 10 table through port B, reads
// it back through port B, then sweeps every port-A address and checks the
// registered output (one clock latency) against the loaded table; finally
// loads a real duplication matrix (input 0 -> outputs 0,1,2, input i ->
// output i+2) and checks it for random input patterns.
module tb_duplication_block;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0;
  logic [7:0] a_addr = '0, b_addr = '0;
  logic [9:0] a_data, b_wdata = '0, b_rdata;
  logic b_we = 0;
  logic [9:0] model [256];
  int checks = 0, failures = 0;

  duplication_block dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [9:0] got, logic [9:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  function automatic logic [9:0] dup_matrix(logic [7:0] in);
    logic [9:0] o;
    o = '0;
    o[0] = in[0]; o[1] = in[0]; o[2] = in[0];
    for (int i = 1; i < 8; i++) o[i+2] = in[i];
    return o;
  endfunction

  task automatic load(bit matrix);
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      model[a] = matrix ? dup_matrix(8'(a)) : 10'($urandom);
      b_we = 1; b_addr = 8'(a); b_wdata = model[a];
    end
    @(negedge clk) b_we = 0;
  endtask

  initial begin
    load(0);
    for (int a = 0; a < 256; a++) begin
      @(negedge clk) b_addr = 8'(a);
      @(negedge clk) chk(b_rdata, model[a], $sformatf("port B read %0d", a));
    end
    for (int a = 0; a < 256; a++) begin
      @(negedge clk) a_addr = 8'(a);
      @(posedge clk); #0.5;
      chk(a_data, model[a], $sformatf("port A %0d", a));
    end
    load(1);
    repeat (200) begin
      logic [7:0] x;
      x = 8'($urandom);
      @(negedge clk) a_addr = x;
      @(posedge clk); #0.5;
      chk(a_data, dup_matrix(x), "duplication matrix");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
