// tb_logic_block: the host-side equation compiler is modelled here by
// functions: eight equations over the ten shaped signals (OR of two inputs,
// AND, XOR, NAND, NOR, XNOR, majority SUP(>=3 of 10), and a coincidence
// d0 & d1 & !d2). Their truth tables are loaded through port B; every one of
// the 1024 input vectors is then applied to port A and the registered
// output (one clock) compared with the equations evaluated directly.
module tb_logic_block;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0;
  logic [9:0] a_addr = '0, b_addr = '0;
  logic [7:0] a_data, b_wdata = '0, b_rdata;
  logic b_we = 0;
  int checks = 0, failures = 0;

  logic_block dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] eqs(logic [9:0] d);
    logic [7:0] o;
    o[0] = d[0] | d[1];
    o[1] = d[2] & d[3];
    o[2] = d[4] ^ d[5];
    o[3] = ~(d[6] & d[7]);
    o[4] = ~(d[8] | d[9]);
    o[5] = ~(d[0] ^ d[9]);
    o[6] = ($countones(d) >= 3);
    o[7] = d[0] & d[1] & ~d[2];
    return o;
  endfunction

  initial begin
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      b_we = 1; b_addr = 10'(a); b_wdata = eqs(10'(a));
    end
    @(negedge clk) b_we = 0;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk) a_addr = 10'(a);
      @(posedge clk); #0.5;
      checks++;
      if (a_data !== eqs(10'(a))) begin
        failures++;
        $display("FAIL address %0d got %b expected %b", a, a_data, eqs(10'(a)));
      end
    end
    // port B read-back of a few words
    for (int a = 0; a < 1024; a += 37) begin
      @(negedge clk) b_addr = 10'(a);
      @(negedge clk);
      checks++;
      if (b_rdata !== eqs(10'(a))) begin
        failures++;
        $display("FAIL port B %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
