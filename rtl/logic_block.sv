// logic_block: the trigger-equation stage of the trigger core, a 2^10 x 8
// bit dual-port block RAM used as a look-up table. Port A is addressed by the
// ten delayed/shaped signals (bit i = shaper i) and returns, one clock later,
// the eight trigger outputs; every output bit is thus any function of up to
// ten operands, with a latency independent of the equation. The host parser
// computes the truth tables and loads them through port B (e.g. an OR of two
// inputs is the OR truth table over the two address bits).
// From the paper: 10-bit address, 8-bit output word, dual-port RAM, port
// roles. Own choices: both ports on the 200 MHz clock, registered reads; the
// table content is undefined until loaded.
module logic_block
  import uctm2_pkg::*;
#(
  parameter int unsigned AW = N_DUP,
  parameter int unsigned DW = N_TRIG
) (
  input  logic          clk,
  // port A: trigger path
  input  logic [AW-1:0] a_addr,
  output logic [DW-1:0] a_data,
  // port B: configuration
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [DW-1:0] b_wdata,
  output logic [DW-1:0] b_rdata
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) a_data <= mem[a_addr];

  always_ff @(posedge clk) begin
    if (b_we) mem[b_addr] <= b_wdata;
    b_rdata <= mem[b_addr];
  end
endmodule
