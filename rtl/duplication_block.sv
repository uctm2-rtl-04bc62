// duplication_block: the fan-out stage of the trigger core, a 2^8 x 10 bit
// dual-port block RAM. Port A is addressed by the eight input-block outputs
// concatenated (bit i = input i) and returns, one clock later, the ten
// duplicated signals. The host computes the table beforehand so that each
// address bit is copied to one or several data bits. Port B lets the
// configuration interface write and read the table.
// From the paper: 8-bit address, 10-bit word, dual-port RAM, port roles.
// Own choices: both ports on the 200 MHz clock, registered (synchronous)
// reads on both ports, write-first is not relied on; the table content is
// undefined until loaded.
module duplication_block
  import uctm2_pkg::*;
#(
  parameter int unsigned AW = N_IN,
  parameter int unsigned DW = N_DUP
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
