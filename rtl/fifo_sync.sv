// fifo_sync: single-clock FIFO with show-ahead read: rd_data is the oldest
// word whenever empty is low, and rd_en removes it. Writes while full and
// reads while empty are ignored. Used as the MCA (1024 x 16) and TDC
// (1024 x 32) output buffers, which the paper calls FIFOs without detailing
// them; the show-ahead style and the level output are this design's choice.
module fifo_sync #(
  parameter int unsigned DW = 16,
  parameter int unsigned AW = 10
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          wr_en,
  input  logic [DW-1:0] wr_data,
  input  logic          rd_en,
  output logic [DW-1:0] rd_data,
  output logic          empty,
  output logic          full,
  output logic [AW:0]   level
);
  logic [DW-1:0] mem [2**AW];
  logic [AW-1:0] wptr, rptr;
  logic          do_wr, do_rd;

  assign empty   = (level == '0);
  assign full    = (level == (AW+1)'(2**AW));
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rptr];

  always_ff @(posedge clk) if (do_wr) mem[wptr] <= wr_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr  <= '0;
      rptr  <= '0;
      level <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
      level <= level + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end
endmodule
