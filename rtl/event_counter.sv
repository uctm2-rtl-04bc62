// event_counter: a scaler. Counts the rising edges of `sig` while `en` is
// high; `clr` clears it. The count wraps at 2^W. Used for the input scalers
// and the trigger-output rate counters (32 bit in the paper). The edge
// detector and the wrap-around are this design's choice. Count visible one
// clock after the edge's sampling clock.
module event_counter #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         clr,
  input  logic         en,
  input  logic         sig,
  output logic [W-1:0] count
);
  logic sig_d;
  always_ff @(posedge clk) begin
    if (rst) begin
      sig_d <= 1'b0;
      count <= '0;
    end else begin
      sig_d <= sig;
      if (clr)                     count <= '0;
      else if (en && sig && !sig_d) count <= count + 1'b1;
    end
  end
endmodule
