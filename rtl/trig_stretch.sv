// trig_stretch: brings one selected 200 MHz trigger output into the 100 MHz
// domain as a pair of bits, one per 5 ns sample. A two-stage shift register
// on clk200 holds the last two samples of trig[sel]; every clk100 edge
// (which coincides with every second clk200 edge, both clocks coming from
// the same PLL) captures them, so no pulse is lost however short it is.
// pair[0] is the earlier sample, pair[1] the later one, matching the sample
// order of the ADC words. Any bit set means "trigger seen" for the 100 MHz
// state machines; this is the stretching the paper mentions, and it leaves
// a one-sample (5 to 10 ns) position uncertainty. The shift-register
// implementation is this design's choice.
module trig_stretch
  import uctm2_pkg::*;
(
  input  logic              clk200,
  input  logic              clk100,
  input  logic              rst,
  input  logic [N_TRIG-1:0] trig,
  input  logic [SEL_W-1:0]  sel,
  output logic [1:0]        pair
);
  logic [1:0] sr;
  always_ff @(posedge clk200) begin
    if (rst) sr <= '0;
    else     sr <= {sr[0], trig[sel]};
  end
  // sr[1] was sampled before sr[0]
  always_ff @(posedge clk100) begin
    if (rst) pair <= '0;
    else     pair <= {sr[0], sr[1]};
  end
endmodule
