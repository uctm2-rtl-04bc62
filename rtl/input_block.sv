// input_block: one discriminator input channel of the trigger core (200 MHz).
// The high and low window-comparator outputs are each synchronised by two
// flip-flops. The low path, XORed with `polar`, is the direct trigger. The
// window detector accepts a pulse only if, after the low threshold is
// crossed, the high threshold is not crossed during `peak_time` clock cycles;
// it then emits a one-cycle pulse, so window mode adds peak_time cycles of
// latency. `win_mode` selects the window detector instead of the direct path.
// The result is registered (trig_out).
// Timing: three register stages (2 synchroniser FFs + output register): a
// level sampled at clock edge n shows on trig_out after edge n+2 in direct
// mode, and after edge n+2+peak_time in window mode, where the high input
// must stay inactive on edges n+1 .. n+1+peak_time.
// From the paper: the two FFs, polarity XOR on both paths, window rule,
// peakTime 1..63, the winMode mux. Own choices: one-cycle window pulse,
// detection on the rising edge of the polarity-corrected low signal,
// peak_time = 0 treated as 1, synchronous active-high reset.
module input_block
  import uctm2_pkg::*;
#(
  parameter int unsigned PW = PEAK_W
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          high_in,    // comparator above high threshold
  input  logic          low_in,     // comparator above low threshold
  input  logic          polar,      // 1: inputs are inverted (negative pulses)
  input  logic          win_mode,   // 1: use the window detector
  input  logic [PW-1:0] peak_time,  // window length in clock cycles (1..63)
  output logic          trig_out
);
  logic [1:0] high_sync, low_sync;
  logic       high_s, low_s, low_prev;
  logic       timing;              // window detector is watching a pulse
  logic [PW-1:0] cnt;
  logic       win_pulse;

  always_ff @(posedge clk) begin
    if (rst) begin
      high_sync <= '0;
      low_sync  <= '0;
    end else begin
      high_sync <= {high_sync[0], high_in};
      low_sync  <= {low_sync[0], low_in};
    end
  end

  // polarity inverters (XOR)
  assign high_s = high_sync[1] ^ polar;
  assign low_s  = low_sync[1] ^ polar;

  // window detector: watch for peak_time cycles after the low crossing
  always_ff @(posedge clk) begin
    if (rst) begin
      low_prev <= 1'b0;
      timing   <= 1'b0;
      cnt      <= '0;
    end else begin
      low_prev <= low_s;
      if (!timing) begin
        if (low_s && !low_prev && !high_s) begin
          timing <= 1'b1;
          cnt    <= 1;
        end
      end else if (high_s || cnt >= peak_time) begin
        timing <= 1'b0;                 // rejected, or accepted below
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
  // accepted: peak_time cycles have passed without a high crossing
  assign win_pulse = timing && !high_s && (cnt >= peak_time);

  // winMode multiplexer and output register
  always_ff @(posedge clk) begin
    if (rst) trig_out <= 1'b0;
    else     trig_out <= win_mode ? win_pulse : low_s;
  end
endmodule
