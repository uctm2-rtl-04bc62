// delay_shaper: one channel of the delaying/shaping block (200 MHz). Two
// chained monostables triggered by the rising edge of `sig_in`: the first
// waits `delay` clocks (0..65535), the second then holds `sig_out` high for
// `width` clocks (1..65535). Because the edge is the time reference, a pulse
// can be made shorter or longer than the input. Edges that arrive while the
// channel is busy (delaying or emitting) are ignored; that busy time is the
// channel's dead time. 32-bit dead-time and live-time counters count the
// busy and idle clocks while `cnt_en` (run active) is high.
// Timing: a rising edge sampled at clock edge e (input high at e, low at
// e-1) makes sig_out high after clock edges e+delay .. e+delay+width-1, so
// with delay 0 the output follows the input by one clock. The channel is
// busy after edges e .. e+delay+width-1 and accepts a new input edge
// sampled at e+delay+width+1 or later.
// From the paper: delay/width ranges, edge reference, retrigger rejection,
// the two 32-bit counters. Own choices: width = 0 behaves as 1, the one-clock
// minimum latency, counters cleared by `cnt_clr`, synchronous reset.
module delay_shaper
  import uctm2_pkg::*;
#(
  parameter int unsigned DW = SHAPE_W,
  parameter int unsigned CW = CNT_W
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          sig_in,
  input  logic [DW-1:0] delay,
  input  logic [DW-1:0] width,
  input  logic          cnt_en,
  input  logic          cnt_clr,
  output logic          sig_out,
  output logic          busy,
  output logic [CW-1:0] dead_time,
  output logic [CW-1:0] live_time
);
  typedef enum logic [1:0] {IDLE, DELAYING, SHAPING} state_t;
  state_t        state;
  logic [DW-1:0] cnt;
  logic          in_d;
  logic          edge_in;

  assign edge_in = sig_in && !in_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE;
      cnt   <= '0;
      in_d  <= 1'b0;
    end else begin
      in_d <= sig_in;
      unique case (state)
        IDLE: if (edge_in) begin
          cnt   <= 1;
          state <= (delay == '0) ? SHAPING : DELAYING;
        end
        DELAYING: if (cnt >= delay) begin
          cnt   <= 1;
          state <= SHAPING;
        end else cnt <= cnt + 1'b1;
        SHAPING: if (cnt >= width) state <= IDLE;
                 else              cnt   <= cnt + 1'b1;
        default: state <= IDLE;
      endcase
    end
  end

  assign sig_out = (state == SHAPING);
  assign busy    = (state != IDLE);

  always_ff @(posedge clk) begin
    if (rst || cnt_clr) begin
      dead_time <= '0;
      live_time <= '0;
    end else if (cnt_en) begin
      if (busy) dead_time <= dead_time + 1'b1;
      else      live_time <= live_time + 1'b1;
    end
  end
endmodule
