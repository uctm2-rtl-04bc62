// tdc: time-to-digital converter channel (200 MHz, 5 ns bins).
// Start and stop are two of the eight trigger outputs (sel_start,
// sel_stop); their rising edges drive a small FSM:
//   start edge: a 24-bit counter is cleared and counts clk200 cycles (RUN);
//   stop edge in RUN: the counter value is written to the output FIFO;
//     single stop mode: the counter stops and further stops are ignored
//     until the next start; multi stop mode: every later stop is measured
//     until a new start restarts the counter.
// A start edge sampled at clock s and a stop edge at clock t give t - s,
// so the range is 1 (5 ns) to 2^24-1 (about 83.9 ms). When the counter
// reaches 2^24-1 the measurement ends without a result (own choice). A stop
// in the same clock as a start is ignored, the start wins (own choice).
// Output buffer: 1024 x 32 bit FIFO ({8'b0, time}), read by the host as
// 16-bit halves, low half first (2048 x 16): rd_en moves to the next half.
// Full FIFO: results are dropped and `overflow` is set (own choice).
// `enable` low keeps the channel idle. From the paper: the modes, 24-bit
// counter, FIFO geometry, start/stop selection.
module tdc
  import uctm2_pkg::*;
#(
  parameter int unsigned FIFO_AW = 10
) (
  input  logic              clk,        // 200 MHz
  input  logic              rst,
  input  logic              enable,
  input  logic [N_TRIG-1:0] trig,
  input  logic [SEL_W-1:0]  sel_start,
  input  logic [SEL_W-1:0]  sel_stop,
  input  tdc_mode_t         tdc_mode,
  input  logic              rd_en,      // read one 16-bit half
  output logic [15:0]       rd_data,
  output logic              empty,
  output logic [FIFO_AW:0]  level,      // 32-bit words stored
  output logic              overflow
);
  typedef enum logic {IDLE, RUN} state_t;
  state_t           state;
  logic [TDC_W-1:0] cnt;
  logic             start_d, stop_d, start_e, stop_e;
  logic             push, full, half;
  logic [31:0]      head;

  assign start_e = trig[sel_start] && !start_d;
  assign stop_e  = trig[sel_stop]  && !stop_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= IDLE;
      cnt      <= '0;
      start_d  <= 1'b0;
      stop_d   <= 1'b0;
      overflow <= 1'b0;
    end else begin
      start_d <= trig[sel_start];
      stop_d  <= trig[sel_stop];
      if (push && full) overflow <= 1'b1;
      if (!enable) begin
        state <= IDLE;
      end else if (start_e) begin
        state <= RUN;
        cnt   <= 1;
      end else if (state == RUN) begin
        if (stop_e && tdc_mode == TDC_SINGLE) state <= IDLE;
        else if (cnt == '1)                   state <= IDLE;
        cnt <= cnt + 1'b1;
      end
    end
  end

  assign push = enable && !start_e && (state == RUN) && stop_e;

  fifo_sync #(.DW(32), .AW(FIFO_AW)) u_fifo (
    .clk, .rst,
    .wr_en(push), .wr_data({8'h00, cnt}),
    .rd_en(rd_en && half), .rd_data(head), .empty, .full, .level
  );

  always_ff @(posedge clk) begin
    if (rst)                 half <= 1'b0;
    else if (rd_en && !empty) half <= !half;
  end
  assign rd_data = half ? head[31:16] : head[15:0];
endmodule
