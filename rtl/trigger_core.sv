// trigger_core: the "trigger and counter" core, clocked at 200 MHz.
//   8 x input_block -> duplication_block (2^8 x 10 LUT)
//   -> 10 x delay_shaper -> logic_block (2^10 x 8 LUT) -> output register
// giving the eight trigger outputs (trig_out), which go to the NIM outputs
// and to the oscilloscope, MCA and TDC modules. Scalers (32-bit) count the
// input-block outputs and the trigger outputs; the run timer enables them
// and the shapers' dead/live time counters.
// Latency: a comparator edge sampled at clock c appears on trig_out at
// clock c+7 in direct mode with zero delay (2 synchroniser FFs, input
// register, duplication RAM, shaper, logic RAM, output register), i.e. 35 ns,
// the minimum input-to-output latency the paper quotes. Window mode adds
// peakTime clocks, the shapers add their programmed delay.
// From the paper: the chain, all widths and counts, the scalers, the run
// timer enabling counting. Own choices: the output register, the
// configuration ports (the configuration interface itself is not described),
// one clock for the whole core.
module trigger_core
  import uctm2_pkg::*;
#(
  parameter int unsigned RUN_W = 48
) (
  input  logic               clk,
  input  logic               rst,
  // window comparator outputs
  input  logic [N_IN-1:0]    high,
  input  logic [N_IN-1:0]    low,
  // configuration
  input  input_cfg_t         in_cfg [N_IN],
  input  shaper_cfg_t        sh_cfg [N_DUP],
  input  logic               dup_we,
  input  logic [N_IN-1:0]    dup_addr,
  input  logic [N_DUP-1:0]   dup_wdata,
  output logic [N_DUP-1:0]   dup_rdata,
  input  logic               lut_we,
  input  logic [N_DUP-1:0]   lut_addr,
  input  logic [N_TRIG-1:0]  lut_wdata,
  output logic [N_TRIG-1:0]  lut_rdata,
  // run control
  input  logic               run_start,
  input  logic               run_stop,
  input  logic [RUN_W-1:0]   run_duration,
  input  logic               cnt_clr,
  output logic               running,
  output logic [RUN_W-1:0]   run_elapsed,
  // results
  output logic [N_TRIG-1:0]  trig_out,
  output logic [N_IN-1:0]    in_sig,       // to the input LED controller
  output logic [N_DUP-1:0]   shaper_busy,  // to the dead time LED controller
  output logic [CNT_W-1:0]   in_count   [N_IN],
  output logic [CNT_W-1:0]   out_count  [N_TRIG],
  output logic [CNT_W-1:0]   dead_time  [N_DUP],
  output logic [CNT_W-1:0]   live_time  [N_DUP]
);
  logic [N_DUP-1:0]  dup_sig;
  logic [N_DUP-1:0]  shaped;
  logic [N_TRIG-1:0] lut_out;

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    input_block u_in (
      .clk, .rst,
      .high_in   (high[i]),
      .low_in    (low[i]),
      .polar     (in_cfg[i].polar),
      .win_mode  (in_cfg[i].win_mode),
      .peak_time (in_cfg[i].peak_time),
      .trig_out  (in_sig[i])
    );
    event_counter #(.W(CNT_W)) u_cnt (
      .clk, .rst, .clr(cnt_clr), .en(running), .sig(in_sig[i]), .count(in_count[i])
    );
  end

  duplication_block u_dup (
    .clk,
    .a_addr(in_sig), .a_data(dup_sig),
    .b_we(dup_we), .b_addr(dup_addr), .b_wdata(dup_wdata), .b_rdata(dup_rdata)
  );

  for (genvar i = 0; i < N_DUP; i++) begin : g_sh
    delay_shaper u_sh (
      .clk, .rst,
      .sig_in   (dup_sig[i]),
      .delay    (sh_cfg[i].delay),
      .width    (sh_cfg[i].width),
      .cnt_en   (running),
      .cnt_clr  (cnt_clr),
      .sig_out  (shaped[i]),
      .busy     (shaper_busy[i]),
      .dead_time(dead_time[i]),
      .live_time(live_time[i])
    );
  end

  logic_block u_lut (
    .clk,
    .a_addr(shaped), .a_data(lut_out),
    .b_we(lut_we), .b_addr(lut_addr), .b_wdata(lut_wdata), .b_rdata(lut_rdata)
  );

  always_ff @(posedge clk) begin
    if (rst) trig_out <= '0;
    else     trig_out <= lut_out;
  end

  for (genvar i = 0; i < N_TRIG; i++) begin : g_out
    event_counter #(.W(CNT_W)) u_cnt (
      .clk, .rst, .clr(cnt_clr), .en(running), .sig(trig_out[i]), .count(out_count[i])
    );
  end

  run_timer #(.W(RUN_W)) u_run (
    .clk, .rst, .start(run_start), .stop(run_stop), .duration(run_duration),
    .running, .elapsed(run_elapsed)
  );
endmodule
