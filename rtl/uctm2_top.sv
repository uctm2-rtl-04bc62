// uctm2_top: FPGA firmware of the UCTM2 trigger/scaler/delay/digitizer
// module. It wires together
//   - trigger_core (200 MHz): 8 discriminator inputs -> input blocks ->
//     duplication LUT -> 10 delay/shapers -> equation LUT -> 8 trigger
//     outputs, with scalers, dead/live time counters and the run timer;
//   - adc_interface: the two ADC channels' DDR lanes -> two 24-bit words
//     (sample pairs) per 100 MHz clock;
//   - 2 oscilloscopes and 2 MCAs, module k working on ADC channel k;
//   - 8 TDCs on the 200 MHz clock.
// All oscilloscopes, MCAs and TDCs pick their trigger, gate, start and stop
// among the eight trigger outputs.
// Not inside: the PLL/BUFPLL (clk200 and clk100 are inputs and must be
// phase aligned, clk100 rising with every second clk200 rising edge), the
// USB micro-controller interface (its register map is not published: every
// configuration, memory and readout port is a top-level port here, in the
// domain of the block it reaches) and the LED controllers (in_sig,
// shaper_busy and running are brought out for them). `rst` is synchronous
// and must be held for a few clk100 cycles.
module uctm2_top
  import uctm2_pkg::*;
(
  input  logic               clk200,
  input  logic               clk100,
  input  logic               rst,
  // window comparators
  input  logic [N_IN-1:0]    high,
  input  logic [N_IN-1:0]    low,
  // ADC DDR lanes
  input  logic [ADC_LANES-1:0] adc_data [N_ADC],
  // trigger core configuration (clk200 domain)
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
  input  logic               run_start,
  input  logic               run_stop,
  input  logic [47:0]        run_duration,
  input  logic               cnt_clr,
  output logic               running,          // run LED and output
  output logic [47:0]        run_elapsed,
  output logic [N_TRIG-1:0]  trig_out,         // to the TTL-to-NIM converters
  output logic [N_IN-1:0]    in_sig,           // to the input LEDs
  output logic [N_DUP-1:0]   shaper_busy,      // to the dead time LEDs
  output logic [CNT_W-1:0]   in_count  [N_IN],
  output logic [CNT_W-1:0]   out_count [N_TRIG],
  output logic [CNT_W-1:0]   dead_time [N_DUP],
  output logic [CNT_W-1:0]   live_time [N_DUP],
  // oscilloscopes (clk100 domain)
  input  osc_cfg_t           osc_cfg     [N_OSC],
  input  logic               osc_arm     [N_OSC],
  output logic               osc_busy    [N_OSC],
  output logic               osc_done    [N_OSC],
  output logic [OSC_AW-1:0]  osc_trig_addr  [N_OSC],
  output logic [OSC_AW-1:0]  osc_start_addr [N_OSC],
  input  logic [OSC_AW-1:0]  osc_rd_addr [N_OSC],
  output logic [ADC_W:0]     osc_rd_data [N_OSC],
  // MCAs (clk100 domain)
  input  mca_cfg_t           mca_cfg      [N_MCA],
  input  logic               mca_rd_en    [N_MCA],
  output logic [15:0]        mca_rd_data  [N_MCA],
  output logic               mca_empty    [N_MCA],
  output logic [10:0]        mca_level    [N_MCA],
  output logic               mca_overflow [N_MCA],
  // TDCs (clk200 domain)
  input  tdc_cfg_t           tdc_cfg      [N_TDC],
  input  logic               tdc_enable   [N_TDC],
  input  logic               tdc_rd_en    [N_TDC],
  output logic [15:0]        tdc_rd_data  [N_TDC],
  output logic               tdc_empty    [N_TDC],
  output logic [10:0]        tdc_level    [N_TDC],
  output logic               tdc_overflow [N_TDC]
);
  logic [2*ADC_W-1:0] adc_word [N_ADC];

  trigger_core #(.RUN_W(48)) u_core (
    .clk(clk200), .rst,
    .high, .low, .in_cfg, .sh_cfg,
    .dup_we, .dup_addr, .dup_wdata, .dup_rdata,
    .lut_we, .lut_addr, .lut_wdata, .lut_rdata,
    .run_start, .run_stop, .run_duration, .cnt_clr, .running, .run_elapsed,
    .trig_out, .in_sig, .shaper_busy, .in_count, .out_count, .dead_time, .live_time
  );

  adc_interface u_adc (
    .clk200, .clk100, .rst, .adc_data, .adc_word
  );

  for (genvar k = 0; k < N_OSC; k++) begin : g_osc
    oscilloscope u_osc (
      .clk100, .clk200, .rst,
      .adc_word  (adc_word[k]),
      .trig      (trig_out),
      .sel_trig  (osc_cfg[k].sel_trig),
      .pre_trig  (osc_cfg[k].pre_trig),
      .post_trig (osc_cfg[k].post_trig),
      .arm       (osc_arm[k]),
      .busy      (osc_busy[k]),
      .done      (osc_done[k]),
      .trig_addr (osc_trig_addr[k]),
      .start_addr(osc_start_addr[k]),
      .rd_addr   (osc_rd_addr[k]),
      .rd_data   (osc_rd_data[k])
    );
  end

  for (genvar k = 0; k < N_MCA; k++) begin : g_mca
    mca u_mca (
      .clk100, .clk200, .rst,
      .adc_word   (adc_word[k]),
      .trig       (trig_out),
      .sel_trig   (mca_cfg[k].sel_trig),
      .mca_mode   (mca_cfg[k].mode),
      .mca_bit_div(mca_cfg[k].bit_div),
      .rd_en      (mca_rd_en[k]),
      .rd_data    (mca_rd_data[k]),
      .empty      (mca_empty[k]),
      .level      (mca_level[k]),
      .overflow   (mca_overflow[k])
    );
  end

  for (genvar k = 0; k < N_TDC; k++) begin : g_tdc
    tdc u_tdc (
      .clk(clk200), .rst,
      .enable   (tdc_enable[k]),
      .trig     (trig_out),
      .sel_start(tdc_cfg[k].sel_start),
      .sel_stop (tdc_cfg[k].sel_stop),
      .tdc_mode (tdc_cfg[k].mode),
      .rd_en    (tdc_rd_en[k]),
      .rd_data  (tdc_rd_data[k]),
      .empty    (tdc_empty[k]),
      .level    (tdc_level[k]),
      .overflow (tdc_overflow[k])
    );
  end
endmodule
