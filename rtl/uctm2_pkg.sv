// uctm2_pkg: sizes, enums and configuration records shared by the UCTM2
// firmware blocks. The numbers (8 inputs, 10 duplicated signals, 8 trigger
// outputs, 2 oscilloscopes, 2 MCAs, 8 TDCs, 12-bit ADC, 32-bit scalers,
// 16-bit delay/width, 6-bit peakTime, 14-bit preTrig/postTrig, 3-bit trigger
// selectors, 24-bit TDC counter, 21-bit MCA integrator) follow the paper.
// The encodings of the MCA and TDC modes are this design's choice.
package uctm2_pkg;
  localparam int unsigned N_IN     = 8;   // analog inputs / window comparators
  localparam int unsigned N_DUP    = 10;  // duplicated + shaped signals
  localparam int unsigned N_TRIG   = 8;   // trigger equations / outputs
  localparam int unsigned N_OSC    = 2;
  localparam int unsigned N_MCA    = 2;
  localparam int unsigned N_TDC    = 8;
  localparam int unsigned N_ADC    = 2;   // ADC channels
  localparam int unsigned ADC_W    = 12;
  localparam int unsigned ADC_LANES = 6;  // DDR lanes per ADC channel
  localparam int unsigned CNT_W    = 32;  // scalers, dead/live time counters
  localparam int unsigned SHAPE_W  = 16;  // delay and width range
  localparam int unsigned PEAK_W   = 6;   // peakTime range 1..63
  localparam int unsigned OSC_AW   = 14;  // 16384 samples
  localparam int unsigned SEL_W    = 3;   // selects one of 8 trigger outputs
  localparam int unsigned TDC_W    = 24;
  localparam int unsigned MCA_INT_W = 21;
  localparam int unsigned MCA_OUT_W = 13;

  typedef enum logic [1:0] {
    MCA_MAX   = 2'd0,   // positive amplitude: largest sample in the gate
    MCA_MIN   = 2'd1,   // negative amplitude: |smallest sample|
    MCA_AMPL  = 2'd2,   // total amplitude: max - min
    MCA_INTEG = 2'd3    // charge: |sum of samples| >> bitDiv
  } mca_mode_t;

  typedef enum logic {
    TDC_SINGLE = 1'b0,
    TDC_MULTI  = 1'b1
  } tdc_mode_t;

  typedef struct packed {
    logic              polar;
    logic              win_mode;
    logic [PEAK_W-1:0] peak_time;
  } input_cfg_t;

  typedef struct packed {
    logic [SHAPE_W-1:0] delay;
    logic [SHAPE_W-1:0] width;
  } shaper_cfg_t;

  typedef struct packed {
    logic [SEL_W-1:0]  sel_trig;
    logic [OSC_AW-1:0] pre_trig;
    logic [OSC_AW-1:0] post_trig;
  } osc_cfg_t;

  typedef struct packed {
    logic [SEL_W-1:0] sel_trig;
    mca_mode_t        mode;
    logic [3:0]       bit_div;
  } mca_cfg_t;

  typedef struct packed {
    logic [SEL_W-1:0] sel_start;
    logic [SEL_W-1:0] sel_stop;
    tdc_mode_t        mode;
  } tdc_cfg_t;
endpackage
