// mca: multi-channel analyser front end for one ADC channel (100 MHz).
// A gate, one of the eight trigger outputs chosen by sel_trig and brought to
// 100 MHz as one bit per sample (trig_stretch), frames a measurement over
// the ADC samples whose gate bit is set. Modes (mca_mode):
//   MCA_MAX   |largest sample|          (positive amplitude)
//   MCA_MIN   |smallest sample|         (negative amplitude)
//   MCA_AMPL  largest - smallest        (total amplitude)
//   MCA_INTEG |sum of samples| >> bit_div, in a 21-bit integrator (charge)
// The result is always a 13-bit magnitude; in integration mode values that
// still exceed 13 bits after the shift are clipped to 8191. When the gate
// closes (a 100 MHz cycle with no gate bit), the result is pushed into a
// 1024 x 16 FIFO ({3'b0, result}) read by the host (show-ahead read).
// Timing: the result enters the FIFO two clk100 cycles after the last gated
// word is seen by the state machine. The paper does not say how a full FIFO
// is handled; here new results are then dropped and `overflow` is set until
// reset. Samples are two's complement; the integrator wraps (the host
// chooses gates short enough, 2^9 full-scale samples).
// From the paper: the modes, the 13-bit absolute output, the 21-bit
// integrator with bitDiv, the 1024 x 16 buffer, the gate selection.
// Own choices: the 2-bit mode encoding (the paper speaks of an mca_mode bit
// but lists four modes), clipping, per-sample gating, overflow flag.
module mca
  import uctm2_pkg::*;
#(
  parameter int unsigned FIFO_AW = 10
) (
  input  logic               clk100,
  input  logic               clk200,
  input  logic               rst,
  input  logic [2*ADC_W-1:0] adc_word,     // two samples, earlier in [11:0]
  input  logic [N_TRIG-1:0]  trig,         // 200 MHz trigger outputs
  input  logic [SEL_W-1:0]   sel_trig,
  input  mca_mode_t          mca_mode,
  input  logic [3:0]         mca_bit_div,
  input  logic               rd_en,
  output logic [15:0]        rd_data,
  output logic               empty,
  output logic [FIFO_AW:0]   level,
  output logic               overflow
);
  typedef enum logic {IDLE, MEASURE} state_t;
  state_t state;

  logic [1:0]                   gate;
  logic signed [ADC_W-1:0]      s0, s1;
  logic signed [ADC_W-1:0]      vmax, vmin, nmax, nmin;
  logic signed [MCA_INT_W-1:0]  acc, nacc;
  logic                         open_now;
  logic [MCA_OUT_W-1:0]         result;
  logic                         push, full;
  logic [15:0]                  push_data;

  trig_stretch u_ts (
    .clk200, .clk100, .rst, .trig, .sel(sel_trig), .pair(gate)
  );

  assign s0 = adc_word[ADC_W-1:0];
  assign s1 = adc_word[2*ADC_W-1:ADC_W];
  assign open_now = (gate != 2'b00);

  // next extremes and sum, starting fresh when the gate opens
  always_comb begin
    logic signed [ADC_W-1:0]     bmax, bmin;
    logic signed [MCA_INT_W-1:0] bacc;
    bmax = (state == IDLE) ? {1'b1, {(ADC_W-1){1'b0}}} : vmax;
    bmin = (state == IDLE) ? {1'b0, {(ADC_W-1){1'b1}}} : vmin;
    bacc = (state == IDLE) ? '0 : acc;
    nmax = bmax;
    nmin = bmin;
    nacc = bacc;
    if (gate[0]) begin
      if (s0 > nmax) nmax = s0;
      if (s0 < nmin) nmin = s0;
      nacc = nacc + MCA_INT_W'(s0);
    end
    if (gate[1]) begin
      if (s1 > nmax) nmax = s1;
      if (s1 < nmin) nmin = s1;
      nacc = nacc + MCA_INT_W'(s1);
    end
  end

  // result of the finished measurement
  always_comb begin
    logic signed [MCA_OUT_W-1:0] emax, emin;
    logic [MCA_INT_W-1:0]        mag;
    logic [MCA_INT_W-1:0]        shifted;
    emax = MCA_OUT_W'(vmax);
    emin = MCA_OUT_W'(vmin);
    mag     = acc[MCA_INT_W-1] ? MCA_INT_W'(-acc) : MCA_INT_W'(acc);
    shifted = mag >> mca_bit_div;
    unique case (mca_mode)
      MCA_MAX:  result = emax[MCA_OUT_W-1] ? MCA_OUT_W'(-emax) : MCA_OUT_W'(emax);
      MCA_MIN:  result = emin[MCA_OUT_W-1] ? MCA_OUT_W'(-emin) : MCA_OUT_W'(emin);
      MCA_AMPL: result = MCA_OUT_W'(emax - emin);
      default:  result = (shifted > MCA_INT_W'(2**MCA_OUT_W - 1)) ?
                         {MCA_OUT_W{1'b1}} : shifted[MCA_OUT_W-1:0];
    endcase
  end

  always_ff @(posedge clk100) begin
    if (rst) begin
      state    <= IDLE;
      vmax     <= '0;
      vmin     <= '0;
      acc      <= '0;
      push     <= 1'b0;
      push_data <= '0;
      overflow <= 1'b0;
    end else begin
      push <= 1'b0;
      if (open_now) begin
        state <= MEASURE;
        vmax  <= nmax;
        vmin  <= nmin;
        acc   <= nacc;
      end else if (state == MEASURE) begin
        state <= IDLE;
        push  <= 1'b1;
        push_data <= {3'b000, result};
      end
      if (push && full) overflow <= 1'b1;
    end
  end

  fifo_sync #(.DW(16), .AW(FIFO_AW)) u_fifo (
    .clk(clk100), .rst,
    .wr_en(push), .wr_data(push_data),
    .rd_en, .rd_data, .empty, .full, .level
  );
endmodule
