// adc_interface: receives the dual 12-bit 200 Msps ADC over its 6-lane DDR
// LVDS interface per channel and hands each channel to the 100 MHz
// processing modules as 24-bit words holding two consecutive samples. This
// is the function the paper gives to the FPGA's ISERDES2 deserializers; here
// it is written as plain flip-flops.
// Bit mapping (assumed, not given in the paper): lane i carries sample bit
// 2i+1 on the rising edge of clk200 and bit 2i on the following falling
// edge. Rising-edge bits are captured on posedge, falling-edge bits on
// negedge; on the next posedge the 12-bit sample is assembled and shifted
// into a two-sample register. Each clk100 edge (aligned with every second
// clk200 edge, both from the PLL) takes the last two samples:
// adc_word[c][11:0] is the earlier sample, adc_word[c][23:12] the later one.
// Latency: about three clk200 periods to the two-sample register plus the
// clk100 capture. Samples are passed on unchanged (two's complement).
module adc_interface
  import uctm2_pkg::*;
(
  input  logic                    clk200,   // ADC data clock domain (from PLL)
  input  logic                    clk100,   // half-rate system clock (from PLL)
  input  logic                    rst,
  input  logic [ADC_LANES-1:0]    adc_data [N_ADC],  // DDR lanes per channel
  output logic [2*ADC_W-1:0]      adc_word [N_ADC]
);
  for (genvar c = 0; c < N_ADC; c++) begin : g_ch
    logic [ADC_LANES-1:0] rise_q, fall_q;
    logic [ADC_W-1:0]     sample, sample_d;

    always_ff @(posedge clk200) rise_q <= adc_data[c];
    always_ff @(negedge clk200) fall_q <= adc_data[c];

    always_ff @(posedge clk200) begin
      if (rst) begin
        sample   <= '0;
        sample_d <= '0;
      end else begin
        for (int i = 0; i < ADC_LANES; i++) begin
          sample[2*i+1] <= rise_q[i];
          sample[2*i]   <= fall_q[i];
        end
        sample_d <= sample;
      end
    end

    always_ff @(posedge clk100) begin
      if (rst) adc_word[c] <= '0;
      else     adc_word[c] <= {sample, sample_d};
    end
  end
endmodule
