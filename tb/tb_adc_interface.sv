// tb_adc_interface: drives both ADC channels' six DDR lanes with random
// 12-bit sample streams (odd bits before the rising edge, even bits before
// the falling edge of clk200) and checks that every clk100 word holds two
// consecutive samples, earlier one in the low half, with one fixed latency
// and no sample lost or repeated.
module tb_adc_interface;
  import uctm2_pkg::*;
  timeunit 1ns; timeprecision 10ps;
  logic clk200 = 0, clk100 = 0, rst = 1;
  logic [ADC_LANES-1:0] adc_data [N_ADC];
  logic [2*ADC_W-1:0]   adc_word [N_ADC];
  int checks = 0, failures = 0;
  localparam int NS = 600;
  logic [11:0] smp [N_ADC][NS];
  int k_now = 0;

  adc_interface dut (.*);

  // clk100 rises with every second clk200 rising edge
  initial forever begin
    #2.5 clk200 = 1; clk100 = 1;
    #2.5 clk200 = 0;
    #2.5 clk200 = 1; clk100 = 0;
    #2.5 clk200 = 0;
  end

  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [5:0] odd_bits(logic [11:0] s);
    for (int i = 0; i < 6; i++) odd_bits[i] = s[2*i+1];
  endfunction
  function automatic logic [5:0] even_bits(logic [11:0] s);
    for (int i = 0; i < 6; i++) even_bits[i] = s[2*i];
  endfunction

  // sample k: odd bits set up before rising edge k, even before falling edge k
  initial begin
    for (int c = 0; c < N_ADC; c++)
      for (int k = 0; k < NS; k++) smp[c][k] = 12'($urandom);
    for (int c = 0; c < N_ADC; c++) adc_data[c] = '0;
    for (int k = 0; k < NS; k++) begin
      @(negedge clk200);
      #1;
      for (int c = 0; c < N_ADC; c++) adc_data[c] = odd_bits(smp[c][k]);
      k_now = k;
      @(posedge clk200);
      #1;
      for (int c = 0; c < N_ADC; c++) adc_data[c] = even_bits(smp[c][k]);
    end
  end

  initial begin
    int lat [N_ADC];
    for (int c = 0; c < N_ADC; c++) lat[c] = -1;
    repeat (3) @(posedge clk100);
    rst = 0;
    repeat (4) @(posedge clk100);
    for (int w = 0; w < NS / 2 - 10; w++) begin
      @(posedge clk100); #0.5;
      for (int c = 0; c < N_ADC; c++) begin
        // find where the word sits in the stream the first time
        if (lat[c] < 0) begin
          for (int j = 0; j < k_now; j++)
            if (adc_word[c] == {smp[c][j+1], smp[c][j]}) lat[c] = k_now - j;
          checks++;
          if (lat[c] < 0) begin failures++; $display("FAIL ch%0d: word %h not in stream", c, adc_word[c]); end
        end else begin
          int j;
          j = k_now - lat[c];
          checks++;
          if (adc_word[c] != {smp[c][j+1], smp[c][j]}) begin
            failures++;
            if (failures < 10) $display("FAIL ch%0d word %0d: %h expected %h", c, w, adc_word[c], {smp[c][j+1], smp[c][j]});
          end
        end
      end
    end
    checks++;
    if (lat[0] != lat[1]) begin failures++; $display("FAIL channel latencies differ"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
