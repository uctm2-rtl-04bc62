// tb_uctm2_top: the whole firmware at its default sizes, running the
// muon-lifetime set-up: a PMT on input 0 (negative pulses, so polarity
// inverted) gives a short gate i0 (shaper 0, 4 clocks); i0 is duplicated to
// shaper 1 (i1: 20 us gate starting 10 clocks later) and shaper 2 (i0
// delayed by 20.05 us = 4010 clocks). Equation 0 is START = i0 & i1,
// equation 1 is STOP = delayed i0, and TDC 0 (single stop) measures
// STOP - START = 4010 - (electron time - muon time) clocks for every muon
// followed by a decay electron. The same run also exercises: a window-mode
// input (accept and reject), a direct input, TDC 1 in multi-stop mode,
// oscilloscope 0 capturing the first PMT pulse with pre/post trigger
// samples, MCA 0 (negative amplitude) and MCA 1 (integration) gated by i0
// on ADC data driven through the DDR lanes, a timed run with scalers and
// dead/live time counters, and the 35 ns minimum trigger latency. Every
// mechanism is counted and one that never occurred is a failure.
module tb_uctm2_top;
  import uctm2_pkg::*;
  timeunit 1ns; timeprecision 10ps;

  logic clk200 = 0, clk100 = 0, rst = 1;
  logic [N_IN-1:0] high = '0, low = '0;
  logic [ADC_LANES-1:0] adc_data [N_ADC];
  input_cfg_t  in_cfg [N_IN];
  shaper_cfg_t sh_cfg [N_DUP];
  logic dup_we = 0, lut_we = 0;
  logic [N_IN-1:0]   dup_addr = '0;
  logic [N_DUP-1:0]  dup_wdata = '0, dup_rdata, lut_addr = '0;
  logic [N_TRIG-1:0] lut_wdata = '0, lut_rdata;
  logic run_start = 0, run_stop = 0, cnt_clr = 0, running;
  logic [47:0] run_duration = '0, run_elapsed;
  logic [N_TRIG-1:0] trig_out;
  logic [N_IN-1:0] in_sig;
  logic [N_DUP-1:0] shaper_busy;
  logic [CNT_W-1:0] in_count [N_IN], out_count [N_TRIG], dead_time [N_DUP], live_time [N_DUP];
  osc_cfg_t osc_cfg [N_OSC];
  logic osc_arm [N_OSC], osc_busy [N_OSC], osc_done [N_OSC];
  logic [OSC_AW-1:0] osc_trig_addr [N_OSC], osc_start_addr [N_OSC], osc_rd_addr [N_OSC];
  logic [ADC_W:0] osc_rd_data [N_OSC];
  mca_cfg_t mca_cfg [N_MCA];
  logic mca_rd_en [N_MCA], mca_empty [N_MCA], mca_overflow [N_MCA];
  logic [15:0] mca_rd_data [N_MCA];
  logic [10:0] mca_level [N_MCA];
  tdc_cfg_t tdc_cfg [N_TDC];
  logic tdc_enable [N_TDC], tdc_rd_en [N_TDC], tdc_empty [N_TDC], tdc_overflow [N_TDC];
  logic [15:0] tdc_rd_data [N_TDC];
  logic [10:0] tdc_level [N_TDC];

  uctm2_top dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;                         // clk200 rising edges
  int mech [string];

  initial forever begin
    #2.5 clk200 = 1; clk100 = 1;
    #2.5 clk200 = 0;
    #2.5 clk200 = 1; clk100 = 0;
    #2.5 clk200 = 0;
  end
  always @(posedge clk200) cyc++;

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- ADC
  // Both channels see the same PMT signal: baseline 0, a flat negative
  // pulse of amplitude `amp` lasting 40 samples from each PMT pulse.
  logic signed [11:0] adc_val = '0;
  int pulse_left = 0;
  int pulse_amp = 0;
  always @(posedge clk200) begin
    if (pulse_left > 0) begin
      adc_val <= 12'(-pulse_amp);
      pulse_left <= pulse_left - 1;
    end else adc_val <= '0;
  end
  // DDR lanes: odd bits before the rising edge, even bits before the falling
  logic [11:0] lane_val = '0;
  always @(negedge clk200) begin
    #1;
    lane_val = adc_val;
    for (int c = 0; c < N_ADC; c++)
      for (int i = 0; i < ADC_LANES; i++) adc_data[c][i] = lane_val[2*i+1];
  end
  always @(posedge clk200) begin
    #1;
    for (int c = 0; c < N_ADC; c++)
      for (int i = 0; i < ADC_LANES; i++) adc_data[c][i] = lane_val[2*i];
  end

  // ---------------------------------------------------------- stimulus
  int i0_times [$];                 // sampling edges of PMT pulses
  int amps [$];
  int tdc0_exp [$], tdc1_exp [$];
  int in1_time = -1;

  // PMT pulse on input 0: comparator pins inverted (polarity = 1)
  task automatic pmt(int amp, output int at);
    @(negedge clk200);
    low[0] = 1'b0;                  // pin level for "above low threshold"
    pulse_left = 40;
    pulse_amp = amp;
    @(posedge clk200);
    #0.1 at = cyc;
    repeat (3) @(negedge clk200);
    low[0] = 1'b1;
    i0_times.push_back(at);
    amps.push_back(amp);
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk200);
  endtask

  function automatic logic [N_DUP-1:0] dupf(logic [N_IN-1:0] x);
    // input 0 -> d0 (i0), d1 (i1), d2 (delayed i0); input k -> d(k+2)
    return {x[7:1], x[0], x[0], x[0]};
  endfunction
  function automatic logic [N_TRIG-1:0] eqf(logic [N_DUP-1:0] d);
    logic [N_TRIG-1:0] o;
    o = '0;
    o[0] = d[0] & d[1];             // START = i0 & i1
    o[1] = d[2];                    // STOP  = delayed i0
    o[2] = d[0];                    // i0 (oscilloscope trigger, MCA gate)
    o[3] = d[3];                    // input 1, direct
    o[4] = d[4];                    // input 2, window mode
    return o;
  endfunction

  initial begin
    int t_mu, t_e, t, lat;
    for (int i = 0; i < N_IN; i++) in_cfg[i] = '{polar: 1'b0, win_mode: 1'b0, peak_time: 6'd1};
    in_cfg[0].polar = 1'b1;
    in_cfg[2] = '{polar: 1'b0, win_mode: 1'b1, peak_time: 6'd5};
    for (int i = 0; i < N_DUP; i++) sh_cfg[i] = '{delay: 16'd0, width: 16'd4};
    sh_cfg[1] = '{delay: 16'd10, width: 16'd4000};     // 20 us gate
    sh_cfg[2] = '{delay: 16'd4010, width: 16'd4};      // 20.05 us delay
    high[0] = 1'b1; low[0] = 1'b1;                     // inverted idle pins
    for (int k = 0; k < N_OSC; k++) begin
      osc_cfg[k] = '{sel_trig: 3'd2, pre_trig: 14'd200, post_trig: 14'd400};
      osc_arm[k] = 0; osc_rd_addr[k] = '0;
    end
    mca_cfg[0] = '{sel_trig: 3'd2, mode: MCA_MIN, bit_div: 4'd0};
    mca_cfg[1] = '{sel_trig: 3'd2, mode: MCA_INTEG, bit_div: 4'd2};
    for (int k = 0; k < N_MCA; k++) mca_rd_en[k] = 0;
    for (int k = 0; k < N_TDC; k++) begin
      tdc_cfg[k] = '{sel_start: 3'd0, sel_stop: 3'd1, mode: TDC_SINGLE};
      tdc_enable[k] = 0; tdc_rd_en[k] = 0;
    end
    tdc_cfg[1] = '{sel_start: 3'd3, sel_stop: 3'd2, mode: TDC_MULTI};
    tdc_enable[0] = 1; tdc_enable[1] = 1;

    repeat (6) @(negedge clk100);
    rst = 0;
    // load duplication matrix and equations (host side tables)
    for (int a = 0; a < 256; a++) begin
      @(negedge clk200) begin dup_we = 1; dup_addr = 8'(a); dup_wdata = dupf(8'(a)); end
    end
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk200) begin dup_we = 0; lut_we = 1; lut_addr = 10'(a); lut_wdata = eqf(10'(a)); end
    end
    @(negedge clk200) lut_we = 0;
    // read back one word of each table
    @(negedge clk200) begin dup_addr = 8'h01; lut_addr = 10'h003; end
    @(negedge clk200);
    @(negedge clk200);
    chk(dup_rdata == dupf(8'h01) && lut_rdata == eqf(10'h003), "table read-back");
    // pulses made from the tables' power-up content must die out first
    wait (shaper_busy == '0);
    idle(20);

    // timed run of 60000 clocks (300 us)
    @(negedge clk200) cnt_clr = 1;
    @(negedge clk200) begin cnt_clr = 0; run_duration = 48'd60000; run_start = 1; end
    @(negedge clk200) run_start = 0;
    @(negedge clk100) begin osc_arm[0] = 1; osc_arm[1] = 1; end
    @(negedge clk100) begin osc_arm[0] = 0; osc_arm[1] = 0; end
    idle(300);                                          // preTrig fill

    // input 1: TDC 1 start (multi stop on every later i0)
    @(negedge clk200) low[1] = 1;
    @(posedge clk200);
    #0.1 in1_time = cyc;
    @(negedge clk200) low[1] = 0;
    idle(50);

    // event 1: muon + electron 440 clocks (2.2 us) later; first pulse also
    // measures the input-to-output latency of i0 on trigger output 2
    fork
      pmt(500, t_mu);
      begin
        lat = -1;
        @(negedge clk200);
        for (int n = 0; n < 20 && lat < 0; n++) begin
          @(posedge clk200); #0.5;
          if (trig_out[2]) lat = cyc - i0_times[0];
        end
      end
    join
    chk(lat == 6, $sformatf("trigger latency %0d clocks after the sampling edge, expected 6 (7 stages)", lat));
    if (lat == 6) mech["latency_35ns"]++;
    idle(440 - 5);
    pmt(800, t_e);
    tdc0_exp.push_back(4010 - (t_e - t_mu));
    idle(9000);

    // event 2: lone muon (no decay): STOP alone, nothing measured
    pmt(300, t_mu);
    idle(9000);

    // event 3: muon + electron 1500 clocks later
    pmt(1000, t_mu);
    idle(1500 - 5);
    pmt(600, t_e);
    tdc0_exp.push_back(4010 - (t_e - t_mu));
    idle(9000);

    // event 4: muon + electron 100 clocks later
    pmt(700, t_mu);
    idle(100 - 5);
    pmt(400, t_e);
    tdc0_exp.push_back(4010 - (t_e - t_mu));
    idle(9000);

    // window-mode input 2: one accepted pulse, one rejected (high crossed)
    @(negedge clk200) low[2] = 1;
    idle(20);
    low[2] = 0;
    idle(20);
    @(negedge clk200) low[2] = 1;
    idle(2);
    high[2] = 1;
    idle(10);
    high[2] = 0; low[2] = 0;

    wait (!running);
    idle(50);

    // ---------------------------------------------------------- checks
    for (int k = 0; k < i0_times.size(); k++) tdc1_exp.push_back(i0_times[k] - in1_time);

    chk(run_elapsed == 48'd60000, $sformatf("run length %0d", run_elapsed));
    if (run_elapsed == 48'd60000) mech["timed_run"]++;
    chk(in_count[0] == 32'(i0_times.size()), $sformatf("input 0 scaler %0d, expected %0d", in_count[0], i0_times.size()));
    if (in_count[0] == 32'(i0_times.size())) mech["polarity_inversion"]++;
    chk(out_count[2] == 32'(i0_times.size()), $sformatf("i0 output scaler %0d", out_count[2]));
    chk(out_count[0] == 32'(tdc0_exp.size()), $sformatf("START count %0d, expected %0d", out_count[0], tdc0_exp.size()));
    chk(out_count[1] == 32'd4, $sformatf("STOP count %0d, expected 4 (one per muon)", out_count[1]));
    if (out_count[0] == 32'(tdc0_exp.size()) && out_count[1] == 32'd4) mech["coincidence_equation"]++;
    if (out_count[1] == 32'd4 && out_count[2] == 32'(i0_times.size())) mech["duplication"]++;
    chk(dead_time[2] == 32'(4 * (4010 + 4)), $sformatf("shaper 2 dead time %0d", dead_time[2]));
    chk(dead_time[2] + live_time[2] == 32'd60000, "shaper 2 dead + live = run length");
    if (in_count[0] > out_count[1]) mech["retrigger_ignored"]++;
    if (dead_time[2] > 0) mech["dead_time_counted"]++;
    chk(in_count[2] == 32'd1 && out_count[4] == 32'd1, $sformatf("window input: in %0d out %0d, expected 1/1", in_count[2], out_count[4]));
    if (in_count[2] == 32'd1) mech["window_accept_reject"]++;
    chk(in_count[1] == 32'd1 && out_count[3] == 32'd1, "direct input 1 counted");

    // TDC 0: muon lifetime values
    chk(tdc_level[0] == 11'(tdc0_exp.size()), $sformatf("TDC0 holds %0d values", tdc_level[0]));
    while (!tdc_empty[0]) begin
      logic [31:0] w;
      int e;
      @(negedge clk200);
      w[15:0] = tdc_rd_data[0];
      tdc_rd_en[0] = 1;
      @(negedge clk200);
      w[31:16] = tdc_rd_data[0];
      @(negedge clk200);
      tdc_rd_en[0] = 0;
      e = (tdc0_exp.size() > 0) ? tdc0_exp.pop_front() : -1;
      chk(w == 32'(e), $sformatf("TDC0 value %0d expected %0d", w, e));
      if (w == 32'(e)) mech["tdc_single_stop"]++;
    end
    chk(tdc0_exp.size() == 0, "all muon decays measured");

    // TDC 1: multi stop, one value per i0 after the single start
    chk(tdc_level[1] == 11'(tdc1_exp.size()), $sformatf("TDC1 holds %0d values, expected %0d", tdc_level[1], tdc1_exp.size()));
    while (!tdc_empty[1]) begin
      logic [31:0] w;
      int e;
      @(negedge clk200);
      w[15:0] = tdc_rd_data[1];
      tdc_rd_en[1] = 1;
      @(negedge clk200);
      w[31:16] = tdc_rd_data[1];
      @(negedge clk200);
      tdc_rd_en[1] = 0;
      e = (tdc1_exp.size() > 0) ? tdc1_exp.pop_front() : -1;
      chk(w == 32'(e), $sformatf("TDC1 value %0d expected %0d", w, e));
      if (w == 32'(e)) mech["tdc_multi_stop"]++;
    end

    // MCA 0: |minimum| = pulse amplitude; MCA 1: |4 x -amp| >> 2 = amp
    for (int k = 0; k < N_MCA; k++) begin
      chk(mca_level[k] == 11'(amps.size()), $sformatf("MCA%0d holds %0d results", k, mca_level[k]));
      for (int j = 0; j < amps.size(); j++) begin
        int got;
        @(negedge clk100);
        got = int'(mca_rd_data[k]);
        mca_rd_en[k] = 1;
        @(negedge clk100) mca_rd_en[k] = 0;
        chk(got == amps[j], $sformatf("MCA%0d result %0d expected %0d", k, got, amps[j]));
        if (got == amps[j]) mech[k == 0 ? "mca_min" : "mca_integration"]++;
      end
    end

    // oscilloscopes: triggered on the first i0; pulse visible after it
    for (int k = 0; k < N_OSC; k++) begin
      int ntrig, nneg, first_neg;
      chk(osc_done[k] && !osc_busy[k], $sformatf("oscilloscope %0d done", k));
      chk(14'(osc_trig_addr[k] - osc_start_addr[k]) == 14'd200, "preTrig samples before the trigger word");
      ntrig = 0; nneg = 0; first_neg = -1;
      for (int i = 0; i < 200 + 2 + 400; i++) begin
        @(negedge clk100) osc_rd_addr[k] = 14'(osc_start_addr[k] + 14'(i));
        @(posedge clk100); #0.5;
        if (osc_rd_data[k][12]) ntrig++;
        if ($signed(osc_rd_data[k][11:0]) == -12'sd500) begin
          nneg++;
          if (first_neg < 0) first_neg = i;
        end
      end
      chk(ntrig == 4, $sformatf("osc %0d: %0d trigger samples (i0 is 4 samples)", k, ntrig));
      chk(nneg == 40, $sformatf("osc %0d: %0d samples of the first pulse, expected 40", k, nneg));
      chk(first_neg > 150 && first_neg < 200, $sformatf("osc %0d: pulse starts at record sample %0d", k, first_neg));
      if (ntrig == 4 && nneg == 40) mech["oscilloscope_capture"]++;
    end

    foreach (mech[m]) $display("mechanism %s: %0d", m, mech[m]);
    begin
      string need [13] = '{"latency_35ns", "timed_run", "polarity_inversion", "coincidence_equation",
                           "duplication", "retrigger_ignored", "dead_time_counted",
                           "window_accept_reject", "tdc_single_stop", "tdc_multi_stop",
                           "mca_min", "mca_integration", "oscilloscope_capture"};
      foreach (need[i]) begin
        checks++;
        if (!mech.exists(need[i])) begin
          failures++;
          $display("FAIL mechanism never seen: %s", need[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
