// tb_trigger_core: the trigger and counter core end to end at 200 MHz.
//  - duplication table: input i -> signal i (i = 0..7), input 0 also -> 8,
//    input 1 also -> 9; equation table: out0 = d0 | d1 (the OR example),
//    out1 = d8 & d9, out i = d i for i = 2..7.
//  - latency: an input level sampled at clock edge n reaches trig_out after
//    edge n+6 (seven register stages, 35 ns) with delay 0;
//  - delays: channel 6 delayed by 100 clocks;
//  - scalers and run timer: pulses counted only during a timed run;
//  - shaper dead time: width 30 with pulses every 10 clocks keeps 1 in 4;
//  - window mode on input 5 (reject with a high crossing, accept without).
module tb_trigger_core;
  import uctm2_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst = 1;
  logic [7:0] high = '0, low = '0;
  input_cfg_t  in_cfg [N_IN];
  shaper_cfg_t sh_cfg [N_DUP];
  logic dup_we = 0, lut_we = 0;
  logic [7:0] dup_addr = '0;
  logic [9:0] dup_wdata = '0, dup_rdata, lut_addr = '0;
  logic [7:0] lut_wdata = '0, lut_rdata;
  logic run_start = 0, run_stop = 0, cnt_clr = 0, running;
  logic [47:0] run_duration = '0, run_elapsed;
  logic [7:0] trig_out, in_sig;
  logic [9:0] shaper_busy;
  logic [31:0] in_count [N_IN], out_count [N_TRIG], dead_time [N_DUP], live_time [N_DUP];
  int checks = 0, failures = 0;

  trigger_core dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [9:0] dupf(logic [7:0] x);
    return {x[1], x[0], x};
  endfunction
  function automatic logic [7:0] eqf(logic [9:0] d);
    return {d[7:2], d[8] & d[9], d[0] | d[1]};
  endfunction

  // pulse `len` clocks on low[ch] (positive polarity)
  task automatic pulse(int ch, int len);
    @(negedge clk) low[ch] = 1;
    repeat (len) @(negedge clk);
    low[ch] = 0;
  endtask

  initial begin
    for (int i = 0; i < N_IN; i++) in_cfg[i] = '{polar: 1'b0, win_mode: 1'b0, peak_time: 6'd1};
    for (int i = 0; i < N_DUP; i++) sh_cfg[i] = '{delay: 16'd0, width: 16'd1};
    repeat (4) @(negedge clk);
    rst = 0;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk) begin dup_we = 1; dup_addr = 8'(a); dup_wdata = dupf(8'(a)); end
    end
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk) begin dup_we = 0; lut_we = 1; lut_addr = 10'(a); lut_wdata = eqf(10'(a)); end
    end
    @(negedge clk) lut_we = 0;
    repeat (10) @(negedge clk);

    // latency through the whole chain
    begin
      int n0, seen;
      seen = -1;
      @(negedge clk) low[2] = 1;
      n0 = 0;
      for (int n = 0; n < 20; n++) begin
        @(posedge clk); #0.5;
        if (trig_out[2] && seen < 0) seen = n;
        @(negedge clk) low[2] = 0;
      end
      chk(seen == 6, $sformatf("latency: trig_out after edge n+%0d, expected n+6", seen));
    end

    // delay of 100 clocks on channel 6, width 7
    sh_cfg[6] = '{delay: 16'd100, width: 16'd7};
    begin
      int seen, len;
      seen = -1; len = 0;
      @(negedge clk) low[6] = 1;
      for (int n = 0; n < 150; n++) begin
        @(posedge clk); #0.5;
        if (trig_out[6]) begin if (seen < 0) seen = n; len++; end
        @(negedge clk) low[6] = 0;
      end
      chk(seen == 106, $sformatf("delayed output at n+%0d, expected n+106", seen));
      chk(len == 7, $sformatf("shaped width %0d, expected 7", len));
    end

    // timed run of 3000 clocks; pulses before the run are not counted
    pulse(3, 2);
    repeat (10) @(negedge clk);
    @(negedge clk) begin cnt_clr = 1; end
    @(negedge clk) begin cnt_clr = 0; run_duration = 48'd3000; run_start = 1; end
    @(negedge clk) run_start = 0;
    sh_cfg[4] = '{delay: 16'd0, width: 16'd30};
    for (int k = 0; k < 5; k++) begin
      pulse(0, 3); repeat (20) @(negedge clk);
      pulse(1, 3); repeat (20) @(negedge clk);
      pulse(3, 2); repeat (20) @(negedge clk);
    end
    // input 0 and 1 together: out1 = d8 & d9 coincidence
    for (int k = 0; k < 4; k++) begin
      @(negedge clk) low[1:0] = 2'b11;
      repeat (3) @(negedge clk);
      low[1:0] = 2'b00;
      repeat (20) @(negedge clk);
    end
    // pulses every 10 clocks into a 30-clock shaper
    for (int k = 0; k < 16; k++) begin
      pulse(4, 1); repeat (8) @(negedge clk);
    end
    // window mode on input 5, peak 4
    in_cfg[5] = '{polar: 1'b0, win_mode: 1'b1, peak_time: 6'd4};
    repeat (5) @(negedge clk);
    @(negedge clk) low[5] = 1;               // good pulse
    repeat (15) @(negedge clk);
    low[5] = 0;
    repeat (10) @(negedge clk);
    @(negedge clk) low[5] = 1;               // crosses high: rejected
    repeat (2) @(negedge clk);
    high[5] = 1;
    repeat (10) @(negedge clk);
    high[5] = 0; low[5] = 0;
    wait (!running);
    repeat (5) @(negedge clk);
    pulse(3, 2);                              // after the run: not counted
    repeat (20) @(negedge clk);
    chk(run_elapsed == 48'd3000, $sformatf("run elapsed %0d", run_elapsed));
    chk(in_count[0] == 9 && in_count[1] == 9, $sformatf("input scalers 0/1: %0d %0d", in_count[0], in_count[1]));
    chk(in_count[3] == 5, $sformatf("input scaler 3: %0d", in_count[3]));
    chk(out_count[0] == 14, $sformatf("OR output count %0d, expected 14", out_count[0]));
    chk(out_count[1] == 4, $sformatf("coincidence count %0d, expected 4", out_count[1]));
    chk(out_count[3] == 5, $sformatf("output 3 count %0d", out_count[3]));
    chk(in_count[4] == 16, $sformatf("input 4 count %0d", in_count[4]));
    chk(out_count[4] == 4, $sformatf("shaper 4 kept %0d pulses, expected 4", out_count[4]));
    chk(dead_time[4] == 32'd120, $sformatf("dead time 4 = %0d, expected 120", dead_time[4]));
    chk(dead_time[4] + live_time[4] == 32'd3000, "dead+live = run length");
    chk(in_count[5] == 1 && out_count[5] == 1, $sformatf("window: in %0d out %0d, expected 1", in_count[5], out_count[5]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
