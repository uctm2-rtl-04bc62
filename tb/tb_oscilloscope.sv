// tb_oscilloscope: feeds a ramp (sample n has value n mod 4096) and 200 MHz
// trigger pulses, arms the module and reads the record back through the
// 13-bit port. Checks: triggers before preTrig samples are stored are
// ignored (wait-first-fill); the record from start_addr holds
// preTrig + 2 + postTrig consecutive samples; exactly one stored trigger
// bit, inside the trigger word; the write port stops when done; a second
// capture with another selTrig/preTrig/postTrig (including the full 16384
// sample depth) works.
module tb_oscilloscope;
  import uctm2_pkg::*;
  timeunit 1ns; timeprecision 10ps;
  logic clk200 = 0, clk100 = 0, rst = 1;
  logic [23:0] adc_word = '0;
  logic [7:0]  trig = '0;
  logic [2:0]  sel_trig = 3'd2;
  logic [13:0] pre_trig = '0, post_trig = '0, trig_addr, start_addr, rd_addr = '0;
  logic arm = 0, busy, done;
  logic [12:0] rd_data;
  int checks = 0, failures = 0;
  int sample_n = 0;

  oscilloscope dut (.*);

  initial forever begin
    #2.5 clk200 = 1; clk100 = 1;
    #2.5 clk200 = 0;
    #2.5 clk200 = 1; clk100 = 0;
    #2.5 clk200 = 0;
  end

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ramp stream
  always @(posedge clk100) begin
    #0.5;
    adc_word <= {12'(sample_n + 1), 12'(sample_n)};
    sample_n = sample_n + 2;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic trig_pulse(int ch);
    @(negedge clk200) trig[ch] = 1;
    @(negedge clk200) trig[ch] = 0;
  endtask

  task automatic read_sample(logic [13:0] a, output logic [12:0] d);
    @(negedge clk100) rd_addr = a;
    @(posedge clk100); #0.5;
    d = rd_data;
  endtask

  task automatic capture(int sel, int pre, int post, int wait_before_trig);
    logic [12:0] d, prev;
    int ntrig, len, nbad;
    @(negedge clk100) begin sel_trig = 3'(sel); pre_trig = 14'(pre); post_trig = 14'(post); arm = 1; end
    @(negedge clk100) arm = 0;
    chk(busy, "busy after arm");
    // early trigger on the selected line: must be ignored if preTrig is large
    if (pre > 40) begin
      repeat (5) @(negedge clk100);
      trig_pulse(sel);
    end
    // a pulse on another line is never a trigger
    trig_pulse((sel + 1) % 8);
    repeat (wait_before_trig) @(negedge clk100);
    trig_pulse(sel);
    wait (done);
    chk(!busy, "write port stopped when done");
    repeat (50) @(negedge clk100);
    len = pre + 2 + post;
    chk(14'(trig_addr - start_addr) == 14'(pre), $sformatf("trigger at record offset %0d, expected %0d", 14'(trig_addr - start_addr), pre));
    ntrig = 0; nbad = 0;
    for (int i = 0; i < len; i++) begin
      read_sample(14'(start_addr + 14'(i)), d);
      if (d[12]) begin
        ntrig++;
        chk(14'(start_addr + 14'(i)) == trig_addr || 14'(start_addr + 14'(i)) == 14'(trig_addr + 1),
            "stored trigger bit inside the trigger word");
      end
      if (i > 0 && d[11:0] != 12'(prev[11:0] + 1)) nbad++;
      prev = d;
    end
    chk(nbad == 0, $sformatf("%0d non-consecutive samples in the record", nbad));
    chk(ntrig == 1, $sformatf("%0d stored trigger bits, expected 1", ntrig));
  endtask

  initial begin
    repeat (4) @(negedge clk100);
    rst = 0;
    repeat (10) @(negedge clk100);
    capture(2, 100, 200, 300);
    capture(5, 0, 30, 3);
    capture(7, 8000, 8382, 4100);   // 8000 + 2 + 8382 = 16384 samples
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
