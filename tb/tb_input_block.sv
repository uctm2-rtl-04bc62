// tb_input_block: directed test of one discriminator input channel.
// Checks the direct path latency (2 clocks after the sampling edge), the
// polarity inversion, the window detector's acceptance after peak_time
// (exact clock and one-clock pulse), its rejection when the high threshold
// is crossed inside the window, acceptance when it is crossed only later,
// and window mode with inverted polarity.
module tb_input_block;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst = 1;
  logic high_in = 0, low_in = 0, polar = 0, win_mode = 0;
  logic [5:0] peak_time = 6'd1;
  logic trig_out;
  int checks = 0, failures = 0;

  input_block dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NC = 120;
  logic lw [NC];
  logic hw [NC];
  logic ob [NC];

  // apply lw/hw before posedge n, record trig_out after posedge n
  task automatic run_seq();
    // idle pins for a few clocks so a polarity change has settled
    repeat (5) begin
      @(negedge clk);
      low_in  = polar;
      high_in = polar;
    end
    for (int n = 0; n < NC; n++) begin
      @(negedge clk);
      low_in  = lw[n] ^ polar;   // the comparator waveform as seen at the pin
      high_in = hw[n] ^ polar;
      @(posedge clk); #0.5;
      ob[n] = trig_out;
    end
  endtask

  task automatic clear_wave();
    for (int n = 0; n < NC; n++) begin lw[n] = 0; hw[n] = 0; end
  endtask

  task automatic expect_pulses(input int first, input int last, string what);
    // trig_out high exactly on records first..last
    for (int n = 0; n < NC; n++) begin
      logic e;
      e = (n >= first && n <= last);
      checks++;
      if (ob[n] !== e) begin
        failures++;
        $display("FAIL %s: record %0d trig_out=%0b expected %0b", what, n, ob[n], e);
      end
    end
  endtask

  task automatic expect_none(string what);
    expect_pulses(-1, -2, what);
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst = 0;
    // 1: direct mode, positive polarity: pulse on records 10..14 -> 12..16
    clear_wave();
    for (int n = 10; n < 15; n++) lw[n] = 1;
    run_seq();
    expect_pulses(12, 16, "direct");
    // 2: direct mode, negative polarity (pin waveform inverted)
    polar = 1;
    run_seq();
    expect_pulses(12, 16, "direct inverted");
    polar = 0;
    // 3: window mode, no high crossing, peak_time = 5 -> one pulse at 10+2+5
    win_mode = 1; peak_time = 6'd5;
    clear_wave();
    for (int n = 10; n < 30; n++) lw[n] = 1;
    run_seq();
    expect_pulses(17, 17, "window accept");
    // 4: high crossed 3 clocks after low: rejected
    clear_wave();
    for (int n = 10; n < 30; n++) lw[n] = 1;
    for (int n = 13; n < 20; n++) hw[n] = 1;
    run_seq();
    expect_none("window reject");
    // 5: high crossed at the last watched edge (low+peak): rejected
    clear_wave();
    for (int n = 10; n < 30; n++) lw[n] = 1;
    for (int n = 15; n < 20; n++) hw[n] = 1;
    run_seq();
    expect_none("window reject at peak");
    // 6: high crossed only after the window: accepted
    clear_wave();
    for (int n = 10; n < 30; n++) lw[n] = 1;
    for (int n = 16; n < 20; n++) hw[n] = 1;
    run_seq();
    expect_pulses(17, 17, "window late high");
    // 7: window mode, inverted polarity, peak_time = 63
    polar = 1; peak_time = 6'd63;
    clear_wave();
    for (int n = 10; n < 100; n++) lw[n] = 1;
    run_seq();
    expect_pulses(75, 75, "window inverted peak 63");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
