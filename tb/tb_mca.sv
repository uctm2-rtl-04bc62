// tb_mca: random two's-complement samples and gates of random length
// (odd lengths end in the middle of a 100 MHz word). For each mode the
// expected 13-bit result is computed here from the samples under the gate:
// |max|, |min|, max - min, and min(|sum| >> bitDiv, 8191); results are read
// from the FIFO and compared. Also checks that a gate on a non-selected
// trigger line gives nothing and that a full FIFO sets overflow.
module tb_mca;
  import uctm2_pkg::*;
  timeunit 1ns; timeprecision 10ps;
  logic clk200 = 0, clk100 = 0, rst = 1;
  logic [23:0] adc_word = '0;
  logic [7:0]  trig = '0;
  logic [2:0]  sel_trig = 3'd4;
  mca_mode_t   mca_mode = MCA_MAX;
  logic [3:0]  mca_bit_div = '0;
  logic        rd_en = 0, empty, overflow;
  logic [15:0] rd_data;
  logic [10:0] level;
  int checks = 0, failures = 0;

  mca #(.FIFO_AW(10)) dut (.*);

  initial forever begin
    #2.5 clk200 = 1; clk100 = 1;
    #2.5 clk200 = 0;
    #2.5 clk200 = 1; clk100 = 0;
    #2.5 clk200 = 0;
  end

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NW = 20000;
  logic signed [11:0] s_lo [NW], s_hi [NW];
  int e100 = 0;
  int amp = 2047;

  always @(posedge clk100) begin
    e100++;
    #0.5;
    s_lo[e100] = 12'($signed($urandom_range(0, 2*amp)) - amp);
    s_hi[e100] = 12'($signed($urandom_range(0, 2*amp)) - amp);
    adc_word <= {s_hi[e100], s_lo[e100]};
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // gate of nsamp 200 MHz samples on line `ch`; returns expected result
  task automatic gate(int ch, int nsamp, output int exp);
    int e0, vmax, vmin, sum, nfull;
    longint mag;
    @(posedge clk100);
    @(negedge clk200); @(negedge clk200);
    trig[ch] = 1;
    @(posedge clk100);
    e0 = e100;
    repeat (nsamp - 1) @(negedge clk200);
    @(negedge clk200) trig[ch] = 0;
    repeat (6) @(posedge clk100);
    vmax = -4096; vmin = 4096; sum = 0;
    nfull = nsamp / 2;
    for (int w = 1; w <= nfull; w++) begin
      vmax = (s_lo[e0+w] > vmax) ? s_lo[e0+w] : vmax;
      vmax = (s_hi[e0+w] > vmax) ? s_hi[e0+w] : vmax;
      vmin = (s_lo[e0+w] < vmin) ? s_lo[e0+w] : vmin;
      vmin = (s_hi[e0+w] < vmin) ? s_hi[e0+w] : vmin;
      sum += s_lo[e0+w] + s_hi[e0+w];
    end
    if (nsamp % 2 == 1) begin
      vmax = (s_lo[e0+nfull+1] > vmax) ? s_lo[e0+nfull+1] : vmax;
      vmin = (s_lo[e0+nfull+1] < vmin) ? s_lo[e0+nfull+1] : vmin;
      sum += s_lo[e0+nfull+1];
    end
    case (mca_mode)
      MCA_MAX:  exp = (vmax < 0) ? -vmax : vmax;
      MCA_MIN:  exp = (vmin < 0) ? -vmin : vmin;
      MCA_AMPL: exp = vmax - vmin;
      default: begin
        mag = (sum < 0) ? -sum : sum;
        mag = mag >> mca_bit_div;
        exp = (mag > 8191) ? 8191 : int'(mag);
      end
    endcase
  endtask

  task automatic pop(output int v);
    @(negedge clk100);
    v = rd_data;
    rd_en = 1;
    @(negedge clk100) rd_en = 0;
  endtask

  initial begin
    int exp, got;
    repeat (4) @(negedge clk100);
    rst = 0;
    repeat (10) @(negedge clk100);
    for (int m = 0; m < 4; m++) begin
      mca_mode = mca_mode_t'(m);
      for (int g = 0; g < 25; g++) begin
        int n;
        n = (g == 0) ? 1 : $urandom_range(1, 60);
        if (m == 3) begin
          mca_bit_div = 4'($urandom_range(0, 8));
          n = $urandom_range(1, 400);
        end
        gate(4, n, exp);
        chk(!empty, "result written");
        pop(got);
        chk(got == exp, $sformatf("mode %0d gate %0d samples: got %0d expected %0d", m, n, got, exp));
        chk(empty, "one result per gate");
      end
    end
    // integration with bitDiv 0 clips at 8191
    mca_bit_div = 0;
    amp = 2047;
    gate(4, 300, exp);
    pop(got);
    chk(got == exp, $sformatf("integration clip: got %0d expected %0d", got, exp));
    // gate on another line: ignored
    gate(3, 10, exp);
    chk(empty, "non-selected line ignored");
    // fill the FIFO: 1024 results, the 1025th sets overflow
    mca_mode = MCA_MAX;
    for (int g = 0; g < 1025; g++) gate(4, 2, exp);
    chk(level == 11'd1024, $sformatf("level %0d", level));
    chk(overflow, "overflow flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
