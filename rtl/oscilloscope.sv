// oscilloscope: digital storage oscilloscope for one ADC channel.
// Memory: a dual-port RAM written as 8192 x 26 bit at 100 MHz (two 12-bit
// samples and their two trigger bits per word) and read as 16384 x 13 bit
// ({trigger bit, 12-bit sample}), i.e. 16384 samples = 81.92 us at 200 Msps.
// Recording FSM (states as in the paper's figure):
//   IDLE --arm--> WAIT_FILL --preTrig samples written--> WAIT_TRIG
//   --trigger seen--> WAIT_POST --postTrig samples written--> IDLE (done)
// Once armed, the write port stores every 100 MHz word into a circular
// buffer. Triggers are only accepted after preTrig samples are stored; the
// trigger is the selected 200 MHz trigger output, stretched into the
// 100 MHz domain (trig_stretch), so its position is known to within two
// samples (10 ns), as the paper states. After postTrig more samples the
// write port stops.
// Readout: rd_addr is a sample address; rd_data follows one clk100 later.
// After done, the record starts at sample address start_addr (the trigger
// word minus preTrig samples, modulo 16384) and trig_addr is the sample
// address of the word in which the trigger was seen.
// From the paper: sizes, widths, preTrig/postTrig/selTrig/arm, the FSM.
// Own choices: preTrig and postTrig are counted in samples and rounded down
// to whole words (two samples); even sample = low half of a word; the done
// flag and start/trigger addresses; arm is ignored unless IDLE.
module oscilloscope
  import uctm2_pkg::*;
#(
  parameter int unsigned AW = OSC_AW   // sample address width: 2^AW samples
) (
  input  logic              clk100,
  input  logic              clk200,
  input  logic              rst,
  input  logic [2*ADC_W-1:0] adc_word,      // two samples, earlier in [11:0]
  input  logic [N_TRIG-1:0] trig,           // 200 MHz trigger outputs
  input  logic [SEL_W-1:0]  sel_trig,
  input  logic [AW-1:0]     pre_trig,       // samples before the trigger
  input  logic [AW-1:0]     post_trig,      // samples after the trigger
  input  logic              arm,
  output logic              busy,
  output logic              done,
  output logic [AW-1:0]     trig_addr,
  output logic [AW-1:0]     start_addr,
  input  logic [AW-1:0]     rd_addr,
  output logic [ADC_W:0]    rd_data
);
  localparam int unsigned WAW = AW - 1;   // word address width
  typedef enum logic [1:0] {IDLE, WAIT_FILL, WAIT_TRIG, WAIT_POST} state_t;

  state_t               state;
  logic [1:0]           tpair;
  logic [2*ADC_W+1:0]   mem [2**WAW];
  logic [WAW-1:0]       wptr, trig_word;
  logic [WAW-1:0]       cnt;
  logic [WAW-1:0]       pre_words, post_words;
  logic                 we;
  logic [2*ADC_W+1:0]   rd_word;
  logic                 rd_half;

  trig_stretch u_ts (
    .clk200, .clk100, .rst, .trig, .sel(sel_trig), .pair(tpair)
  );

  assign pre_words  = pre_trig[AW-1:1];
  assign post_words = post_trig[AW-1:1];
  assign we   = (state != IDLE);
  assign busy = we;

  always_ff @(posedge clk100) begin
    if (rst) begin
      state     <= IDLE;
      wptr      <= '0;
      cnt       <= '0;
      trig_word <= '0;
      done      <= 1'b0;
    end else begin
      if (we) wptr <= wptr + 1'b1;
      unique case (state)
        IDLE: if (arm) begin
          state <= WAIT_FILL;
          cnt   <= '0;
          done  <= 1'b0;
        end
        WAIT_FILL: begin
          // this cycle writes word number cnt+1 of the record
          if (cnt + 1'b1 >= pre_words) state <= WAIT_TRIG;
          cnt <= cnt + 1'b1;
        end
        WAIT_TRIG: if (tpair != 2'b00) begin
          trig_word <= wptr;
          cnt       <= '0;
          state     <= (post_words == '0) ? IDLE : WAIT_POST;
          done      <= (post_words == '0);
        end
        WAIT_POST: begin
          if (cnt + 1'b1 >= post_words) begin
            state <= IDLE;
            done  <= 1'b1;
          end
          cnt <= cnt + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign trig_addr  = {trig_word, 1'b0};
  assign start_addr = {trig_word - pre_words, 1'b0};

  // write port: 26-bit words
  always_ff @(posedge clk100) begin
    if (we) mem[wptr] <= {tpair[1], adc_word[2*ADC_W-1:ADC_W], tpair[0], adc_word[ADC_W-1:0]};
  end

  // read port: 13-bit samples
  always_ff @(posedge clk100) begin
    rd_word <= mem[rd_addr[AW-1:1]];
    rd_half <= rd_addr[0];
  end
  assign rd_data = rd_half ? rd_word[2*ADC_W+1:ADC_W+1] : rd_word[ADC_W:0];
endmodule
