// run_timer: run duration timer of the trigger core. A `start` pulse loads
// `duration` (in clock cycles) and raises `running`, which enables counting
// in all scalers and dead/live time counters and drives the run LED/output.
// `running` falls after `duration` clocks, or on `stop`. duration = 0 means
// an unlimited run, ended only by `stop`. `elapsed` counts the clocks of the
// current/last run. The paper only names this block and shows its enable
// output; the counter widths, start/stop protocol and the unlimited-run
// encoding are this design's choice.
module run_timer #(
  parameter int unsigned W = 48
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         start,
  input  logic         stop,
  input  logic [W-1:0] duration,
  output logic         running,
  output logic [W-1:0] elapsed
);
  logic [W-1:0] remaining;
  logic         unlimited;
  always_ff @(posedge clk) begin
    if (rst) begin
      running   <= 1'b0;
      remaining <= '0;
      unlimited <= 1'b0;
      elapsed   <= '0;
    end else if (start) begin
      running   <= 1'b1;
      remaining <= duration;
      unlimited <= (duration == '0);
      elapsed   <= '0;
    end else if (stop) begin
      running <= 1'b0;
    end else if (running) begin
      elapsed <= elapsed + 1'b1;
      if (!unlimited) begin
        remaining <= remaining - 1'b1;
        if (remaining == 1) running <= 1'b0;
      end
    end
  end
endmodule
