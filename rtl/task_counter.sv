// task_counter: one entry of the waiting tasks array.
//
// A TaskDelay loads the counter with a number of clock ticks (load high for
// one cycle with the count on ticks). From the next cycle it counts down by
// one per clock. When it would step from 1 to 0 it stops, drops `active`
// and raises `wake`, so `wake` is first seen high exactly `ticks` clock
// edges after the loading edge (a load of 0 behaves like a load of 1).
// `wake` is a sticky flag: it stays high until the CPU acknowledges the
// wake-up with ClearTask (clear high for one cycle). If an expiry and a
// clear meet in the same cycle the expiry wins, so no wake-up is lost. A new
// load while counting restarts the count; a load does not clear a pending
// wake flag.
//
// Follows the paper: one counter per task, loaded with the delay in ticks,
// decremented every clock, a wake-up signal at a high level once it reaches
// zero that waits for the CPU's acknowledgment. This design's own choices:
// the exact expiry cycle, the stop at zero, and the handling of a clear or
// load that overlaps an expiry.
module task_counter #(
  parameter int unsigned CNT_W = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [CNT_W-1:0] ticks,
  input  logic             clear,
  output logic             active,
  output logic [CNT_W-1:0] count,
  output logic             wake
);

  logic [CNT_W-1:0] count_q;
  logic             active_q;
  logic             wake_q;
  logic             expire;

  // The counter expires on the edge where it leaves 1 (or 0, after a load of 0).
  assign expire = active_q && (count_q <= CNT_W'(1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      count_q  <= '0;
      active_q <= 1'b0;
      wake_q   <= 1'b0;
    end else begin
      if (load) begin
        count_q  <= ticks;
        active_q <= 1'b1;
      end else if (expire) begin
        count_q  <= '0;
        active_q <= 1'b0;
      end else if (active_q) begin
        count_q  <= count_q - 1'b1;
      end

      if (expire && !load) wake_q <= 1'b1;
      else if (clear)      wake_q <= 1'b0;
    end
  end

  assign active = active_q;
  assign count  = count_q;
  assign wake   = wake_q;

endmodule
