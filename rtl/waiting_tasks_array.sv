// waiting_tasks_array: the waiting tasks array of the hardware time manager.
//
// Holds NUM_TASKS task_counter instances, one per task that may be put in
// a waiting state. A TaskDelay (delay_en for one cycle, with delay_task and
// delay_ticks) loads the counter of that task; a ClearTask (clear_en with
// clear_task) acknowledges that task's wake-up. Both may occur in the same
// cycle, for the same or different tasks. Task ids of NUM_TASKS or more are
// ignored. All counters run in parallel, each decremented on every clock.
//
// The wake flags of all counters form the `wake` bitmap read by
// GetTasksToWake. `irq` is the level interrupt to the CPU: a register set to
// the OR of the wake flags, so it rises one clock after the first wake flag
// and falls one clock after the last one is cleared.
//
// Follows the paper: an array of per-task counters, the high-level output
// signal that waits for the CPU's acknowledgment, 12 tasks and 64-bit
// counters by default. This design's own choices: the one-hot decoding of
// the task id, the registered OR for the interrupt and ignoring bad ids.
module waiting_tasks_array #(
  parameter int unsigned NUM_TASKS = 12,
  parameter int unsigned CNT_W     = 64,
  localparam int unsigned TASK_ID_W = (NUM_TASKS > 1) ? $clog2(NUM_TASKS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 delay_en,
  input  logic [TASK_ID_W-1:0] delay_task,
  input  logic [CNT_W-1:0]     delay_ticks,
  input  logic                 clear_en,
  input  logic [TASK_ID_W-1:0] clear_task,
  output logic [NUM_TASKS-1:0] active,
  output logic [NUM_TASKS-1:0] wake,
  output logic                 irq
);

  logic [NUM_TASKS-1:0] load_vec;
  logic [NUM_TASKS-1:0] clear_vec;
  logic                 irq_q;

  always_comb begin
    load_vec  = '0;
    clear_vec = '0;
    for (int unsigned i = 0; i < NUM_TASKS; i++) begin
      load_vec[i]  = delay_en && (32'(delay_task) == i);
      clear_vec[i] = clear_en && (32'(clear_task) == i);
    end
  end

  for (genvar g = 0; g < NUM_TASKS; g++) begin : g_task
    logic [CNT_W-1:0] count_unused;
    task_counter #(.CNT_W(CNT_W)) u_counter (
      .clk    (clk),
      .rst_n  (rst_n),
      .load   (load_vec[g]),
      .ticks  (delay_ticks),
      .clear  (clear_vec[g]),
      .active (active[g]),
      .count  (count_unused),
      .wake   (wake[g])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) irq_q <= 1'b0;
    else        irq_q <= |wake;
  end

  assign irq = irq_q;

endmodule
