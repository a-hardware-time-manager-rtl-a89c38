// tb_periodic_workload: periodic real-time tasks on the hardware time manager.
//
// Runs the task sets of the CPU-overhead evaluation: 1, 2, 4, 8 and 10
// periodic tasks, all with the same period of 1000, 40, 13 or 10 ms, for
// one second each. Every task behaves like a Xenomai periodic task whose
// wait_period() issues TaskDelay(task, period); the interrupt handler reads
// the wake bitmap, acknowledges each task with ClearTask and, standing for
// the woken task calling wait_period() again, issues its next TaskDelay.
// The tasks of a set share one period and one phase, as in the evaluation,
// and each TaskDelay is computed from the previous due time so that the
// periods do not drift by the handler's run time.
//
// Time is scaled: the prototype ticks at 102 MHz (102,000 ticks per ms);
// here one millisecond is TICKS_PER_MS = 102 ticks, so a simulated second
// is 102,000 clock cycles. Nothing else changes: the design runs at its
// default size (12 tasks, 64-bit counters).
//
// Checks, for every wake bitmap read: it holds exactly the tasks whose
// delay has run out (a task delayed by P ticks on edge n is due from edge
// n+P) and not yet acknowledged. Per task set it checks that each task
// wakes exactly 1 s / P times in the second and that, since the tasks are
// due together, there is one interrupt per period.
// It prints the interrupt count and, for comparison, the CPU-overhead
// ratio obtained from the fitted handler latencies of the software and
// hardware modes (136.09 + 6.79 n us per 10 ms tick against
// 8.502 + 0.168 n us per wake-up).
module tb_periodic_workload;
  import tm_pkg::*;
  localparam int unsigned NUM_TASKS    = 12;
  localparam longint      TICKS_PER_MS = 102;
  localparam longint      SECOND       = 1000 * TICKS_PER_MS;
  localparam int          HANDLER_MAX  = 16 + 10 * 8;   // edges one handler run may take

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        bus_cs = 1'b0;
  logic        bus_we = 1'b0;
  logic [2:0]  bus_addr = '0;
  logic [31:0] bus_wdata = '0;
  logic [31:0] bus_rdata;
  logic        bus_rvalid;
  logic        irq;

  time_manager_top dut (.*);

  always #5 clk = ~clk;

  longint edge_no = 0;
  always @(posedge clk) edge_no++;

  int checks = 0, failures = 0;
  longint due [NUM_TASKS];
  bit     waiting [NUM_TASKS];     // delayed, not yet acknowledged
  int     wakeups [NUM_TASKS];
  int     interrupts;

  task automatic bus_write(input tm_reg_e a, input logic [31:0] d);
    @(negedge clk);
    bus_cs = 1'b1; bus_we = 1'b1; bus_addr = a; bus_wdata = d;
    @(negedge clk);
    bus_cs = 1'b0; bus_we = 1'b0;
  endtask

  task automatic bus_read(input tm_reg_e a, output logic [31:0] d, output longint at_edge);
    @(negedge clk);
    bus_cs = 1'b1; bus_we = 1'b0; bus_addr = a;
    @(negedge clk);
    at_edge = edge_no;
    bus_cs = 1'b0;
    d = bus_rdata;
  endtask

  // wait_period(): start the next period of task i, due on edge `due_edge`.
  // The tick count is the time left until that edge, so the periods do not
  // drift by the time the handler takes.
  task automatic task_delay(input int i, input longint due_edge);
    logic [63:0] ticks;
    @(negedge clk);
    ticks = 64'(due_edge - (edge_no + 3));  // TASK_DELAY is sampled on the third edge from here
    bus_cs = 1'b1; bus_we = 1'b1;
    bus_addr = REG_ARG_HI; bus_wdata = ticks[63:32];
    @(negedge clk);
    bus_addr = REG_ARG_LO; bus_wdata = ticks[31:0];
    @(negedge clk);
    bus_addr = REG_TASK_DELAY; bus_wdata = 32'(i);
    @(negedge clk);
    bus_cs = 1'b0; bus_we = 1'b0;
    due[i] = due_edge;
    waiting[i] = 1;
  endtask

  task automatic run_set(input int ntasks, input int period_ms);
    longint p, start, next_due;
    logic [31:0] bm, exp_bm;
    longint r;
    int expect_n;
    real sw_us, hw_us;
    int total;
    p = period_ms * TICKS_PER_MS;
    interrupts = 0;
    for (int i = 0; i < NUM_TASKS; i++) begin wakeups[i] = 0; waiting[i] = 0; end
    start = edge_no;
    // all tasks of a set share one period and one phase
    for (int i = 0; i < ntasks; i++) task_delay(i, start + p);
    while (edge_no - start < SECOND + HANDLER_MAX) begin
      @(negedge clk);
      if (irq) begin
        interrupts++;
        bus_read(REG_WAKE, bm, r);
        exp_bm = '0;
        for (int i = 0; i < ntasks; i++) if (waiting[i] && due[i] <= r - 1) exp_bm[i] = 1'b1;
        checks++;
        if (bm !== exp_bm) begin
          failures++;
          $display("FAIL %0d tasks %0d ms: bitmap %h expected %h at edge %0d",
                   ntasks, period_ms, bm, exp_bm, r);
        end
        for (int i = 0; i < ntasks; i++) if (bm[i]) begin
          bus_write(REG_CLEAR_TASK, 32'(i));
          waiting[i] = 0;
          wakeups[i]++;
          next_due = due[i] + p;
          if (next_due - start <= SECOND) task_delay(i, next_due);
        end
      end
    end
    total = 0;
    expect_n = int'(SECOND / p);
    for (int i = 0; i < ntasks; i++) begin
      checks++;
      total += wakeups[i];
      if (wakeups[i] != expect_n) begin
        failures++;
        $display("FAIL %0d tasks %0d ms: task %0d woke %0d times, expected %0d",
                 ntasks, period_ms, i, wakeups[i], expect_n);
      end
    end
    // tasks with one period and phase are woken together: one interrupt each period
    checks++;
    if (interrupts != expect_n) begin
      failures++;
      $display("FAIL %0d tasks %0d ms: %0d interrupts, expected %0d",
               ntasks, period_ms, interrupts, expect_n);
    end
    sw_us = 100.0 * (136.09 + 6.79 * ntasks);
    hw_us = real'(interrupts) * (8.502 + 0.168 * ntasks);
    $display("tasks %2d period %4d ms: wake-ups %5d, interrupts %4d, overhead ratio sw/hw %7.1f",
             ntasks, period_ms, total, interrupts, sw_us / hw_us);
    @(negedge clk); rst_n = 1'b0;
    @(negedge clk); rst_n = 1'b1;
  endtask

  int task_counts [5] = '{1, 2, 4, 8, 10};
  int periods     [4] = '{1000, 40, 13, 10};

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    foreach (periods[k]) foreach (task_counts[j]) run_set(task_counts[j], periods[k]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (25 * SECOND) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
