// tb_waiting_tasks_array: self-checking testbench of waiting_tasks_array.
//
// Drives random TaskDelay and ClearTask requests (with short delays so that
// many expire) for all NUM_TASKS tasks, including out-of-range task ids and
// requests to the same task in one cycle, and compares `wake`, `active`
// and `irq` every cycle with a model that records, for each task, the
// absolute clock edge at which its delay ends. A task loaded with T ticks
// on edge n must show its wake flag from edge n+T; irq must equal the OR of
// the wake flags one edge earlier. It also checks that all tasks count in
// parallel by loading every task and checking that they all expire on time.
module tb_waiting_tasks_array;
  localparam int unsigned NUM_TASKS = 12;
  localparam int unsigned CNT_W     = 64;
  localparam int unsigned TASK_ID_W = $clog2(NUM_TASKS);

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 delay_en = 1'b0;
  logic [TASK_ID_W-1:0] delay_task = '0;
  logic [CNT_W-1:0]     delay_ticks = '0;
  logic                 clear_en = 1'b0;
  logic [TASK_ID_W-1:0] clear_task = '0;
  logic [NUM_TASKS-1:0] active;
  logic [NUM_TASKS-1:0] wake;
  logic                 irq;

  waiting_tasks_array #(.NUM_TASKS(NUM_TASKS), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint edge_no = 0;
  longint deadline [NUM_TASKS];
  bit     busy     [NUM_TASKS];
  bit     flag     [NUM_TASKS];
  bit     irq_exp;
  int     wakeups = 0;

  function automatic logic [NUM_TASKS-1:0] flags_vec();
    logic [NUM_TASKS-1:0] v;
    for (int i = 0; i < NUM_TASKS; i++) v[i] = flag[i];
    return v;
  endfunction

  function automatic logic [NUM_TASKS-1:0] busy_vec();
    logic [NUM_TASKS-1:0] v;
    for (int i = 0; i < NUM_TASKS; i++) v[i] = busy[i];
    return v;
  endfunction

  // Reference model, advanced on every rising edge with the inputs sampled there.
  always @(posedge clk) begin
    bit any_flag;
    edge_no++;
    any_flag = 1'b0;
    for (int i = 0; i < NUM_TASKS; i++) any_flag |= flag[i];
    if (!rst_n) begin
      for (int i = 0; i < NUM_TASKS; i++) begin busy[i] = 0; flag[i] = 0; end
      irq_exp = 0;
    end else begin
      irq_exp = any_flag;
      for (int i = 0; i < NUM_TASKS; i++) begin
        bit ld, cl, ex;
        ld = delay_en && (int'(delay_task) == i);
        cl = clear_en && (int'(clear_task) == i);
        ex = busy[i] && (edge_no == deadline[i]);
        if (ld) begin
          busy[i] = 1;
          deadline[i] = edge_no + ((delay_ticks == 0) ? 1 : longint'(delay_ticks));
        end else if (ex) busy[i] = 0;
        if (ex && !ld) begin flag[i] = 1; wakeups++; end
        else if (cl) flag[i] = 0;
      end
    end
  end

  task automatic compare();
    checks++;
    if (wake !== flags_vec() || active !== busy_vec() || irq !== irq_exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL edge %0d: wake=%b/%b active=%b/%b irq=%b/%b", edge_no,
                 wake, flags_vec(), active, busy_vec(), irq, irq_exp);
    end
  endtask

  initial begin
    for (int i = 0; i < NUM_TASKS; i++) begin busy[i] = 0; flag[i] = 0; deadline[i] = 0; end
    irq_exp = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    // All tasks loaded back to back with different delays: they count in parallel.
    for (int i = 0; i < NUM_TASKS; i++) begin
      delay_en = 1'b1; delay_task = TASK_ID_W'(i); delay_ticks = CNT_W'(40 - 2 * i);
      @(negedge clk); compare();
    end
    delay_en = 1'b0;
    repeat (45) begin @(negedge clk); compare(); end
    if (wake !== '1) begin failures++; $display("FAIL not all tasks woke"); end
    checks++;
    // Random traffic.
    repeat (5000) begin
      delay_en    = ($urandom % 4) == 0;
      delay_task  = TASK_ID_W'($urandom % 16);       // ids 12..15 must be ignored
      delay_ticks = CNT_W'($urandom % 30);
      clear_en    = ($urandom % 3) == 0;
      clear_task  = (($urandom % 4) == 0) ? delay_task : TASK_ID_W'($urandom % NUM_TASKS);
      @(negedge clk); compare();
    end
    delay_en = 1'b0; clear_en = 1'b0;
    // Acknowledge everything; irq must fall.
    for (int i = 0; i < NUM_TASKS; i++) begin
      clear_en = 1'b1; clear_task = TASK_ID_W'(i);
      @(negedge clk); compare();
    end
    clear_en = 1'b0;
    repeat (40) begin @(negedge clk); compare(); end
    checks++;
    if (wakeups < 100) begin failures++; $display("FAIL only %0d wake-ups", wakeups); end
    $display("wake-ups seen: %0d", wakeups);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
