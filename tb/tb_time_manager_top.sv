// tb_time_manager_top: end-to-end testbench of the hardware time manager.
//
// The time manager is instantiated with its default parameters (12 tasks,
// 64-bit counters). The testbench plays the CPU and its driver: bus tasks
// perform GetTime, SetTime, TaskDelay, GetTasksToWake and ClearTask through
// the registers, and an interrupt handler answers `irq` the way the
// kernel's handler does: it reads the wake bitmap and, for each task set,
// acknowledges it with ClearTask and starts the task's next period with
// TaskDelay, as a periodic task's wait_period() would.
//
// Independently of the design, a bus-level model records the clock edge of
// every TaskDelay write; the testbench then checks that each task's wake
// flag appears exactly `ticks` edges after its TaskDelay, that irq is the
// registered OR of the pending flags, and that every GetTime value equals
// the last SetTime value plus the edges elapsed since. It also makes the
// GetTime calibration measurement (two back-to-back reads) and checks its
// cycle count. Each mechanism is counted and must occur at least once: time
// reads, SetTime, TaskDelay, interrupts, wake bitmaps with several tasks,
// ClearTask, a TaskDelay that restarts a running counter, a task that
// expires while irq is already high, and a time read across a 32-bit carry.
module tb_time_manager_top;
  import tm_pkg::*;
  localparam int unsigned NUM_TASKS = 12;
  localparam int unsigned TASK_ID_W = $clog2(NUM_TASKS);

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

  int checks = 0, failures = 0;
  // mechanism counters
  int n_gettime = 0, n_settime = 0, n_delay = 0, n_irq = 0, n_multi = 0;
  int n_clear = 0, n_restart = 0, n_late = 0, n_carry = 0, n_wakeups = 0;

  // ---------------- bus-level reference model ----------------
  longint edge_no = 0;                 // rising edges since time zero
  longint set_edge = 0;                // edge of the last SetTime (or reset)
  logic [63:0] set_val = '0;
  longint deadline [NUM_TASKS];
  bit     busy [NUM_TASKS];
  bit     flag [NUM_TASKS];
  bit     irq_exp = 0;
  logic [NUM_TASKS-1:0] flags_before_edge = '0;   // what a read on the last edge saw
  logic [63:0] arg = '0;
  longint period [NUM_TASKS];

  function automatic logic [NUM_TASKS-1:0] flags_vec();
    logic [NUM_TASKS-1:0] v;
    for (int i = 0; i < NUM_TASKS; i++) v[i] = flag[i];
    return v;
  endfunction

  always @(posedge clk) begin
    bit any;
    edge_no++;
    flags_before_edge = flags_vec();
    any = 0;
    for (int i = 0; i < NUM_TASKS; i++) any |= flag[i];
    if (!rst_n) begin
      for (int i = 0; i < NUM_TASKS; i++) begin busy[i] = 0; flag[i] = 0; end
      irq_exp = 0; set_edge = edge_no; set_val = '0; arg = '0;
    end else begin
      irq_exp = any;
      for (int i = 0; i < NUM_TASKS; i++) begin
        bit ld, cl, ex;
        ld = bus_cs && bus_we && bus_addr == REG_TASK_DELAY && int'(bus_wdata) == i;
        cl = bus_cs && bus_we && bus_addr == REG_CLEAR_TASK && int'(bus_wdata) == i;
        ex = busy[i] && edge_no == deadline[i];
        if (ld) begin
          if (busy[i]) n_restart++;
          busy[i] = 1;
          deadline[i] = edge_no + ((arg == 0) ? 1 : longint'(arg));
        end else if (ex) busy[i] = 0;
        if (ex && !ld) begin
          if (any) n_late++;
          flag[i] = 1;
        end else if (cl) flag[i] = 0;
      end
      if (bus_cs && bus_we) begin
        case (bus_addr)
          REG_ARG_LO:   arg[31:0]  = bus_wdata;
          REG_ARG_HI:   arg[63:32] = bus_wdata;
          REG_SET_TIME: begin set_val = arg; set_edge = edge_no; end
          default: ;
        endcase
      end
    end
  end

  // irq must follow the model on every cycle.
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (irq !== irq_exp) begin
      failures++;
      if (failures < 10) $display("FAIL edge %0d: irq=%b expected %b", edge_no, irq, irq_exp);
    end
  end

  // ---------------- CPU / driver side ----------------
  semaphore bus_lock = new(1);

  task automatic expect_eq(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

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
    at_edge = edge_no;                    // the edge that sampled the access
    bus_cs = 1'b0;
    if (!bus_rvalid) begin failures++; $display("FAIL no rvalid"); end
    d = bus_rdata;
  endtask

  // GetTime(): returns the time and checks it against the model.
  task automatic get_time(output logic [63:0] t, output longint at_edge);
    logic [31:0] lo, hi;
    longint e2;
    logic [63:0] exp;
    bus_read(REG_TIME_LO, lo, at_edge);
    bus_read(REG_TIME_HI, hi, e2);
    t = {hi, lo};
    // the access edge samples the time left by the edge before it
    exp = set_val + 64'(at_edge - 1 - set_edge);
    expect_eq("GetTime", t, exp);
    if (hi != 0 && lo < 32'd16) n_carry++;
    n_gettime++;
  endtask

  task automatic set_time(input logic [63:0] v);
    bus_write(REG_ARG_LO, v[31:0]);
    bus_write(REG_ARG_HI, v[63:32]);
    bus_write(REG_SET_TIME, 32'h0);
    n_settime++;
  endtask

  task automatic task_delay(input int task_id, input logic [63:0] ticks);
    bus_write(REG_ARG_LO, ticks[31:0]);
    bus_write(REG_ARG_HI, ticks[63:32]);
    bus_write(REG_TASK_DELAY, 32'(task_id));
    n_delay++;
  endtask

  // Interrupt handler: GetTasksToWake, then ClearTask and the next period per task.
  task automatic wake_handler();
    logic [31:0] bm;
    longint e;
    n_irq++;
    bus_read(REG_WAKE, bm, e);
    expect_eq("WAKE bitmap", bm, 32'(flags_before_edge));
    if ($countones(bm) > 1) n_multi++;
    for (int i = 0; i < NUM_TASKS; i++) if (bm[i]) begin
      bus_write(REG_CLEAR_TASK, 32'(i));
      n_clear++;
      n_wakeups++;
      if (period[i] > 0) task_delay(i, 64'(period[i]));
    end
  endtask

  bit handler_on = 0;
  initial begin
    forever begin
      @(negedge clk);
      if (handler_on && irq) begin
        bus_lock.get(1);
        wake_handler();
        bus_lock.put(1);
      end
    end
  end

  task automatic expect_count(input string what, input int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    logic [63:0] t1, t2, c1, c2;
    longint e1, e2;
    logic [31:0] bm;
    for (int i = 0; i < NUM_TASKS; i++) begin busy[i] = 0; flag[i] = 0; period[i] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;

    // Time counts from zero after reset.
    get_time(t1, e1);
    repeat (20) @(negedge clk);
    get_time(t2, e2);
    expect_eq("time advances one per cycle", t2 - t1, 64'(e2 - e1));

    // Calibration measurement: two back-to-back GetTime calls.
    get_time(c1, e1);
    get_time(c2, e2);
    expect_eq("calibration value in cycles", c2 - c1, 64'd4);

    // SetTime near a 32-bit carry; time reads stay consistent across it.
    set_time(64'h0000_0000_FFFF_FFF8);
    repeat (3) get_time(t1, e1);

    // One complete TaskDelay -> interrupt -> GetTasksToWake -> ClearTask.
    task_delay(3, 64'd25);
    e1 = edge_no;                              // TaskDelay written on this edge
    while (!irq) @(negedge clk);
    expect_eq("irq delay after TaskDelay", 64'(edge_no - e1), 64'd26);
    bus_read(REG_WAKE, bm, e2);
    expect_eq("single wake bitmap", bm, 32'h8);
    bus_write(REG_CLEAR_TASK, 32'd3);
    n_clear++; n_irq++; n_wakeups++;
    @(negedge clk); @(negedge clk);
    expect_eq("irq low after ClearTask", irq, 0);

    // Several tasks expiring on the same edge share one interrupt.
    task_delay(0, 64'd40);
    task_delay(1, 64'd37);                     // written 3 edges later: same deadline
    task_delay(2, 64'd70);
    task_delay(2, 64'd31);                     // restarts task 2: same deadline
    handler_on = 1;
    repeat (120) @(negedge clk);

    // Periodic tasks on all 12 counters, the handler re-arming each one.
    bus_lock.get(1);
    for (int i = 0; i < NUM_TASKS; i++) begin
      period[i] = 150 + 37 * i;
      task_delay(i, 64'(period[i]));
    end
    bus_lock.put(1);
    repeat (6000) begin
      @(negedge clk);
      if (($urandom % 500) == 0 && bus_lock.try_get(1)) begin
        get_time(t1, e1);
        bus_lock.put(1);
      end
    end
    for (int i = 0; i < NUM_TASKS; i++) period[i] = 0;
    repeat (1000) @(negedge clk);
    expect_eq("all wake-ups acknowledged", 64'(flags_vec()), 64'd0);
    expect_eq("irq low at end", irq, 0);

    expect_count("GetTime", n_gettime);
    expect_count("SetTime", n_settime);
    expect_count("TaskDelay", n_delay);
    expect_count("TaskDelay restart", n_restart);
    expect_count("wake interrupt", n_irq);
    expect_count("GetTasksToWake multi", n_multi);
    expect_count("expiry while irq high", n_late);
    expect_count("ClearTask", n_clear);
    expect_count("GetTime across carry", n_carry);
    expect_count("task wake-ups", n_wakeups);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
