// tb_tm_regif: self-checking testbench of tm_regif.
//
// Stands in for the system time module and the waiting tasks array: it
// drives time_i (a counter that the testbench also advances) and wake_i
// (random), and records the command strobes. It checks that every read
// returns the right word one cycle later with bus_rvalid, that the TIME_HI
// word comes from the same sample as the preceding TIME_LO read, that the
// operand registers read back, that SET_TIME, TASK_DELAY and CLEAR_TASK
// each give exactly one strobe with the right operand and task id in the
// cycle of the write, and that no other access gives a strobe.
module tb_tm_regif;
  import tm_pkg::*;
  localparam int unsigned NUM_TASKS = 12;
  localparam int unsigned CNT_W     = 64;
  localparam int unsigned TASK_ID_W = $clog2(NUM_TASKS);

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 bus_cs = 1'b0;
  logic                 bus_we = 1'b0;
  logic [2:0]           bus_addr = '0;
  logic [31:0]          bus_wdata = '0;
  logic [31:0]          bus_rdata;
  logic                 bus_rvalid;
  logic [CNT_W-1:0]     time_i = 64'h0123_4567_FFFF_FFF0;
  logic                 set_en;
  logic [CNT_W-1:0]     set_value;
  logic [NUM_TASKS-1:0] wake_i = '0;
  logic                 delay_en;
  logic [TASK_ID_W-1:0] delay_task;
  logic [CNT_W-1:0]     delay_ticks;
  logic                 clear_en;
  logic [TASK_ID_W-1:0] clear_task;

  tm_regif #(.NUM_TASKS(NUM_TASKS), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) time_i <= time_i + 1;

  int checks = 0, failures = 0;
  int n_set = 0, n_delay = 0, n_clear = 0;
  logic [CNT_W-1:0] last_set, last_ticks;
  int last_delay_id, last_clear_id;

  always @(posedge clk) if (rst_n) begin
    if (set_en)   begin n_set++;   last_set = set_value; end
    if (delay_en) begin n_delay++; last_ticks = delay_ticks; last_delay_id = int'(delay_task); end
    if (clear_en) begin n_clear++; last_clear_id = int'(clear_task); end
  end

  task automatic expect_eq(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic bus_write(input tm_reg_e a, input logic [31:0] d);
    @(negedge clk);
    bus_cs = 1'b1; bus_we = 1'b1; bus_addr = a; bus_wdata = d;
    @(negedge clk);
    bus_cs = 1'b0; bus_we = 1'b0;
  endtask

  // Read one register; also returns the time_i value sampled on the access edge.
  task automatic bus_read(input tm_reg_e a, output logic [31:0] d, output logic [63:0] t_at);
    @(negedge clk);
    bus_cs = 1'b1; bus_we = 1'b0; bus_addr = a;
    t_at = time_i;
    @(negedge clk);
    bus_cs = 1'b0;
    expect_eq("rvalid", bus_rvalid, 1);
    d = bus_rdata;
    @(negedge clk);
    expect_eq("rvalid drops", bus_rvalid, 0);
  endtask

  initial begin
    logic [31:0] d, lo, hi;
    logic [63:0] t, t2;
    logic [63:0] v;
    int s0, d0, c0, id;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    expect_eq("rvalid idle", bus_rvalid, 0);

    // GetTime across a carry from the low to the high word.
    repeat (5) begin
      bus_read(REG_TIME_LO, lo, t);
      bus_read(REG_TIME_HI, hi, t2);
      expect_eq("GetTime 64-bit sample", {hi, lo}, t);
      repeat ($urandom % 7) @(negedge clk);
    end

    // Operand registers read back.
    bus_write(REG_ARG_LO, 32'hDEAD_BEEF);
    bus_write(REG_ARG_HI, 32'h0000_00A5);
    bus_read(REG_ARG_LO, d, t); expect_eq("ARG_LO", d, 32'hDEAD_BEEF);
    bus_read(REG_ARG_HI, d, t); expect_eq("ARG_HI", d, 32'h0000_00A5);

    // SetTime.
    s0 = n_set;
    v = {$urandom, $urandom};
    bus_write(REG_ARG_LO, v[31:0]);
    bus_write(REG_ARG_HI, v[63:32]);
    expect_eq("no strobe for ARG writes", n_set - s0, 0);
    bus_write(REG_SET_TIME, 32'h0);
    expect_eq("one SetTime strobe", n_set - s0, 1);
    expect_eq("SetTime value", last_set, v);

    // TaskDelay and ClearTask for every task.
    for (int i = 0; i < NUM_TASKS; i++) begin
      v = {32'($urandom % 4), $urandom};
      bus_write(REG_ARG_LO, v[31:0]);
      bus_write(REG_ARG_HI, v[63:32]);
      d0 = n_delay; c0 = n_clear;
      bus_write(REG_TASK_DELAY, 32'(i));
      expect_eq("one TaskDelay strobe", n_delay - d0, 1);
      expect_eq("TaskDelay task", last_delay_id, i);
      expect_eq("TaskDelay ticks", last_ticks, v);
      bus_write(REG_CLEAR_TASK, 32'(NUM_TASKS - 1 - i));
      expect_eq("one ClearTask strobe", n_clear - c0, 1);
      expect_eq("ClearTask task", last_clear_id, NUM_TASKS - 1 - i);
      expect_eq("no extra TaskDelay", n_delay - d0, 1);
    end

    // GetTasksToWake.
    repeat (20) begin
      wake_i = NUM_TASKS'($urandom);
      bus_read(REG_WAKE, d, t);
      expect_eq("WAKE bitmap", d, 32'(wake_i));
    end

    // Reads never strobe.
    s0 = n_set; d0 = n_delay; c0 = n_clear;
    for (int a = 0; a < 8; a++) bus_read(tm_reg_e'(a), d, t);
    expect_eq("reads give no strobes", (n_set - s0) + (n_delay - d0) + (n_clear - c0), 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
