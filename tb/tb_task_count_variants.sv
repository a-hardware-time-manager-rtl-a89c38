// tb_task_count_variants: the time manager built for 1, 2, 4 and 8 tasks.
//
// Besides its 12-task default the time manager was sized for 1, 2, 4 and 8
// tasks. This testbench instantiates time_manager_top once per size, each
// on its own bus, and for each size runs every task in turn through
// TaskDelay -> irq -> GetTasksToWake -> ClearTask, checking the cycle at
// which irq rises (delay + 1 edges after the TaskDelay write), the bitmap
// (only that task) and that irq falls after the acknowledgment. It also
// loads all tasks of a size at once and checks that they wake together.
module tb_task_count_variants;
  import tm_pkg::*;

  localparam int NV = 4;
  localparam int SIZES [NV] = '{1, 2, 4, 8};

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        bus_cs [NV];
  logic        bus_we [NV];
  logic [2:0]  bus_addr [NV];
  logic [31:0] bus_wdata [NV];
  logic [31:0] bus_rdata [NV];
  logic        bus_rvalid [NV];
  logic        irq [NV];

  always #5 clk = ~clk;

  for (genvar v = 0; v < NV; v++) begin : g_size
    time_manager_top #(.NUM_TASKS(SIZES[v])) dut (
      .clk        (clk),
      .rst_n      (rst_n),
      .bus_cs     (bus_cs[v]),
      .bus_we     (bus_we[v]),
      .bus_addr   (bus_addr[v]),
      .bus_wdata  (bus_wdata[v]),
      .bus_rdata  (bus_rdata[v]),
      .bus_rvalid (bus_rvalid[v]),
      .irq        (irq[v])
    );
  end

  longint edge_no = 0;
  always @(posedge clk) edge_no++;

  int checks = 0, failures = 0;

  task automatic expect_eq(input string what, input int v, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %0d tasks, %s: got %0d expected %0d", SIZES[v], what, got, exp);
    end
  endtask

  task automatic bus_write(input int v, input tm_reg_e a, input logic [31:0] d);
    @(negedge clk);
    bus_cs[v] = 1'b1; bus_we[v] = 1'b1; bus_addr[v] = a; bus_wdata[v] = d;
    @(negedge clk);
    bus_cs[v] = 1'b0; bus_we[v] = 1'b0;
  endtask

  task automatic bus_read(input int v, input tm_reg_e a, output logic [31:0] d);
    @(negedge clk);
    bus_cs[v] = 1'b1; bus_we[v] = 1'b0; bus_addr[v] = a;
    @(negedge clk);
    bus_cs[v] = 1'b0;
    d = bus_rdata[v];
  endtask

  initial begin
    logic [31:0] bm;
    longint e;
    int ticks;
    for (int v = 0; v < NV; v++) begin
      bus_cs[v] = 0; bus_we[v] = 0; bus_addr[v] = '0; bus_wdata[v] = '0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int v = 0; v < NV; v++) begin
      // one task at a time
      for (int k = 0; k < SIZES[v]; k++) begin
        ticks = 10 + 3 * k;
        bus_write(v, REG_ARG_LO, 32'(ticks));
        bus_write(v, REG_ARG_HI, 32'h0);
        bus_write(v, REG_TASK_DELAY, 32'(k));
        e = edge_no;
        while (!irq[v] && edge_no < e + 100) @(negedge clk);
        expect_eq("edges from TaskDelay to irq", v, edge_no - e, ticks + 1);
        bus_read(v, REG_WAKE, bm);
        expect_eq("wake bitmap", v, longint'(bm), longint'(1) << k);
        bus_write(v, REG_CLEAR_TASK, 32'(k));
        @(negedge clk);
        expect_eq("irq after ClearTask", v, longint'(irq[v]), 0);
      end
      // all tasks at once, same due edge
      bus_write(v, REG_ARG_LO, 32'd200);
      for (int k = 0; k < SIZES[v]; k++) bus_write(v, REG_TASK_DELAY, 32'(k));
      repeat (220) @(negedge clk);
      bus_read(v, REG_WAKE, bm);
      expect_eq("all tasks woken", v, longint'(bm), (longint'(1) << SIZES[v]) - 1);
      for (int k = 0; k < SIZES[v]; k++) bus_write(v, REG_CLEAR_TASK, 32'(k));
      @(negedge clk);
      expect_eq("irq low at end", v, longint'(irq[v]), 0);
    end
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
