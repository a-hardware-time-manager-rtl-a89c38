// time_manager_top: the hardware time manager of a Xenomai/Linux system.
//
// Moves the real-time kernel's time keeping out of software. The
// system_time counter keeps the global time in clock ticks; the
// waiting_tasks_array holds one down-counter per task that can sleep and
// raises `irq` when any of them has run out; tm_regif maps the kernel's
// operations (GetTime, SetTime, TaskDelay, GetTasksToWake, ClearTask) onto
// registers on the processor bus. One clock drives everything: one tick per
// cycle, 102 MHz (9.8 ns per tick) in the paper's prototype.
//
// Interface: a synchronous register bus (bus_cs/bus_we/bus_addr/bus_wdata,
// read data one cycle later on bus_rdata with bus_rvalid) and a level
// interrupt `irq`, high while at least one task waits for its wake-up to be
// acknowledged. A TaskDelay of T ticks written on clock edge E sets the
// task's wake flag at edge E+T, `irq` follows one edge later.
//
// Follows the paper: the two main modules, the register interface, the
// interrupt with acknowledgment, 12 tasks and 64-bit counters. This design's
// own choices: the bus and register map (see tm_pkg and tm_regif).
module time_manager_top
  import tm_pkg::*;
#(
  parameter int unsigned NUM_TASKS = 12,
  parameter int unsigned CNT_W     = 64,
  parameter int unsigned DATA_W    = TM_DATA_W,
  parameter int unsigned ADDR_W    = TM_ADDR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bus_cs,
  input  logic              bus_we,
  input  logic [ADDR_W-1:0] bus_addr,
  input  logic [DATA_W-1:0] bus_wdata,
  output logic [DATA_W-1:0] bus_rdata,
  output logic              bus_rvalid,
  output logic              irq
);

  localparam int unsigned TASK_ID_W = (NUM_TASKS > 1) ? $clog2(NUM_TASKS) : 1;

  logic [CNT_W-1:0]     sys_time;
  logic                 set_en;
  logic [CNT_W-1:0]     set_value;
  logic                 delay_en;
  logic [TASK_ID_W-1:0] delay_task;
  logic [CNT_W-1:0]     delay_ticks;
  logic                 clear_en;
  logic [TASK_ID_W-1:0] clear_task;
  logic [NUM_TASKS-1:0] wake;
  logic [NUM_TASKS-1:0] active_unused;

  tm_regif #(
    .NUM_TASKS (NUM_TASKS),
    .CNT_W     (CNT_W),
    .DATA_W    (DATA_W),
    .ADDR_W    (ADDR_W)
  ) u_regif (
    .clk         (clk),
    .rst_n       (rst_n),
    .bus_cs      (bus_cs),
    .bus_we      (bus_we),
    .bus_addr    (bus_addr),
    .bus_wdata   (bus_wdata),
    .bus_rdata   (bus_rdata),
    .bus_rvalid  (bus_rvalid),
    .time_i      (sys_time),
    .set_en      (set_en),
    .set_value   (set_value),
    .wake_i      (wake),
    .delay_en    (delay_en),
    .delay_task  (delay_task),
    .delay_ticks (delay_ticks),
    .clear_en    (clear_en),
    .clear_task  (clear_task)
  );

  system_time #(.CNT_W(CNT_W)) u_system_time (
    .clk       (clk),
    .rst_n     (rst_n),
    .set_en    (set_en),
    .set_value (set_value),
    .time_o    (sys_time)
  );

  waiting_tasks_array #(
    .NUM_TASKS (NUM_TASKS),
    .CNT_W     (CNT_W)
  ) u_waiting_tasks (
    .clk         (clk),
    .rst_n       (rst_n),
    .delay_en    (delay_en),
    .delay_task  (delay_task),
    .delay_ticks (delay_ticks),
    .clear_en    (clear_en),
    .clear_task  (clear_task),
    .active      (active_unused),
    .wake        (wake),
    .irq         (irq)
  );

endmodule
