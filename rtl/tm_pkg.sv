// tm_pkg: constants shared by the hardware time manager and its testbenches.
//
// The time manager is reached from the CPU through a small bank of
// memory-mapped registers. The register map below is this design's own
// choice; the operations it carries (GetTime, SetTime, TaskDelay,
// GetTasksToWake, ClearTask) are the five the time manager offers to the
// real-time kernel. Addresses are word addresses on a 32-bit data bus.
package tm_pkg;

  // Register word addresses.
  typedef enum logic [2:0] {
    REG_TIME_LO    = 3'd0,  // R : system time [31:0]; latches [63:32] for REG_TIME_HI
    REG_TIME_HI    = 3'd1,  // R : system time [63:32] as latched by the last TIME_LO read
    REG_ARG_LO     = 3'd2,  // RW: 64-bit operand [31:0]  (tick count / new time)
    REG_ARG_HI     = 3'd3,  // RW: 64-bit operand [63:32]
    REG_SET_TIME   = 3'd4,  // W : SetTime(ARG); write data ignored
    REG_TASK_DELAY = 3'd5,  // W : TaskDelay(wdata = task id, ARG ticks)
    REG_CLEAR_TASK = 3'd6,  // W : ClearTask(wdata = task id)
    REG_WAKE       = 3'd7   // R : GetTasksToWake, bit i set = task i must be woken
  } tm_reg_e;

  localparam int unsigned TM_DATA_W = 32;  // bus data width
  localparam int unsigned TM_ADDR_W = 3;   // bus word-address width

endpackage
