// tm_regif: register interface between the processor bus and the time manager.
//
// A bus slave with eight 32-bit word registers (map in tm_pkg). A bus
// access is one cycle with bus_cs high: bus_we high writes bus_wdata to
// bus_addr, bus_we low reads it. Read data is registered and returned on
// the next cycle with bus_rvalid high. Reads have no wait states, so a
// new access may be issued every cycle.
//
// The operations map onto the registers as follows.
//   GetTime        read TIME_LO, then TIME_HI. Reading TIME_LO stores the
//                  upper half of the same time sample, so the pair is one
//                  consistent 64-bit value.
//   SetTime        write ARG_LO and ARG_HI, then any value to SET_TIME.
//   TaskDelay      write the tick count to ARG_LO/ARG_HI, then the task id
//                  to TASK_DELAY.
//   GetTasksToWake read WAKE: bit i is the wake flag of task i.
//   ClearTask      write the task id to CLEAR_TASK.
// The command strobes (set_en, delay_en, clear_en) are combinational from
// the bus write, so the operation takes effect on the same clock edge as
// the write. The 64-bit ARG operand stays as written and may be reused.
//
// Follows the paper: a register-based interface, one register access per
// operation and the five operations with their arguments. This design's
// own choices: the bus, the data width, the register map, the staged
// 64-bit operand and the time snapshot.
module tm_regif
  import tm_pkg::*;
#(
  parameter int unsigned NUM_TASKS = 12,
  parameter int unsigned CNT_W     = 64,
  parameter int unsigned DATA_W    = TM_DATA_W,
  parameter int unsigned ADDR_W    = TM_ADDR_W,
  localparam int unsigned TASK_ID_W = (NUM_TASKS > 1) ? $clog2(NUM_TASKS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // processor bus slave
  input  logic                 bus_cs,
  input  logic                 bus_we,
  input  logic [ADDR_W-1:0]    bus_addr,
  input  logic [DATA_W-1:0]    bus_wdata,
  output logic [DATA_W-1:0]    bus_rdata,
  output logic                 bus_rvalid,
  // system time module
  input  logic [CNT_W-1:0]     time_i,
  output logic                 set_en,
  output logic [CNT_W-1:0]     set_value,
  // waiting tasks array
  input  logic [NUM_TASKS-1:0] wake_i,
  output logic                 delay_en,
  output logic [TASK_ID_W-1:0] delay_task,
  output logic [CNT_W-1:0]     delay_ticks,
  output logic                 clear_en,
  output logic [TASK_ID_W-1:0] clear_task
);

  localparam int unsigned WIDE_W = 2 * DATA_W;

  logic [DATA_W-1:0] arg_lo_q, arg_hi_q;
  logic [DATA_W-1:0] time_hi_q;
  logic [DATA_W-1:0] rdata_q;
  logic              rvalid_q;
  logic [WIDE_W-1:0] time_wide;
  logic [WIDE_W-1:0] arg_wide;
  logic              wr, rd;
  tm_reg_e           reg_sel;

  assign wr        = bus_cs &&  bus_we;
  assign rd        = bus_cs && !bus_we;
  assign reg_sel   = tm_reg_e'(bus_addr);
  assign time_wide = WIDE_W'(time_i);
  assign arg_wide  = {arg_hi_q, arg_lo_q};

  // Operation strobes to the counters.
  assign set_en      = wr && (reg_sel == REG_SET_TIME);
  assign set_value   = arg_wide[CNT_W-1:0];
  assign delay_en    = wr && (reg_sel == REG_TASK_DELAY);
  assign delay_task  = bus_wdata[TASK_ID_W-1:0];
  assign delay_ticks = arg_wide[CNT_W-1:0];
  assign clear_en    = wr && (reg_sel == REG_CLEAR_TASK);
  assign clear_task  = bus_wdata[TASK_ID_W-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      arg_lo_q  <= '0;
      arg_hi_q  <= '0;
      time_hi_q <= '0;
      rdata_q   <= '0;
      rvalid_q  <= 1'b0;
    end else begin
      rvalid_q <= rd;
      if (wr) begin
        case (reg_sel)
          REG_ARG_LO: arg_lo_q <= bus_wdata;
          REG_ARG_HI: arg_hi_q <= bus_wdata;
          default: ;
        endcase
      end
      if (rd) begin
        case (reg_sel)
          REG_TIME_LO: begin
            rdata_q   <= time_wide[DATA_W-1:0];
            time_hi_q <= time_wide[WIDE_W-1:DATA_W];
          end
          REG_TIME_HI: rdata_q <= time_hi_q;
          REG_ARG_LO:  rdata_q <= arg_lo_q;
          REG_ARG_HI:  rdata_q <= arg_hi_q;
          REG_WAKE:    rdata_q <= DATA_W'(wake_i);
          default:     rdata_q <= '0;
        endcase
      end
    end
  end

  assign bus_rdata  = rdata_q;
  assign bus_rvalid = rvalid_q;

  // Elaboration-time limits of this register map.
  if (NUM_TASKS > DATA_W) begin : g_bad_tasks
    $error("tm_regif: the WAKE bitmap must fit one bus word (NUM_TASKS <= DATA_W)");
  end
  if (CNT_W > WIDE_W) begin : g_bad_width
    $error("tm_regif: counters wider than two bus words are not supported");
  end

`ifndef SYNTHESIS
  // Bus rules: a task id must name an existing task.
  a_delay_id: assert property (@(posedge clk) disable iff (!rst_n)
    delay_en |-> (32'(delay_task) < NUM_TASKS))
    else $error("tm_regif: TaskDelay for task %0d of %0d", delay_task, NUM_TASKS);
  a_clear_id: assert property (@(posedge clk) disable iff (!rst_n)
    clear_en |-> (32'(clear_task) < NUM_TASKS))
    else $error("tm_regif: ClearTask for task %0d of %0d", clear_task, NUM_TASKS);
`endif

endmodule
