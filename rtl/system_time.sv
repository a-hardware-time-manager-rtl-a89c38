// system_time: the system time module of the hardware time manager.
//
// A free-running CNT_W-bit counter that holds the number of clock ticks
// since start-up. It is zero after reset, which stands for the FPGA being
// configured, and adds one on every clock edge. SetTime loads a new value:
// when set_en is high at a clock edge, time_o takes set_value on that edge
// and counts on from it on the following edges. The count wraps modulo 2**CNT_W.
//
// Follows the paper: a plain up-counter, zero at start, one tick per clock,
// 64 bits wide by default. This design's own choices: the synchronous
// active-low reset (standing in for the FPGA configuration reset), the load
// port used for SetTime and the wrap-around.
module system_time #(
  parameter int unsigned CNT_W = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             set_en,
  input  logic [CNT_W-1:0] set_value,
  output logic [CNT_W-1:0] time_o
);

  logic [CNT_W-1:0] time_q;

  always_ff @(posedge clk) begin
    if (!rst_n)      time_q <= '0;
    else if (set_en) time_q <= set_value;
    else             time_q <= time_q + 1'b1;
  end

  assign time_o = time_q;

endmodule
