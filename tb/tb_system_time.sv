// tb_system_time: self-checking testbench of system_time.
//
// Checks that the time is zero after reset, rises by exactly one per clock
// (one tick per cycle), takes a SetTime value on the loading edge and
// counts on from it, and wraps from all-ones to zero. Inputs change on the
// falling edge; the expected time is kept by a counter in the testbench.
module tb_system_time;
  localparam int unsigned CNT_W = 64;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic             set_en = 1'b0;
  logic [CNT_W-1:0] set_value = '0;
  logic [CNT_W-1:0] time_o;
  logic [CNT_W-1:0] expected;
  int checks = 0, failures = 0;

  system_time #(.CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input string what);
    checks++;
    if (time_o !== expected) begin
      failures++;
      $display("FAIL %s: time=%0d expected=%0d", what, time_o, expected);
    end
  endtask

  // Advance n clocks with set_en low, checking after each edge.
  task automatic run(input int n);
    repeat (n) begin
      @(posedge clk); #1;
      expected = expected + 1;
      check("count");
    end
  endtask

  task automatic set_time(input logic [CNT_W-1:0] v);
    @(negedge clk);
    set_en = 1'b1; set_value = v;
    @(posedge clk); #1;
    expected = v;
    check("set");
    @(negedge clk);
    set_en = 1'b0;
    check("hold until next edge");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1; expected = '0; check("reset");
    @(negedge clk); rst_n = 1'b1;
    expected = '0;
    run(100);
    set_time(64'h0000_0001_0000_0000);
    run(17);
    set_time('1 - 64'd5);
    run(10);   // crosses the wrap from all ones to zero
    for (int i = 0; i < 20; i++) begin
      set_time({$urandom, $urandom});
      run(1 + ($urandom % 8));
    end
    // reset clears the time again
    @(negedge clk); rst_n = 1'b0;
    @(posedge clk); #1; expected = '0; check("reset again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
