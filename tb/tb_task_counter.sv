// tb_task_counter: self-checking testbench of task_counter.
//
// For a range of delays (0, 1, 2, small random and one above 2**32) it
// loads the counter, counts the clock edges after the loading edge until
// `wake` rises and checks that this is exactly the delay (1 for a delay of 0), that `active` is
// high while counting and low afterwards, and that `count` falls by one per
// clock. It then checks that `wake` holds until `clear`, that a clear in
// the expiry cycle does not lose the wake-up, and that a reload while
// counting restarts the delay. Inputs change on the falling clock edge.
module tb_task_counter;
  localparam int unsigned CNT_W = 64;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic             load = 1'b0;
  logic [CNT_W-1:0] ticks = '0;
  logic             clear = 1'b0;
  logic             active;
  logic [CNT_W-1:0] count;
  logic             wake;
  int checks = 0, failures = 0;

  task_counter #(.CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic do_load(input logic [CNT_W-1:0] t);
    @(negedge clk); load = 1'b1; ticks = t;
    @(negedge clk); load = 1'b0;   // one loading edge has passed
  endtask

  task automatic do_clear();
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
  endtask

  // Load a delay and measure the edges until wake, checking on the way.
  task automatic delay_test(input longint t, input bit walk_count);
    longint edges;
    longint exp_edges;
    exp_edges = (t == 0) ? 1 : t;
    do_load(CNT_W'(t));
    edges = 0;                          // edges after the loading edge
    expect_eq("active after load", active, 1);
    expect_eq("count after load", count, t);
    if (!walk_count && t > 1000) begin
      // for a large delay only check it is still counting, then reset
      repeat (100) @(posedge clk);
      #1 expect_eq("count after 100 edges", count, t - 100);
      expect_eq("still waiting", wake, 0);
      return;
    end
    while (!wake && edges < exp_edges + 5) begin
      @(posedge clk); #1; edges++;
      if (walk_count && !wake) expect_eq("count walk", count, t - edges);
    end
    expect_eq("edges from load to wake", edges, exp_edges);
    expect_eq("inactive after wake", active, 0);
    expect_eq("count at zero", count, 0);
    repeat (5) @(posedge clk);
    #1 expect_eq("wake held", wake, 1);
    do_clear();
    expect_eq("wake cleared", wake, 0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 expect_eq("reset wake", wake, 0);
    expect_eq("reset active", active, 0);
    @(negedge clk); rst_n = 1'b1;
    delay_test(0, 1);
    delay_test(1, 1);
    delay_test(2, 1);
    delay_test(3, 1);
    for (int i = 0; i < 10; i++) delay_test(longint'(4 + $urandom % 200), 1);
    delay_test(64'h1_0000_0005, 0);
    // a reload while counting restarts the delay
    do_load(64'd50);                 // counter now restarting from a large value
    do_load(64'd10);
    // edges since second load: 0
    repeat (9) @(posedge clk);
    #1 expect_eq("reload: not yet", wake, 0);
    @(posedge clk); #1 expect_eq("reload: wake at 10", wake, 1);
    do_clear();
    // a clear in the expiry cycle does not lose the wake-up
    do_load(64'd4);
    repeat (3) @(posedge clk);       // 3 edges after the load, the 4th expires
    @(negedge clk); clear = 1'b1;
    @(posedge clk); #1 expect_eq("expiry beats clear", wake, 1);
    @(negedge clk); clear = 1'b0;
    do_clear();
    expect_eq("cleared after race", wake, 0);
    // reset in the middle of a count
    do_load(64'd20);
    @(negedge clk); rst_n = 1'b0;
    @(negedge clk); rst_n = 1'b1;
    expect_eq("reset stops counting", active, 0);
    repeat (30) @(posedge clk);
    #1 expect_eq("no wake after reset", wake, 0);
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
