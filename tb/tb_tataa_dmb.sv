// tb_tataa_dmb: tests the dual-mode buffer (W = 16, depth 64).
//
// Random pushes and pops (never into a full or out of an empty buffer) against a
// reference queue: the head word, empty, full and the count must match every cycle.
// Also fills the buffer completely to see full and drains it to see empty.
module tb_tataa_dmb;
  localparam int W = 16, D = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic            push, pop, empty, full;
  logic [32*W-1:0] wdata, rdata;
  logic [6:0]      count;

  tataa_dmb #(.W(W), .DEPTH(D)) dut (.*);

  logic [32*W-1:0] q [$];

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic step(input bit ps, input bit pp);
    logic [32*W-1:0] d;
    d = {16{$urandom}};
    push <= ps; pop <= pp; wdata <= d;
    @(posedge clk);
    #1;
    if (pp) void'(q.pop_front());
    if (ps) q.push_back(d);
    check(empty == (q.size() == 0), "empty flag");
    check(full == (q.size() == D), "full flag");
    check(int'(count) == q.size(), "count");
    if (q.size() > 0) check(rdata == q[0], "head word");
  endtask

  initial begin
    push = 0; pop = 0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    #1;
    check(empty && !full, "empty after reset");
    for (int i = 0; i < D; i++) step(1, 0);
    check(full, "full after DEPTH pushes");
    step(1, 1);    // push and pop together while full
    for (int i = 0; i < D; i++) step(0, 1);
    check(empty, "empty after draining");
    for (int it = 0; it < 4000; it++) begin
      bit ps, pp;
      ps = 1'($urandom) && q.size() < D;
      pp = 1'($urandom) && q.size() > 0;
      if (q.size() == D) pp = 1;
      step(ps, pp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
