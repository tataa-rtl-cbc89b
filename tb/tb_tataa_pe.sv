// tb_tataa_pe: tests the dual-mode processing element.
//
// int8 MatMul mode, one PE: random packed int8 pairs from the top and int8 from the
// left are accumulated after mm_clr; mm_drain must put both sums (cut to int16, the
// high one corrected for the borrow of a negative low sum) in the bottom register.
// Also checks the one-cycle vertical and two-cycle horizontal hops. Includes the
// extreme operands -128 * -128.
// bfloat16 mode, four PEs with STAGE 0..3 stacked as one column: a new random fpmul,
// fpadd or fpapp enters every cycle, plus corner cases (zeros, cancellation, exponent
// gaps beyond the guard bits, overflow, underflow); each result must leave the fourth
// PE exactly four cycles after it entered and match the real-number reference.
module tb_tataa_pe;
  import tataa_pkg::*;
  import tataa_tb_pkg::*;

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

  // ---------------- single PE, MatMul mode
  mode_e      mode;
  logic       mm_clr, mm_drain;
  logic [7:0] left_in, right_out;
  lane_t      top_in, bot_out;

  tataa_pe #(.STAGE(0)) u_pe (.clk, .rst_n, .mode, .mm_clr, .mm_drain, .left_in, .right_out, .top_in, .bot_out);

  // ---------------- four-stage column, bfloat16 mode
  lane_t col [5];
  logic [7:0] hx [4];
  for (genvar s = 0; s < 4; s++) begin : g_st
    tataa_pe #(.STAGE(s)) u_st (.clk, .rst_n, .mode(MODE_FP), .mm_clr(1'b0), .mm_drain(1'b0),
                                .left_in(8'd0), .right_out(hx[s]), .top_in(col[s]), .bot_out(col[s+1]));
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // expected results of the column, by entry cycle
  logic [15:0] exp_q [$];
  int          due_q [$];
  int          cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && col[4].vld) begin
      check(due_q.size() > 0 && due_q[0] == cyc, $sformatf("result at cycle %0d, due %0d", cyc, due_q.size() > 0 ? due_q[0] : -1));
      if (exp_q.size() > 0) begin
        check(col[4].ma[15:0] == exp_q[0], $sformatf("fp result %h exp %h", col[4].ma[15:0], exp_q[0]));
        void'(exp_q.pop_front());
        void'(due_q.pop_front());
      end
    end
  end

  task automatic fp_push(input fop_e op, input logic [15:0] a, input logic [15:0] b);
    lane_t t;
    #1;
    t    = '0;
    t.vld = 1'b1;
    t.op = op;
    t.ma = 18'(a);
    t.mb = 18'(b);
    col[0] <= t;
    unique case (op)
      FOP_MUL: exp_q.push_back(ref_fmul(a, b));
      FOP_ADD: exp_q.push_back(ref_fadd(a, b));
      default: exp_q.push_back(ref_fapp(a));
    endcase
    due_q.push_back(cyc + 4);
    @(posedge clk);
  endtask

  initial begin
    logic signed [7:0] xs [16], lo [16], hi [16];
    int slo, shi;
    mode = MODE_MM; mm_clr = 0; mm_drain = 0; left_in = 0; top_in = '0;
    col[0] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // ---------- MatMul: 20 rounds of K = 16
    for (int round = 0; round < 20; round++) begin
      slo = 0; shi = 0;
      for (int i = 0; i < 16; i++) begin
        xs[i] = 8'($urandom); lo[i] = 8'($urandom); hi[i] = 8'($urandom);
        if (round == 0) begin xs[i] = -128; lo[i] = (i < 2) ? -128 : 8'sd0; hi[i] = 127; end
        slo += int'(xs[i]) * int'(lo[i]);
        shi += int'(xs[i]) * int'(hi[i]);
      end
      mm_clr <= 1'b1;
      @(posedge clk);
      mm_clr <= 1'b0;
      for (int i = 0; i < 16; i++) begin
        left_in   <= xs[i];
        top_in    <= '0;
        top_in.ma <= 18'({hi[i], lo[i]});
        @(posedge clk);
        #1;
        // hops: bottom = top of the previous cycle, right = left of two cycles ago
        check(bot_out.ma[15:0] == {hi[i], lo[i]}, "vertical hop is one cycle");
        if (i >= 1) check(right_out == xs[i-1], "horizontal hop is two cycles");
      end
      left_in <= 0; top_in <= '0;
      repeat (2) @(posedge clk);
      mm_drain <= 1'b1;
      @(posedge clk);
      mm_drain <= 1'b0;
      #1;
      check(bot_out.ma[15:0] == 16'(slo), $sformatf("MAC lo %0d exp %0d", $signed(bot_out.ma[15:0]), 16'(slo)));
      check(bot_out.mb[15:0] == 16'(shi), $sformatf("MAC hi %0d exp %0d", $signed(bot_out.mb[15:0]), 16'(shi)));
      @(posedge clk);
    end
    // ---------- bfloat16 column: corner cases, then a random stream
    fp_push(FOP_MUL, 16'h3f80, 16'h4040);          // 1 * 3
    fp_push(FOP_MUL, 16'h0000, 16'h4040);          // zero operand
    fp_push(FOP_MUL, 16'h7f00, 16'h7f00);          // overflow -> inf
    fp_push(FOP_MUL, 16'h0100, 16'h8100);          // underflow -> -0
    fp_push(FOP_ADD, 16'h4040, 16'hc040);          // exact cancellation
    fp_push(FOP_ADD, 16'h4700, 16'h3f80);          // gap of 14 > guard: small one dropped
    fp_push(FOP_ADD, 16'h4380, 16'h3f81);          // gap of 8, kept in the guard bits
    fp_push(FOP_ADD, 16'hbf80, 16'h3f00);          // -1 + 0.5
    fp_push(FOP_ADD, 16'h7f7f, 16'h7f7f);          // overflow on add
    fp_push(FOP_APP, 16'h4080, 16'h0000);          // approx 1/4
    fp_push(FOP_APP, 16'h3f80, 16'h0000);
    for (int i = 0; i < 600; i++) begin
      int sel;
      sel = int'($urandom_range(2));
      if (sel == 0)      fp_push(FOP_MUL, rnd_bf(60, 200), rnd_bf(60, 200));
      else if (sel == 1) fp_push(FOP_ADD, rnd_bf(118, 136), rnd_bf(118, 136));
      else               fp_push(FOP_APP, {1'b0, 15'(rnd_bf(1, 254))}, 16'h0);
    end
    col[0] <= '0;
    repeat (8) @(posedge clk);
    check(exp_q.size() == 0, "every fp operation produced a result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
