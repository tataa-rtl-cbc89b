// tb_tataa_dmpu: tests one dual-mode processing unit (4 rows x W = 16 columns).
//
// int8 MatMul mode: X (4 x K) and Y (K x 2W) are fed with the staircase skew (row r of X
// r cycles late, column pair c of Y 2c cycles late); after mm_drain the four rows of
// int16 results must leave the bottom one per cycle, row 3 first, and equal X*Y.
// Two products are run, the second without clearing first to check accumulation.
// bfloat16 mode: every column gets its own random operation each cycle; every
// result must appear at the bottom four cycles later and match the reference.
module tb_tataa_dmpu;
  import tataa_pkg::*;
  import tataa_tb_pkg::*;

  localparam int W = 16, KK = 12;

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

  mode_e           mode;
  logic            mm_clr, mm_drain;
  logic [3:0][7:0] left_in;
  lane_t [W-1:0]   top_in, bot_out;

  tataa_dmpu #(.W(W)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic signed [7:0] x [4][KK], y [KK][2*W];
  int                acc [4][2*W];
  logic [15:0]       exp_fp [$][W];

  task automatic matmul(input bit clear);
    for (int r = 0; r < 4; r++) for (int i = 0; i < KK; i++) x[r][i] = 8'($urandom);
    for (int i = 0; i < KK; i++) for (int c = 0; c < 2 * W; c++) y[i][c] = 8'($urandom_range(40)) - 8'sd20;
    for (int r = 0; r < 4; r++) for (int c = 0; c < 2 * W; c++) begin
      if (clear) acc[r][c] = 0;
      for (int i = 0; i < KK; i++) acc[r][c] += int'(x[r][i]) * int'(y[i][c]);
    end
    if (clear) begin
      mm_clr <= 1'b1;
      @(posedge clk);
      mm_clr <= 1'b0;
    end
    for (int t = 0; t < KK + 2 * W + 6; t++) begin
      for (int r = 0; r < 4; r++) left_in[r] <= (t - r >= 0 && t - r < KK) ? x[r][t-r] : 8'd0;
      for (int c = 0; c < W; c++) begin
        lane_t v;
        v = '0;
        if (t - 2 * c >= 0 && t - 2 * c < KK) v.ma = 18'({y[t-2*c][2*c+1], y[t-2*c][2*c]});
        top_in[c] <= v;
      end
      @(posedge clk);
    end
    left_in <= '0;
    top_in  <= '0;
  endtask

  task automatic drain();
    mm_drain <= 1'b1;
    @(posedge clk);
    mm_drain <= 1'b0;
    for (int j = 0; j < 4; j++) begin
      #1;
      for (int c = 0; c < W; c++) begin
        check(bot_out[c].ma[15:0] == 16'(acc[3-j][2*c]),
              $sformatf("row %0d col %0d got %0d exp %0d", 3 - j, 2 * c, $signed(bot_out[c].ma[15:0]), 16'(acc[3-j][2*c])));
        check(bot_out[c].mb[15:0] == 16'(acc[3-j][2*c+1]), $sformatf("row %0d col %0d", 3 - j, 2 * c + 1));
      end
      @(posedge clk);
    end
  endtask

  initial begin
    mode = MODE_MM; mm_clr = 0; mm_drain = 0; left_in = '0; top_in = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    matmul(1'b1);
    drain();
    matmul(1'b0);   // accumulate onto the first product
    drain();
    // ---------- bfloat16 mode
    mode <= MODE_FP;
    for (int t = 0; t < 200 + 4; t++) begin
      #1;
      if (t >= 4) begin
        for (int c = 0; c < W; c++) begin
          check(bot_out[c].vld, "result valid four cycles after entry");
          check(bot_out[c].ma[15:0] == exp_fp[0][c], $sformatf("fp col %0d got %h exp %h", c, bot_out[c].ma[15:0], exp_fp[0][c]));
        end
        void'(exp_fp.pop_front());
      end else begin
        for (int c = 0; c < W; c++) check(!bot_out[c].vld, "no result before four cycles");
      end
      if (t < 200) begin
        logic [15:0] e [W];
        for (int c = 0; c < W; c++) begin
          lane_t v;
          int sel;
          v     = '0;
          v.vld = 1'b1;
          sel   = int'($urandom_range(2));
          v.ma  = 18'(rnd_bf(110, 145));
          v.mb  = 18'(rnd_bf(110, 145));
          if (sel == 0)      begin v.op = FOP_MUL; e[c] = ref_fmul(v.ma[15:0], v.mb[15:0]); end
          else if (sel == 1) begin v.op = FOP_ADD; e[c] = ref_fadd(v.ma[15:0], v.mb[15:0]); end
          else begin v.op = FOP_APP; v.ma[15] = 1'b0; e[c] = ref_fapp(v.ma[15:0]); end
          top_in[c] <= v;
        end
        exp_fp.push_back(e);
      end else top_in <= '0;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
