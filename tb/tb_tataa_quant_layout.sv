// tb_tataa_quant_layout: tests the quantization and layout unit (N = 8, W = 16).
//
// Runs all four conversions and the transpose with random data, a random scale and a
// memory side that is ready only some of the time: int16 -> int8 and int16 -> bfloat16
// rows of a MatMul tile (arriving last row first, as in a drain), bfloat16 -> bfloat16
// and bfloat16 -> int8 vectors, and the transposed int8 tile. Every written word and
// address is compared with the real-number references; the number of words written and
// the done pulse are checked too.
module tb_tataa_quant_layout;
  import tataa_pkg::*;
  import tataa_tb_pkg::*;

  localparam int N = 8, W = 16, TR = 4 * N, TC = 2 * W, MW = 16 * W;

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

  logic                 start, cfg_transpose, in_valid, in_ready, wr_valid, wr_ready, busy, done;
  qmode_e               cfg_qmode;
  logic [31:0]          cfg_base, wr_addr;
  logic [15:0]          cfg_stride, cfg_rows, cfg_scale, in_idx;
  logic [N*W-1:0][15:0] in_lanes;
  logic [MW-1:0]        wr_data;

  tataa_quant_layout #(.N(N), .W(W)) dut (.*);

  logic [MW-1:0] mem [int];
  int            nwr, ndone;
  always @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      check(!mem.exists(int'(wr_addr)), $sformatf("address %h written twice", wr_addr));
      mem[int'(wr_addr)] = wr_data;
      nwr++;
    end
    if (done) ndone++;
    wr_ready <= ($urandom_range(3) != 0);
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic [N*W-1:0][15:0] rows [TR];

  task automatic run(input qmode_e qm, input bit tr, input int base, input int stride, input int nrows,
                     input logic [15:0] scale, input bit mm);
    mem.delete();
    nwr = 0; ndone = 0;
    for (int r = 0; r < nrows; r++)
      for (int l = 0; l < N * W; l++)
        rows[r][l] = mm ? ((l < TC) ? 16'(int'($urandom_range(2000)) - 1000) : 16'($urandom)) : rnd_bf(110, 140);
    rows[0][0] = mm ? 16'h8000 : 16'h0000;   // extreme int16 / a zero
    rows[0][1] = mm ? 16'h7fff : 16'h7f00;
    @(posedge clk);
    #1;
    start = 1; cfg_qmode = qm; cfg_transpose = tr; cfg_base = 32'(base);
    cfg_stride = 16'(stride); cfg_rows = 16'(nrows); cfg_scale = scale;
    @(posedge clk);
    #1;
    start = 0;
    for (int i = 0; i < nrows; i++) begin
      int idx;
      idx = mm ? nrows - 1 - i : i;
      in_valid = 1; in_idx = 16'(idx); in_lanes = rows[idx];
      while (!in_ready) begin @(posedge clk); #1; end
      @(posedge clk);
      #1;
      in_valid = 0;
      repeat ($urandom_range(2)) begin @(posedge clk); #1; end
    end
    while (busy) begin @(posedge clk); #1; end
    repeat (2) @(posedge clk);
    check(ndone == 1, "one done pulse");
    // compare
    if (tr) begin
      check(nwr == TC, "transposed tile word count");
      for (int j = 0; j < TC; j++) for (int r = 0; r < TR; r++)
        check(mem.exists(base + j * stride) && mem[base + j * stride][8*r +: 8] == ref_q_i16_i8(rows[r][j], scale),
              $sformatf("transpose col %0d row %0d", j, r));
    end else begin
      for (int r = 0; r < nrows; r++) begin
        unique case (qm)
          Q_I16_I8: for (int c = 0; c < TC; c++)
            check(mem.exists(base + r * stride) && mem[base + r * stride][8*c +: 8] == ref_q_i16_i8(rows[r][c], scale),
                  $sformatf("i16->i8 row %0d col %0d", r, c));
          Q_I16_BF16: for (int c = 0; c < TC; c++)
            check(mem.exists(base + r * stride + c / W) &&
                  mem[base + r * stride + c / W][16*(c % W) +: 16] == ref_q_i16_bf16(rows[r][c], scale),
                  $sformatf("i16->bf16 row %0d col %0d", r, c));
          Q_BF16_BF16: for (int l = 0; l < N * W; l++)
            check(mem.exists(base + r * stride + l / W) && mem[base + r * stride + l / W][16*(l % W) +: 16] == rows[r][l],
                  $sformatf("bf16 row %0d lane %0d", r, l));
          default: for (int l = 0; l < N * W; l++)
            check(mem.exists(base + r * stride + l / TC) &&
                  mem[base + r * stride + l / TC][8*(l % TC) +: 8] == ref_q_bf16_i8(rows[r][l], scale),
                  $sformatf("bf16->i8 row %0d lane %0d", r, l));
        endcase
      end
    end
  endtask

  initial begin
    start = 0; in_valid = 0; wr_ready = 0; cfg_transpose = 0; cfg_qmode = Q_I16_I8;
    cfg_base = 0; cfg_stride = 0; cfg_rows = 0; cfg_scale = 0; in_idx = 0; in_lanes = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    run(Q_I16_I8,    0, 'h100, 1,   TR, 16'h3d80, 1);   // scale 1/16
    run(Q_I16_I8,    0, 'h800, 3,   TR, 16'hbc00, 1);   // negative scale, stride 3
    run(Q_I16_BF16,  0, 'h200, 2,   TR, 16'h3b03, 1);
    run(Q_BF16_BF16, 0, 'h300, N,   5,  16'h3f80, 0);
    run(Q_BF16_I8,   0, 'h400, N/2, 5,  16'h4200, 0);   // scale 32
    run(Q_I16_I8,    1, 'h500, 4,   TR, 16'h3d00, 1);   // transposed
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
