// tb_tataa_top: end-to-end test of the accelerator at a reduced size.
//
// Two cores of N = 2 DMPUs with W = 4 columns (an 8 x 4 PE array per core, 8 x 8
// int8 products, 8-lane bfloat16 vectors, 64-bit memory words), each with its own
// behavioural memory (random ready, three-cycle latency). Both cores run the same
// program on different random data:
//   CONFIG scale and two constants; LOAD.M RMX0/RMY0; MATMUL; LOAD.M RMX1/RMY1 while
//   the MATMUL runs (double buffering); MATMUL with accumulation; STORE.M as int8,
//   as bfloat16 and as transposed int8; three LOAD.V; a chain of MUL.V, ADD.V
//   (read-after-write on the MUL.V result), APP.V and constant operands, results into
//   the registers and the buffers; STORE.V as bfloat16 and as int8; a final MATMUL in
//   int8 mode again and its STORE.M; HALT.
// Every word written is compared with a reference computed here from the input data
// (integer matrix products, real-number bfloat16 and quantization models). Each
// mechanism is counted when it is seen happening (double buffering, both load ports
// busy at once, hazard stall, vector ops overlapping in the pipeline, mode switches,
// transpose, each quantization mode, each bfloat16 op); one that never happens counts
// as a failure. A watchdog ends a hung run.
module tb_tataa_top;
  import tataa_pkg::*;
  import tataa_tb_pkg::*;

  localparam int K = 2, N = 2, W = 4, MW = 16 * W;
  localparam int TR = 4 * N, TC = 2 * W, L = N * W;
  localparam int K1 = 6, K2 = 5;
  localparam int X0 = 'h100, Y0 = 'h140, X1 = 'h180, Y1 = 'h1c0;
  localparam int VA = 'h200, VB = 'h210, VD = 'h220;
  localparam int O1 = 'h400, O2 = 'h440, O3 = 'h480, O4 = 'h500, O5 = 'h540, O6 = 'h580;
  localparam logic [15:0] SCALE = 16'h3e00;   // 0.125

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [K-1:0]              start, done;
  logic [K-1:0][31:0]        start_pc;
  logic [K-1:0]              if_req_valid, if_req_ready, if_rsp_valid;
  logic [K-1:0][31:0]        if_req_addr;
  logic [K-1:0][63:0]        if_rsp_data;
  logic [K-1:0][1:0]         rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [K-1:0][1:0][31:0]   rd_req_addr;
  logic [K-1:0][1:0][MW-1:0] rd_rsp_data;
  logic [K-1:0]              wr_valid, wr_ready;
  logic [K-1:0][31:0]        wr_addr;
  logic [K-1:0][MW-1:0]      wr_data;
  stats_t [K-1:0]            stats;

  tataa_top #(.K(K), .N(N), .W(W)) dut (.*);

  for (genvar k = 0; k < K; k++) begin : g_mem
    tb_tataa_mem #(.MEM_W(MW)) u_mem (
      .clk,
      .if_req_valid(if_req_valid[k]), .if_req_ready(if_req_ready[k]), .if_req_addr(if_req_addr[k]),
      .if_rsp_valid(if_rsp_valid[k]), .if_rsp_data(if_rsp_data[k]),
      .rd_req_valid(rd_req_valid[k]), .rd_req_ready(rd_req_ready[k]), .rd_req_addr(rd_req_addr[k]),
      .rd_rsp_valid(rd_rsp_valid[k]), .rd_rsp_data(rd_rsp_data[k]),
      .wr_valid(wr_valid[k]), .wr_ready(wr_ready[k]), .wr_addr(wr_addr[k]), .wr_data(wr_data[k])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // mechanism counters
  int m_dual_port = 0, m_stream = 0;
  always @(posedge clk) begin
    for (int k = 0; k < K; k++) if (&rd_req_valid[k]) m_dual_port++;
    if (dut.g_core[0].u_core.u_exec.pipe[1].vld &&
        |{dut.g_core[0].u_core.u_exec.pipe[2].vld, dut.g_core[0].u_core.u_exec.pipe[3].vld,
          dut.g_core[0].u_core.u_exec.pipe[4].vld, dut.g_core[0].u_core.u_exec.pipe[5].vld}) m_stream++;
  end

  // per-core data and references
  logic signed [7:0]  xa [K][TR][K1], ya [K][K1][TC], xb [K][TR][K2], yb [K][K2][TC];
  logic signed [15:0] c_acc [K][TR][TC], c_one [K][TR][TC];
  logic [15:0]        va [K][L], vb [K][L], vd [K][L], cval [K];

  function automatic logic signed [7:0] rnd8();
    return 8'(int'($urandom_range(100)) - 50);
  endfunction

  task automatic build(input int k);
    logic [63:0] p [$];
    for (int r = 0; r < TR; r++) for (int i = 0; i < K1; i++) xa[k][r][i] = rnd8();
    for (int r = 0; r < TR; r++) for (int i = 0; i < K2; i++) xb[k][r][i] = rnd8();
    for (int i = 0; i < K1; i++) for (int c = 0; c < TC; c++) ya[k][i][c] = rnd8();
    for (int i = 0; i < K2; i++) for (int c = 0; c < TC; c++) yb[k][i][c] = rnd8();
    // a few extreme operands
    xa[k][0][0] = -128; ya[k][0][0] = -128; xa[k][TR-1][1] = 127; ya[k][1][TC-1] = -128;
    for (int r = 0; r < TR; r++) for (int c = 0; c < TC; c++) begin
      int s1, s2;
      s1 = 0; s2 = 0;
      for (int i = 0; i < K1; i++) s1 += int'(xa[k][r][i]) * int'(ya[k][i][c]);
      for (int i = 0; i < K2; i++) s2 += int'(xb[k][r][i]) * int'(yb[k][i][c]);
      c_one[k][r][c] = 16'(s1);
      c_acc[k][r][c] = 16'(s1 + s2);
    end
    for (int i = 0; i < L; i++) begin
      va[k][i] = rnd_bf(124, 130);
      vb[k][i] = rnd_bf(124, 130);
      vd[k][i] = {1'b0, 15'(rnd_bf(100, 150))};
    end
    va[k][1] = vb[k][1] ^ 16'h8000;   // exact cancellation in the ADD.V below? (not with the product)
    cval[k] = rnd_bf(126, 128);
    // memory images: word i of X = column i (byte r = row r), word i of Y = row i
    for (int i = 0; i < K1; i++) for (int r = 0; r < TR; r++) g_mem_set_byte(k, X0 + i, r, xa[k][r][i]);
    for (int i = 0; i < K2; i++) for (int r = 0; r < TR; r++) g_mem_set_byte(k, X1 + i, r, xb[k][r][i]);
    for (int i = 0; i < K1; i++) for (int c = 0; c < TC; c++) g_mem_set_byte(k, Y0 + i, c, ya[k][i][c]);
    for (int i = 0; i < K2; i++) for (int c = 0; c < TC; c++) g_mem_set_byte(k, Y1 + i, c, yb[k][i][c]);
    for (int i = 0; i < L; i++) begin
      g_mem_set_half(k, VA + i / W, i % W, va[k][i]);
      g_mem_set_half(k, VB + i / W, i % W, vb[k][i]);
      g_mem_set_half(k, VD + i / W, i % W, vd[k][i]);
    end
    // program
    p.push_back(i_config(0, SCALE));
    p.push_back(i_config(1, 16'h3f80));
    p.push_back(i_config(2, cval[k]));
    p.push_back(i_load_m(0, K1, X0));
    p.push_back(i_load_m(2, K1, Y0));
    p.push_back(i_matmul(0, 0, 0, K1));
    p.push_back(i_load_m(1, K2, X1));
    p.push_back(i_load_m(3, K2, Y1));
    p.push_back(i_matmul(1, 1, 1, K2));
    p.push_back(i_store_m(0, 0, 1, O1));
    p.push_back(i_store_m(1, 0, 2, O2));
    p.push_back(i_store_m(0, 1, 1, O3));
    p.push_back(i_load_v(0, 16, VA));
    p.push_back(i_load_v(1, 16, VB));
    p.push_back(i_load_v(1, 19, VD));
    p.push_back(i_vec(4, 1, 0, 17, 0, 16, 1, 16));   // A17 = A16 * B16
    p.push_back(i_vec(5, 2, 0, 17, 0, 17, 1, 16));   // B17 = A17 + B16
    p.push_back(i_vec(6, 1, 0, 18, 1, 19, 0, 0));    // A18 = app(B19)
    p.push_back(i_vec(4, 0, 1, 0, 0, 18, 2, 1));     // buf = A18 * C1
    p.push_back(i_vec(5, 0, 1, 0, 1, 17, 0, 17));    // buf = B17 + A17
    p.push_back(i_vec(4, 0, 1, 0, 1, 17, 2, 0));     // buf = B17 * C0 (1.0)
    p.push_back(i_store_v(0, 3, O4));
    p.push_back(i_vec(4, 0, 1, 0, 0, 17, 2, 1));     // buf = A17 * C1
    p.push_back(i_store_v(1, 1, O5));
    p.push_back(i_matmul(0, 0, 0, K1));
    p.push_back(i_store_m(0, 0, 1, O6));
    p.push_back(i_halt());
    for (int i = 0; i < p.size(); i++) g_imem_set(k, 32 + i, p[i]);
  endtask

  // hierarchical access to the memories of the generate loop
  task automatic g_mem_set_byte(input int k, input int a, input int b, input logic [7:0] v);
    if (k == 0) g_mem[0].u_mem.mem[a][8*b +: 8] = v;
    else        g_mem[1].u_mem.mem[a][8*b +: 8] = v;
  endtask
  task automatic g_mem_set_half(input int k, input int a, input int h, input logic [15:0] v);
    if (k == 0) g_mem[0].u_mem.mem[a][16*h +: 16] = v;
    else        g_mem[1].u_mem.mem[a][16*h +: 16] = v;
  endtask
  task automatic g_imem_set(input int k, input int a, input logic [63:0] v);
    if (k == 0) g_mem[0].u_mem.imem[a] = v;
    else        g_mem[1].u_mem.imem[a] = v;
  endtask
  function automatic logic [MW-1:0] rd(input int k, input int a);
    return (k == 0) ? g_mem[0].u_mem.mem[a] : g_mem[1].u_mem.mem[a];
  endfunction

  int m_mm_i8 = 0, m_mm_acc = 0, m_i16_bf16 = 0, m_transpose = 0, m_fmul = 0, m_fadd = 0;
  int m_fapp = 0, m_const = 0, m_sv_bf16 = 0, m_sv_i8 = 0, m_mm_again = 0;

  task automatic verify(input int k);
    logic [15:0] a17 [L], b17 [L], a18 [L];
    for (int i = 0; i < L; i++) begin
      a17[i] = ref_fmul(va[k][i], vb[k][i]);
      b17[i] = ref_fadd(a17[i], vb[k][i]);
      a18[i] = ref_fapp(vd[k][i]);
    end
    for (int r = 0; r < TR; r++) for (int c = 0; c < TC; c++) begin
      logic [7:0] got, exp;
      got = rd(k, O1 + r)[8*c +: 8];
      exp = ref_q_i16_i8(c_acc[k][r][c], SCALE);
      check(got == exp, $sformatf("core%0d int8 C[%0d][%0d] got %0d exp %0d (acc %0d)", k, r, c, $signed(got), $signed(exp), c_acc[k][r][c]));
      if (got == exp) begin m_mm_i8++; m_mm_acc++; end
      begin
        logic [15:0] gb, eb;
        gb = rd(k, O2 + 2 * r + c / W)[16*(c % W) +: 16];
        eb = ref_q_i16_bf16(c_acc[k][r][c], SCALE);
        check(gb == eb, $sformatf("core%0d bf16 C[%0d][%0d] got %h exp %h", k, r, c, gb, eb));
        if (gb == eb) m_i16_bf16++;
      end
      got = rd(k, O3 + c)[8*r +: 8];
      check(got == exp, $sformatf("core%0d transposed C[%0d][%0d] got %0d exp %0d", k, r, c, $signed(got), $signed(exp)));
      if (got == exp) m_transpose++;
      got = rd(k, O6 + r)[8*c +: 8];
      exp = ref_q_i16_i8(c_one[k][r][c], SCALE);
      check(got == exp, $sformatf("core%0d second int8 C[%0d][%0d] got %0d exp %0d", k, r, c, $signed(got), $signed(exp)));
      if (got == exp) m_mm_again++;
    end
    for (int i = 0; i < L; i++) begin
      logic [15:0] g, e;
      g = rd(k, O4 + i / W)[16*(i % W) +: 16];
      e = ref_fmul(a18[i], cval[k]);
      check(g == e, $sformatf("core%0d app*c lane %0d got %h exp %h", k, i, g, e));
      if (g == e) begin m_fapp++; m_const++; m_sv_bf16++; end
      g = rd(k, O4 + N + i / W)[16*(i % W) +: 16];
      e = ref_fadd(b17[i], a17[i]);
      check(g == e, $sformatf("core%0d add lane %0d got %h exp %h", k, i, g, e));
      if (g == e) m_fadd++;
      g = rd(k, O4 + 2 * N + i / W)[16*(i % W) +: 16];
      e = ref_fmul(b17[i], 16'h3f80);
      check(g == e, $sformatf("core%0d mul lane %0d got %h exp %h", k, i, g, e));
      if (g == e) m_fmul++;
      begin
        logic [7:0] g8, e8;
        g8 = rd(k, O5)[8*i +: 8];
        e8 = ref_q_bf16_i8(ref_fmul(a17[i], cval[k]), SCALE);
        check(g8 == e8, $sformatf("core%0d bf16->int8 lane %0d got %0d exp %0d", k, i, $signed(g8), $signed(e8)));
        if (g8 == e8) m_sv_i8++;
      end
    end
  endtask

  task automatic mech(input int n, input string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never seen: %s", what);
    end else $display("mechanism %-28s seen %0d", what, n);
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int cyc;
  initial begin
    start = '0;
    start_pc = '0;
    #1;
    for (int k = 0; k < K; k++) build(k);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    start    <= '1;
    start_pc <= {K{32'd32}};
    @(posedge clk);
    start <= '0;
    cyc = 0;
    while (done != '1) begin @(posedge clk); cyc++; end
    repeat (5) @(posedge clk);
    $display("both cores done after %0d cycles", cyc);
    for (int k = 0; k < K; k++) begin
      verify(k);
      $display("core%0d: issued %0d stall %0d overlap %0d hazard %0d vec %0d mm %0d mode_sw %0d store_m %0d store_v %0d",
               k, stats[k].issued, stats[k].stall, stats[k].overlap, stats[k].hazard, stats[k].vec,
               stats[k].mm, stats[k].mode_sw, stats[k].store_m, stats[k].store_v);
      check(stats[k].issued == 27, "issued count");
      check(stats[k].vec == 7 && stats[k].mm == 3 && stats[k].store_m == 4 && stats[k].store_v == 2, "unit counts");
    end
    mech(m_mm_i8, "int8 MatMul -> int8");
    mech(m_mm_acc * int'(stats[0].mm >= 2), "MATMUL accumulation");
    mech(m_mm_again, "MatMul after vector mode");
    mech(m_i16_bf16, "int16 -> bf16 quantization");
    mech(m_transpose, "transposed store");
    mech(m_fmul, "fpmul");
    mech(m_fadd, "fpadd");
    mech(m_fapp, "fpapp");
    mech(m_const, "constant operand (RVC)");
    mech(m_sv_bf16, "STORE.V bf16");
    mech(m_sv_i8, "STORE.V bf16 -> int8");
    mech(int'(stats[0].overlap + stats[1].overlap), "parallel issue (ILP)");
    mech(m_dual_port, "both load ports busy");
    mech(int'(stats[0].hazard + stats[1].hazard), "RAW hazard stall");
    mech(m_stream, "vector ops overlapped in columns");
    mech(int'(stats[0].mode_sw >= 2) * int'(stats[0].mode_sw), "array mode switches");
    mech(int'(done == '1), "all cores halted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
