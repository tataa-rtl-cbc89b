// tb_tataa_core: tests one core (N = 2, W = 4: an 8 x 4 PE array, 8 x 8 int8
// products, 8-lane vectors, 64-bit memory words) against a behavioural memory.
//
// Program: CONFIG scale and a constant; LOAD.M RMX0 and RMY0 with full-range int8
// (K = 7); MATMUL; STORE.M as int8; STORE.M again as bfloat16; LOAD.V into both banks;
// ADD.V into a register; MUL.V of that register with the constant into the buffers;
// APP.V into the buffers; STORE.V as bfloat16; HALT. All written words are compared
// with the references. The paper's four-stage bfloat16 latency is checked at the array:
// every vector result must reach the write-back point exactly four cycles after its
// operands entered stage S0.
module tb_tataa_core;
  import tataa_pkg::*;
  import tataa_tb_pkg::*;

  localparam int N = 2, W = 4, MW = 16 * W, TR = 4 * N, TC = 2 * W, L = N * W, KK = 7;
  localparam int XA = 'h100, YA = 'h140, VA = 'h200, VB = 'h210, O1 = 'h300, O2 = 'h340, O3 = 'h380;
  localparam logic [15:0] SCALE = 16'h3c00;   // 1/128

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

  logic               start, done;
  logic [31:0]        start_pc;
  logic               if_req_valid, if_req_ready, if_rsp_valid;
  logic [31:0]        if_req_addr;
  logic [63:0]        if_rsp_data;
  logic [1:0]         rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [1:0][31:0]   rd_req_addr;
  logic [1:0][MW-1:0] rd_rsp_data;
  logic               wr_valid, wr_ready;
  logic [31:0]        wr_addr;
  logic [MW-1:0]      wr_data;
  stats_t             stats;

  tataa_core #(.N(N), .W(W)) dut (.*);
  tb_tataa_mem #(.MEM_W(MW)) u_mem (.*);

  // bfloat16 latency through the four PE stages
  int cyc = 0, fp_in [$], n_lat = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dut.fp_vld) fp_in.push_back(cyc);
    if (rst_n && (dut.ex_wb_en || dut.ex_wb_dmb)) begin
      check(fp_in.size() > 0 && cyc - fp_in[0] == 4, "bfloat16 result four cycles after S0");
      if (fp_in.size() > 0) void'(fp_in.pop_front());
      n_lat++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic signed [7:0] x [TR][KK], y [KK][TC];
  logic [15:0]       va [L], vb [L], cv;

  initial begin
    start = 0; start_pc = 0;
    #1;
    for (int r = 0; r < TR; r++) for (int i = 0; i < KK; i++) begin
      x[r][i] = 8'($urandom);
      u_mem.mem[XA + i][8*r +: 8] = x[r][i];
    end
    for (int i = 0; i < KK; i++) for (int c = 0; c < TC; c++) begin
      y[i][c] = (i == 0 && c < 2) ? -8'sd128 : 8'($urandom);
      u_mem.mem[YA + i][8*c +: 8] = y[i][c];
    end
    for (int i = 0; i < L; i++) begin
      va[i] = rnd_bf(120, 134);
      vb[i] = rnd_bf(120, 134);
      u_mem.mem[VA + i / W][16*(i % W) +: 16] = va[i];
      u_mem.mem[VB + i / W][16*(i % W) +: 16] = vb[i];
    end
    vb[0] = va[0] ^ 16'h8000;   // exact cancellation
    u_mem.mem[VB][15:0] = vb[0];
    cv = 16'h4040;              // 3.0
    u_mem.imem[0]  = i_config(0, SCALE);
    u_mem.imem[1]  = i_config(4, cv);                   // RVC3
    u_mem.imem[2]  = i_load_m(0, KK, XA);
    u_mem.imem[3]  = i_load_m(2, KK, YA);
    u_mem.imem[4]  = i_matmul(0, 0, 0, KK);
    u_mem.imem[5]  = i_store_m(0, 0, 1, O1);
    u_mem.imem[6]  = i_store_m(1, 0, 2, O2);
    u_mem.imem[7]  = i_load_v(0, 20, VA);
    u_mem.imem[8]  = i_load_v(1, 21, VB);
    u_mem.imem[9]  = i_vec(5, 1, 0, 22, 0, 20, 1, 21);   // A22 = A20 + B21
    u_mem.imem[10] = i_vec(4, 0, 1, 0, 0, 22, 2, 3);     // buf = A22 * C3
    u_mem.imem[11] = i_vec(6, 0, 1, 0, 0, 20, 0, 0);     // buf = app(A20)
    u_mem.imem[12] = i_store_v(0, 2, O3);
    u_mem.imem[13] = i_halt();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    repeat (3) @(posedge clk);
    for (int r = 0; r < TR; r++) for (int c = 0; c < TC; c++) begin
      int s;
      s = 0;
      for (int i = 0; i < KK; i++) s += int'(x[r][i]) * int'(y[i][c]);
      check(u_mem.mem[O1 + r][8*c +: 8] == ref_q_i16_i8(16'(s), SCALE),
            $sformatf("int8 C[%0d][%0d] got %0d sum %0d", r, c, $signed(u_mem.mem[O1 + r][8*c +: 8]), s));
      check(u_mem.mem[O2 + 2 * r + c / W][16*(c % W) +: 16] == ref_q_i16_bf16(16'(s), SCALE),
            $sformatf("bf16 C[%0d][%0d]", r, c));
    end
    for (int i = 0; i < L; i++) begin
      logic [15:0] s, e1, e2;
      s  = ref_fadd(va[i], vb[i]);
      e1 = ref_fmul(s, cv);
      e2 = ref_fapp(va[i]);
      check(u_mem.mem[O3 + i / W][16*(i % W) +: 16] == e1, $sformatf("(a+b)*c lane %0d got %h exp %h", i, u_mem.mem[O3 + i / W][16*(i % W) +: 16], e1));
      check(u_mem.mem[O3 + N + i / W][16*(i % W) +: 16] == e2, $sformatf("app lane %0d", i));
    end
    check(n_lat == 3, "three vector results");
    check(stats.issued == 14 && stats.mm == 1 && stats.vec == 3, "instruction counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
