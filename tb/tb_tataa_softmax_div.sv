// tb_tataa_softmax_div: the division step of SoftMax run as a program on one core
// (N = 2, W = 4: 8-lane vectors), the way the non-linear functions of the evaluated
// models are built from the three bfloat16 operations.
//
// Given the exponentials e (in RVX20) and their row sum s (in RVY21), the program forms
// p = e / s without a divider:
//   r0 = fpapp(s)                 seed of 1/s ((0x5f37 - s/2)^2 on the integer view)
//   r1 = r0 * (2 - s * r0)        one Newton step (MUL.V, MUL.V by constant -1, ADD.V
//                                 with constant 2, MUL.V), intermediates kept in the
//                                 register files, never in memory
//   p  = e * r1                   to the buffers, stored as bfloat16 and, with the
//                                 quantization scale 127, as int8 for the next MatMul
// Back-to-back dependent vector instructions exercise the hazard stall. Every result is
// compared bit-exactly with the reference arithmetic chained in the same order, and the
// bfloat16 probabilities are also checked against e/s computed in real arithmetic
// (relative error below 4 %). The program is run three times with new data, restarting
// the core each time.
module tb_tataa_softmax_div;
  import tataa_pkg::*;
  import tataa_tb_pkg::*;

  localparam int N = 2, W = 4, MW = 16 * W, L = N * W, ROUNDS = 3;
  localparam int VA = 'h200, VB = 'h210, O1 = 'h300, O2 = 'h310;
  localparam logic [15:0] SCALE = 16'h42fe;   // 127.0
  localparam logic [15:0] MINUS1 = 16'hbf80, TWO = 16'h4000;

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

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic [15:0] e [L], s [L];

  initial begin
    start = 0; start_pc = 0;
    #1;
    u_mem.imem[0]  = i_config(0, SCALE);
    u_mem.imem[1]  = i_config(1, MINUS1);                 // RVC0
    u_mem.imem[2]  = i_config(2, TWO);                    // RVC1
    u_mem.imem[3]  = i_load_v(0, 20, VA);                 // A20 = e
    u_mem.imem[4]  = i_load_v(1, 21, VB);                 // B21 = s
    u_mem.imem[5]  = i_vec(6, 2, 0, 22, 1, 21, 1, 21);    // B22 = app(s)       = r0
    u_mem.imem[6]  = i_vec(4, 1, 0, 23, 1, 21, 1, 22);    // A23 = s * r0
    u_mem.imem[7]  = i_vec(4, 1, 0, 24, 0, 23, 2, 0);     // A24 = -A23
    u_mem.imem[8]  = i_vec(5, 2, 0, 25, 0, 24, 2, 1);     // B25 = A24 + 2
    u_mem.imem[9]  = i_vec(4, 1, 0, 26, 1, 22, 1, 25);    // A26 = r0 * B25     = r1
    u_mem.imem[10] = i_vec(4, 0, 1, 0, 0, 20, 0, 26);     // buf = e * r1       = p
    u_mem.imem[11] = i_vec(4, 0, 1, 0, 0, 20, 0, 26);     // buf = p again
    u_mem.imem[12] = i_store_v(0, 1, O1);                 // p as bfloat16
    u_mem.imem[13] = i_store_v(1, 1, O2);                 // p * 127 as int8
    u_mem.imem[14] = i_halt();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int round = 0; round < ROUNDS; round++) begin
      #1;
      for (int i = 0; i < L; i++) begin
        e[i] = rnd_bf(119, 127) & 16'h7fff;   // exponentials in [2^-8, 2)
        s[i] = rnd_bf(127, 131) & 16'h7fff;   // row sums in [1, 32)
        u_mem.mem[VA + i / W][16*(i % W) +: 16] = e[i];
        u_mem.mem[VB + i / W][16*(i % W) +: 16] = s[i];
      end
      start = 1'b1;
      @(posedge clk);
      #1 start = 1'b0;
      @(posedge clk);
      while (!done) @(posedge clk);
      repeat (3) @(posedge clk);
      for (int i = 0; i < L; i++) begin
        logic [15:0] r0, a, b, c, r1, p, got;
        logic [7:0]  q;
        real         pr;
        r0 = ref_fapp(s[i]);
        a  = ref_fmul(s[i], r0);
        b  = ref_fmul(a, MINUS1);
        c  = ref_fadd(b, TWO);
        r1 = ref_fmul(r0, c);
        p  = ref_fmul(e[i], r1);
        got = u_mem.mem[O1 + i / W][16*(i % W) +: 16];
        q   = u_mem.mem[O2][8*i +: 8];
        pr  = bf2r(e[i]) / bf2r(s[i]);
        check(got == p, $sformatf("round %0d lane %0d p got %h exp %h", round, i, got, p));
        check(q == ref_q_bf16_i8(p, SCALE), $sformatf("round %0d lane %0d int8 p", round, i));
        check(bf2r(got) > 0.96 * pr && bf2r(got) < 1.04 * pr,
              $sformatf("round %0d lane %0d p %f vs e/s %f", round, i, bf2r(got), pr));
        check(bf2r(r0) > 0.85 / bf2r(s[i]) && bf2r(r0) < 1.15 / bf2r(s[i]),
              $sformatf("round %0d lane %0d seed %f vs 1/s %f", round, i, bf2r(r0), 1.0 / bf2r(s[i])));
      end
    end
    check(stats.vec == 7 * ROUNDS, "vector instruction count");
    check(stats.hazard > 0, "dependent vector instructions stalled on the hazard");
    $display("softmax division: %0d instructions, %0d hazard stalls", stats.issued, stats.hazard);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
