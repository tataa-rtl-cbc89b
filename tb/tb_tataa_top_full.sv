// tb_tataa_top_full: the accelerator at its full size, one complete operation.
//
// tataa_top with its default parameters: K = 8 cores, each with N = 8 DMPUs of W = 16
// columns (a 32 x 16 PE array, 32 x 32 int8 products, 128-lane bfloat16 vectors,
// 256-bit memory words). Every core, with its own behavioural memory and its own
// random data, runs: LOAD.M RMX0 and RMY0 (16 words each, on the two load ports),
// MATMUL, STORE.M as int8, LOAD.V of two 128-lane vectors, MUL.V into the buffers,
// STORE.V as bfloat16, HALT. All 32 x 32 quantized products and 128 vector lanes of
// every core are compared with references computed here. Watchdog included.
module tb_tataa_top_full;
  import tataa_pkg::*;
  import tataa_tb_pkg::*;

  localparam int K = 8, N = 8, W = 16, MW = 16 * W;
  localparam int TR = 4 * N, TC = 2 * W, L = N * W, KL = 16;
  localparam int XA = 'h100, YA = 'h140, VA = 'h200, VB = 'h210, O1 = 'h300, O2 = 'h340;
  localparam logic [15:0] SCALE = 16'h3c80;   // 1/64

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

  tataa_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic ready_to_check = 1'b0;
  int   verified = 0;

  for (genvar k = 0; k < K; k++) begin : g_core
    tb_tataa_mem #(.MEM_W(MW), .DEPTH(1024)) u_mem (
      .clk,
      .if_req_valid(if_req_valid[k]), .if_req_ready(if_req_ready[k]), .if_req_addr(if_req_addr[k]),
      .if_rsp_valid(if_rsp_valid[k]), .if_rsp_data(if_rsp_data[k]),
      .rd_req_valid(rd_req_valid[k]), .rd_req_ready(rd_req_ready[k]), .rd_req_addr(rd_req_addr[k]),
      .rd_rsp_valid(rd_rsp_valid[k]), .rd_rsp_data(rd_rsp_data[k]),
      .wr_valid(wr_valid[k]), .wr_ready(wr_ready[k]), .wr_addr(wr_addr[k]), .wr_data(wr_data[k])
    );

    logic signed [7:0] x [TR][KL];
    logic signed [7:0] y [KL][TC];
    logic [15:0]       va [L], vb [L];

    initial begin
      #1;
      for (int r = 0; r < TR; r++) for (int i = 0; i < KL; i++) begin
        x[r][i] = 8'($urandom);
        u_mem.mem[XA + i][8*r +: 8] = x[r][i];
      end
      for (int i = 0; i < KL; i++) for (int c = 0; c < TC; c++) begin
        y[i][c] = 8'(int'($urandom_range(60)) - 30);
        u_mem.mem[YA + i][8*c +: 8] = y[i][c];
      end
      for (int i = 0; i < L; i++) begin
        va[i] = rnd_bf(120, 134);
        vb[i] = rnd_bf(120, 134);
        u_mem.mem[VA + i / W][16*(i % W) +: 16] = va[i];
        u_mem.mem[VB + i / W][16*(i % W) +: 16] = vb[i];
      end
      u_mem.imem[0] = i_config(0, SCALE);
      u_mem.imem[1] = i_load_m(0, KL, XA);
      u_mem.imem[2] = i_load_m(2, KL, YA);
      u_mem.imem[3] = i_matmul(0, 0, 0, KL);
      u_mem.imem[4] = i_store_m(0, 0, 1, O1);
      u_mem.imem[5] = i_load_v(0, 20, VA);
      u_mem.imem[6] = i_load_v(1, 20, VB);
      u_mem.imem[7] = i_vec(4, 0, 1, 0, 0, 20, 1, 20);
      u_mem.imem[8] = i_store_v(0, 1, O2);
      u_mem.imem[9] = i_halt();
      wait (ready_to_check);
      for (int r = 0; r < TR; r++) for (int c = 0; c < TC; c++) begin
        int s;
        logic [7:0] g, e;
        s = 0;
        for (int i = 0; i < KL; i++) s += int'(x[r][i]) * int'(y[i][c]);
        e = ref_q_i16_i8(16'(s), SCALE);
        g = u_mem.mem[O1 + r][8*c +: 8];
        check(g == e, $sformatf("core%0d C[%0d][%0d] got %0d exp %0d", k, r, c, $signed(g), $signed(e)));
      end
      for (int i = 0; i < L; i++) begin
        logic [15:0] g, e;
        e = ref_fmul(va[i], vb[i]);
        g = u_mem.mem[O2 + i / W][16*(i % W) +: 16];
        check(g == e, $sformatf("core%0d lane %0d got %h exp %h", k, i, g, e));
      end
      check(stats[k].issued == 10 && stats[k].mm == 1 && stats[k].vec == 1, $sformatf("core%0d counts", k));
      verified++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int cyc;
  initial begin
    start    = '0;
    start_pc = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    start <= '1;
    @(posedge clk);
    start <= '0;
    cyc = 0;
    while (done != '1) begin @(posedge clk); cyc++; end
    repeat (5) @(posedge clk);
    $display("all %0d cores done after %0d cycles", K, cyc);
    ready_to_check = 1'b1;
    wait (verified == K);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
