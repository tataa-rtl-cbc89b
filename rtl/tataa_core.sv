// tataa_core: one TATAA core.
//
// Contents: the controller, two load units (the core's two memory read ports), the
// crossbar, the X register file RFX (RMX0/RMX1), the Y register files (DMRFY0 in front
// of DMPU 0, which also holds RMY0/RMY1 in bank a/b, and RFY1..RFY(N-1)), the input
// skews, one mode MUX and one DMPU per slice, one dual-mode buffer (DMB) per DMPU, the
// execution unit and the store unit with the quantization/layout unit (the core's
// memory write port).
//
// int8 MatMul mode: the N DMPUs are chained by the mode MUXes into one array of 4*N
// rows by W columns of PEs, each PE producing two outputs, so one MATMUL computes a
// (4N x K) * (K x 2W) product (32 x 32 at the defaults). RMX word k holds column k of
// X (byte r = row r), RMY word k holds row k of Y (16 bits = two int8 per PE column).
// X row r is delayed r cycles and Y column c 2c cycles before entering the array.
// STORE.M drains the int16 results through the last DMB.
// bfloat16 mode: each DMPU reads its own RFY (two operands per column), the mode MUX
// feeds its 4-stage columns, and results return to the RFYs and/or the DMBs; a 128-lane
// vector (N*W) is spread as W lanes per DMPU.
//
// Memory ports: simple valid/ready request channels with in-order responses in place
// of the AXI channels of the board. The instruction port reads 64-bit instructions.
// A memory word is 16*W bits; RFX words are 32*N bits, equal to a memory word when
// W = 2*N as in the paper (8 and 16).
//
// Follows the paper (Fig. 2(a), Sec. 4.1-4.6): the block set and how it is connected.
// Own choices: port protocol, word layouts, register-file depths, the single write port.
//
// The DMBs' full and count outputs are left unconnected on purpose (lint reports the
// empty pins): the store unit only needs to know that a word is present, and keeping
// at most DMB_DEPTH vector results between two STORE.V is the program's duty (the
// buffer's overflow assertion reports a violation in simulation).
module tataa_core
  import tataa_pkg::*;
#(
  parameter int N         = 8,
  parameter int W         = 16,
  parameter int D_MAT     = 512,
  parameter int D_FPV     = 32,
  parameter int DMB_DEPTH = 64,
  parameter int MEM_W     = 16 * W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [31:0]           start_pc,
  output logic                  done,
  // instruction port
  output logic                  if_req_valid,
  input  logic                  if_req_ready,
  output logic [31:0]           if_req_addr,
  input  logic                  if_rsp_valid,
  input  logic [63:0]           if_rsp_data,
  // two load ports
  output logic [1:0]            rd_req_valid,
  input  logic [1:0]            rd_req_ready,
  output logic [1:0][31:0]      rd_req_addr,
  input  logic [1:0]            rd_rsp_valid,
  input  logic [1:0][MEM_W-1:0] rd_rsp_data,
  // write port
  output logic                  wr_valid,
  input  logic                  wr_ready,
  output logic [31:0]           wr_addr,
  output logic [MEM_W-1:0]      wr_data,
  // observation
  output stats_t                stats
);

  localparam int AW  = $clog2(D_MAT);
  localparam int AWV = $clog2(D_FPV);

  // ---------------- controller ----------------
  logic [63:0]      instr;
  logic [1:0]       ld_issue, ld_busy;
  logic             ex_issue, st_issue, ex_busy, ex_vec_ready, ex_hazard, st_busy;
  logic [15:0]      cfg_scale;
  logic [3:0][15:0] cfg_const;

  tataa_controller u_ctrl (
    .clk, .rst_n, .start, .start_pc, .done,
    .if_req_valid, .if_req_ready, .if_req_addr, .if_rsp_valid, .if_rsp_data,
    .instr, .ld_issue, .ex_issue, .st_issue,
    .ld_busy, .ex_busy, .ex_vec_ready, .ex_hazard, .st_busy,
    .cfg_scale, .cfg_const,
    .n_issued (stats.issued),
    .n_stall  (stats.stall),
    .n_overlap(stats.overlap),
    .n_hazard (stats.hazard)
  );

  // ---------------- load units and crossbar ----------------
  logic [1:0]            wc_valid, wc_to_rfx, wc_sel;
  logic [1:0][7:0]       wc_dmpu;
  logic [1:0][15:0]      wc_addr;
  logic [1:0][MEM_W-1:0] wc_data;

  for (genvar p = 0; p < 2; p++) begin : g_ld
    tataa_load_unit #(.N(N), .MEM_W(MEM_W)) u_ld (
      .clk, .rst_n,
      .issue       (ld_issue[p]),
      .instr       (instr),
      .busy        (ld_busy[p]),
      .rd_req_valid(rd_req_valid[p]),
      .rd_req_ready(rd_req_ready[p]),
      .rd_req_addr (rd_req_addr[p]),
      .rd_rsp_valid(rd_rsp_valid[p]),
      .rd_rsp_data (rd_rsp_data[p]),
      .wc_valid    (wc_valid[p]),
      .wc_to_rfx   (wc_to_rfx[p]),
      .wc_sel      (wc_sel[p]),
      .wc_dmpu     (wc_dmpu[p]),
      .wc_addr     (wc_addr[p]),
      .wc_data     (wc_data[p])
    );
  end

  logic                   ex_wb_en, ex_wb_bank, ex_wb_dmb;
  logic [AW-1:0]          ex_wb_addr;
  logic [N-1:0][16*W-1:0] ex_wb_data;
  logic                   rfx_we, rfx_wsel;
  logic [15:0]            rfx_waddr;
  logic [32*N-1:0]        rfx_wdata;
  logic [N-1:0]           rfy_wa_en, rfy_wb_en;
  logic [N-1:0][15:0]     rfy_wa_addr, rfy_wb_addr;
  logic [N-1:0][16*W-1:0] rfy_wa_data, rfy_wb_data;

  tataa_crossbar #(.N(N), .W(W), .MEM_W(MEM_W)) u_xbar (
    .clk, .rst_n,
    .wc_valid, .wc_to_rfx, .wc_sel, .wc_dmpu, .wc_addr, .wc_data,
    .ex_wb_en, .ex_wb_bank,
    .ex_wb_addr(16'(ex_wb_addr)),
    .ex_wb_data,
    .rfx_we, .rfx_wsel, .rfx_waddr, .rfx_wdata,
    .rfy_wa_en, .rfy_wa_addr, .rfy_wa_data,
    .rfy_wb_en, .rfy_wb_addr, .rfy_wb_data
  );

  // ---------------- execution unit ----------------
  mode_e         mode;
  logic          mm_clr, mm_feed_vld, rfx_rsel;
  logic [AW-1:0] rfx_raddr, r0_addr, r1_addr;
  logic          r0_bank, r1_bank;
  logic          fp_vld, fp_c0, fp_c1;
  fop_e          fp_op;
  logic [1:0]    fp_c0_idx, fp_c1_idx;

  tataa_exec_unit #(.N(N), .W(W), .AW(AW)) u_exec (
    .clk, .rst_n,
    .issue    (ex_issue),
    .instr    (instr),
    .busy     (ex_busy),
    .vec_ready(ex_vec_ready),
    .hazard   (ex_hazard),
    .mode,
    .mm_clr, .mm_feed_vld, .rfx_rsel, .rfx_raddr,
    .r0_bank, .r0_addr, .r1_bank, .r1_addr,
    .fp_vld, .fp_op, .fp_c0, .fp_c0_idx, .fp_c1, .fp_c1_idx,
    .wb_en    (ex_wb_en),
    .wb_bank  (ex_wb_bank),
    .wb_addr  (ex_wb_addr),
    .wb_dmb   (ex_wb_dmb),
    .n_vec    (stats.vec),
    .n_mm     (stats.mm),
    .n_mode_sw(stats.mode_sw)
  );

  // ---------------- register files ----------------
  logic [32*N-1:0]        rfx_rdata;
  logic [N-1:0][16*W-1:0] r0_data, r1_data;

  tataa_rfx #(.N(N), .D_MAT(D_MAT)) u_rfx (
    .clk,
    .we   (rfx_we),
    .wsel (rfx_wsel),
    .waddr(AW'(rfx_waddr)),
    .wdata(rfx_wdata),
    .rsel (rfx_rsel),
    .raddr(rfx_raddr),
    .rdata(rfx_rdata)
  );

  tataa_rfy #(.W(W), .DEPTH(D_MAT)) u_dmrfy0 (
    .clk,
    .wa_en  (rfy_wa_en[0]),
    .wa_addr(AW'(rfy_wa_addr[0])),
    .wa_data(rfy_wa_data[0]),
    .wb_en  (rfy_wb_en[0]),
    .wb_addr(AW'(rfy_wb_addr[0])),
    .wb_data(rfy_wb_data[0]),
    .r0_bank, .r0_addr,
    .r0_data(r0_data[0]),
    .r1_bank, .r1_addr,
    .r1_data(r1_data[0])
  );

  for (genvar d = 1; d < N; d++) begin : g_rfy
    tataa_rfy #(.W(W), .DEPTH(D_FPV)) u_rfy (
      .clk,
      .wa_en  (rfy_wa_en[d]),
      .wa_addr(AWV'(rfy_wa_addr[d])),
      .wa_data(rfy_wa_data[d]),
      .wb_en  (rfy_wb_en[d]),
      .wb_addr(AWV'(rfy_wb_addr[d])),
      .wb_data(rfy_wb_data[d]),
      .r0_bank,
      .r0_addr(AWV'(r0_addr)),
      .r0_data(r0_data[d]),
      .r1_bank,
      .r1_addr(AWV'(r1_addr)),
      .r1_data(r1_data[d])
    );
  end

  // ---------------- input skews (int8 MatMul mode) ----------------
  logic [4*N-1:0][7:0]  x_sk;
  logic [W-1:0][15:0]   y_sk;

  tataa_skew #(.LANES(4*N), .WIDTH(8), .STEP(1)) u_xskew (
    .clk, .rst_n,
    .in_vld(mm_feed_vld),
    .din   (rfx_rdata),
    .dout  (x_sk)
  );

  tataa_skew #(.LANES(W), .WIDTH(16), .STEP(2)) u_yskew (
    .clk, .rst_n,
    .in_vld(mm_feed_vld),
    .din   (r0_data[0]),
    .dout  (y_sk)
  );

  // ---------------- mode MUXes, DMPUs, dual-mode buffers ----------------
  lane_t [N:0][W-1:0]     chain;    // chain[d] enters the mode MUX of DMPU d
  logic  [N-1:0]          dmb_push, dmb_pop, dmb_empty;
  logic  [N-1:0][32*W-1:0] dmb_wdata, dmb_rdata;
  logic                   mm_drain, drain_push;

  always_comb begin
    for (int c = 0; c < W; c++) begin
      chain[0][c]    = '0;
      chain[0][c].ma = 18'(y_sk[c]);
    end
  end

  for (genvar d = 0; d < N; d++) begin : g_slice
    lane_t [W-1:0]      top;
    logic [W-1:0][15:0] op0, op1;
    logic [3:0][7:0]    left;

    // operands: the RFY reads, or a CONFIG constant (RVC) for the whole vector
    always_comb begin
      for (int c = 0; c < W; c++) begin
        op0[c] = fp_c0 ? cfg_const[fp_c0_idx] : r0_data[d][16*c +: 16];
        op1[c] = fp_c1 ? cfg_const[fp_c1_idx] : r1_data[d][16*c +: 16];
      end
    end
    assign left = x_sk[4*d +: 4];

    tataa_mode_mux #(.W(W)) u_mux (
      .mode,
      .chain_in(chain[d]),
      .fp_vld, .fp_op,
      .fp_op0  (op0),
      .fp_op1  (op1),
      .dmpu_top(top)
    );

    tataa_dmpu #(.W(W)) u_dmpu (
      .clk, .rst_n, .mode, .mm_clr, .mm_drain,
      .left_in(left),
      .top_in (top),
      .bot_out(chain[d+1])
    );

    // buffer input: int16 MatMul rows (last DMPU, during a drain) or bfloat16 results
    always_comb begin
      dmb_wdata[d] = '0;
      for (int c = 0; c < W; c++) begin
        if (d == N - 1 && drain_push) begin
          dmb_wdata[d][32*c +: 16]      = chain[d+1][c].ma[15:0];
          dmb_wdata[d][32*c + 16 +: 16] = chain[d+1][c].mb[15:0];
        end else begin
          dmb_wdata[d][16*c +: 16] = chain[d+1][c].ma[15:0];
        end
      end
    end
    assign dmb_push[d]   = ex_wb_dmb || (d == N - 1 && drain_push);
    assign ex_wb_data[d] = dmb_wdata[d][16*W-1:0];

    tataa_dmb #(.W(W), .DEPTH(DMB_DEPTH)) u_dmb (
      .clk, .rst_n,
      .push (dmb_push[d]),
      .wdata(dmb_wdata[d]),
      .pop  (dmb_pop[d]),
      .rdata(dmb_rdata[d]),
      .empty(dmb_empty[d]),
      .full (),
      .count()
    );
  end

  // ---------------- store unit ----------------
  tataa_store_unit #(.N(N), .W(W)) u_store (
    .clk, .rst_n,
    .issue     (st_issue),
    .instr     (instr),
    .cfg_scale (cfg_scale),
    .busy      (st_busy),
    .mm_drain,
    .drain_push,
    .dmb_rdata,
    .dmb_empty,
    .dmb_pop,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .n_store_m (stats.store_m),
    .n_store_v (stats.store_v)
  );

endmodule
