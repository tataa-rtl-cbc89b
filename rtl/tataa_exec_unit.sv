// tataa_exec_unit: sequencer of the PE array for MATMUL and the vector instructions.
//
// MATMUL (int8 MatMul mode): unless the accumulate bit is set, one cycle clears the
// accumulators; then for len cycles it reads word k of the selected RMX buffer and of
// the selected DMRFY0 bank (RMY0 = bank a, RMY1 = bank b); mm_feed_vld marks the read
// data one cycle later, which the core skews into the array. It then waits FLUSH
// cycles until the last operands have passed the far corner of the array. Results stay
// in the accumulators until STORE.M drains them.
//
// MUL.V / ADD.V / APP.V (bfloat16 mode): in the issue cycle the two source registers
// are addressed on the RFY read ports of all DMPUs. One cycle later the operands and
// the operation enter stage S0 of every column (fp_vld/fp_op, with a CONFIG constant
// substituted for an RVC source); four cycles after that the result leaves stage S3
// and, per the instruction, is written to a register (wb_bank/wb_addr) and/or pushed
// into the dual-mode buffers (wb_dmb). A new vector instruction can be issued every
// cycle; hazard tells the controller that the instruction it holds reads a register
// still being computed. The array is in bfloat16 mode only while vector operations
// are in the columns, and in MatMul mode otherwise.
//
// Follows the paper (Sec. 4.4, Fig. 5): four pipeline stages, one operation per column
// per cycle, results to RFY or the buffers. Own choices: the read/write timing, the
// hazard check by comparing with the five in-flight destinations, FLUSH = 4N+2W+4.
module tataa_exec_unit
  import tataa_pkg::*;
#(
  parameter int N  = 8,
  parameter int W  = 16,
  parameter int AW = 9
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           issue,
  input  logic [63:0]    instr,
  output logic           busy,
  output logic           vec_ready,
  output logic           hazard,
  output mode_e          mode,
  // MatMul control
  output logic           mm_clr,
  output logic           mm_feed_vld,
  output logic           rfx_rsel,
  output logic [AW-1:0]  rfx_raddr,
  // RFY read ports (all DMPUs)
  output logic           r0_bank,
  output logic [AW-1:0]  r0_addr,
  output logic           r1_bank,
  output logic [AW-1:0]  r1_addr,
  // operands entering stage S0
  output logic           fp_vld,
  output fop_e           fp_op,
  output logic           fp_c0,       // source 0 is a constant
  output logic [1:0]     fp_c0_idx,
  output logic           fp_c1,
  output logic [1:0]     fp_c1_idx,
  // write-back of stage S3 results
  output logic           wb_en,
  output logic           wb_bank,
  output logic [AW-1:0]  wb_addr,
  output logic           wb_dmb,
  // event counters
  output logic [31:0]    n_vec,
  output logic [31:0]    n_mm,
  output logic [31:0]    n_mode_sw
);

  localparam int FLUSH = 4 * N + 2 * W + 4;

  typedef struct packed {
    logic       vld;
    logic [1:0] dst;     // 0 none, 1 bank a, 2 bank b
    logic [7:0] didx;
    logic       wb;
  } inflight_t;

  typedef enum logic [1:0] {M_IDLE, M_CLR, M_FEED, M_FLUSH} mstate_e;
  mstate_e     mst;
  logic [15:0] mlen, mk;
  logic        msel_x, msel_y;
  inflight_t [5:1] pipe;
  mode_e       mode_q;

  // decode of the held instruction
  opcode_e    opc;
  logic       is_vec;
  logic [1:0] s0_sel, s1_sel;
  logic [7:0] s0_idx, s1_idx;
  assign opc    = opcode_e'(instr[63:60]);
  assign is_vec = (opc == OP_MUL_V) || (opc == OP_ADD_V) || (opc == OP_APP_V);
  assign s0_sel = instr[47:46];
  assign s0_idx = instr[45:38];
  assign s1_sel = instr[37:36];
  assign s1_idx = instr[35:28];

  function automatic logic reads(input inflight_t e, input logic [1:0] sel, input logic [7:0] idx);
    return e.vld && e.dst != 2'd0 && sel != 2'd2 && e.didx == idx && (e.dst == 2'd2) == (sel == 2'd1);
  endfunction

  always_comb begin
    hazard = 1'b0;
    if (is_vec)
      for (int i = 1; i <= 5; i++)
        if (reads(pipe[i], s0_sel, s0_idx) || (opc != OP_APP_V && reads(pipe[i], s1_sel, s1_idx)))
          hazard = 1'b1;
  end

  logic any_fp;
  assign any_fp    = pipe[1].vld || pipe[2].vld || pipe[3].vld || pipe[4].vld || pipe[5].vld;
  assign busy      = (mst != M_IDLE) || any_fp;
  assign vec_ready = (mst == M_IDLE);
  assign mode      = (pipe[1].vld || pipe[2].vld || pipe[3].vld || pipe[4].vld) ? MODE_FP : MODE_MM;

  // read addressing
  logic vec_issue;
  assign vec_issue = issue && is_vec;
  always_comb begin
    rfx_rsel  = msel_x;
    rfx_raddr = AW'(mk);
    r0_bank   = msel_y;
    r0_addr   = AW'(mk);
    r1_bank   = 1'b0;
    r1_addr   = '0;
    if (vec_issue) begin
      r0_bank = (s0_sel == 2'd1);
      r0_addr = AW'(s0_idx);
      r1_bank = (s1_sel == 2'd1);
      r1_addr = AW'(s1_idx);
    end
  end

  assign wb_en   = pipe[5].vld && pipe[5].dst != 2'd0;
  assign wb_bank = (pipe[5].dst == 2'd2);
  assign wb_addr = AW'(pipe[5].didx);
  assign wb_dmb  = pipe[5].vld && pipe[5].wb;
  assign mm_clr  = (mst == M_CLR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mst         <= M_IDLE;
      mlen        <= '0;
      mk          <= '0;
      msel_x      <= 1'b0;
      msel_y      <= 1'b0;
      pipe        <= '0;
      mm_feed_vld <= 1'b0;
      fp_vld      <= 1'b0;
      fp_op       <= FOP_NONE;
      fp_c0       <= 1'b0;
      fp_c1       <= 1'b0;
      fp_c0_idx   <= '0;
      fp_c1_idx   <= '0;
      n_vec       <= '0;
      n_mm        <= '0;
      n_mode_sw   <= '0;
      mode_q      <= MODE_MM;
    end else begin
      mode_q <= mode;
      if (mode_q != mode) n_mode_sw <= n_mode_sw + 1;
      // vector pipeline bookkeeping
      pipe[5:2] <= pipe[4:1];
      pipe[1]   <= '0;
      fp_vld    <= 1'b0;
      fp_op     <= FOP_NONE;
      if (vec_issue) begin
        pipe[1].vld  <= 1'b1;
        pipe[1].dst  <= instr[59:58];
        pipe[1].didx <= instr[55:48];
        pipe[1].wb   <= instr[57];
        fp_vld       <= 1'b1;
        fp_op        <= (opc == OP_MUL_V) ? FOP_MUL : (opc == OP_ADD_V) ? FOP_ADD : FOP_APP;
        fp_c0        <= (s0_sel == 2'd2);
        fp_c0_idx    <= s0_idx[1:0];
        fp_c1        <= (s1_sel == 2'd2);
        fp_c1_idx    <= s1_idx[1:0];
        n_vec        <= n_vec + 1;
      end
      // MatMul sequencing
      mm_feed_vld <= (mst == M_FEED);
      unique case (mst)
        M_IDLE: if (issue && opc == OP_MATMUL) begin
          msel_x <= instr[59];
          msel_y <= instr[58];
          mlen   <= instr[47:32];
          mk     <= '0;
          n_mm   <= n_mm + 1;
          mst    <= instr[57] ? M_FEED : M_CLR;
        end
        M_CLR: mst <= M_FEED;
        M_FEED: begin
          if (mk + 1'b1 >= mlen) begin
            mk  <= '0;
            mst <= M_FLUSH;
          end else mk <= mk + 1'b1;
        end
        default: begin
          if (mk == 16'(FLUSH)) begin
            mk  <= '0;
            mst <= M_IDLE;
          end else mk <= mk + 1'b1;
        end
      endcase
    end
  end

endmodule
