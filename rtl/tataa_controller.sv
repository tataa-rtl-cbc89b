// tataa_controller: instruction fetch, decode and in-order issue for one TATAA core.
//
// The core runs a program stored in external memory. The controller fetches 64-bit
// instructions ahead into a 4-entry queue (up to four requests in flight on the
// instruction port), decodes the instruction at the head of the queue and issues it to
// the unit that executes it: LOAD.M / LOAD.V to whichever of the two load ports is
// free, MATMUL / MUL.V / ADD.V / APP.V to the execution unit, STORE.M / STORE.V to the
// store unit. CONFIG writes the quantization scale or one of four bfloat16 constants
// (RVC0..RVC3) here; HALT waits for all units to finish and raises done.
//
// Instructions issue in order but execute in parallel (instruction-level parallelism):
// an instruction waits only while its unit is busy or while one of the resources it
// touches is held by a running instruction. Resources are RMX0, RMX1, RFY bank a
// (RVX, RMY0), RFY bank b (RVY, RMY1), the PE array and the dual-mode buffers; the
// mask of each running unit is kept from its issue until the unit reports idle. So
// LOAD.M into RMX1/RMY1 overlaps a MATMUL on RMX0/RMY0 (double buffering), and two
// LOAD.V into different banks use the two ports at once. Vector instructions stream
// into the pipelined PE columns back to back; the execution unit reports a
// read-after-write hazard on a vector register still in flight and the controller
// stalls the instruction until it clears.
//
// Instruction format (own encoding; the paper lists only the instruction types):
//   [63:60] opcode (tataa_pkg::opcode_e)
//   CONFIG  [59:56] target (0 scale, 1..4 RVC0..RVC3), [15:0] bfloat16 value
//   LOAD.M  [59:58] buffer (0 RMX0, 1 RMX1, 2 RMY0, 3 RMY1), [47:32] words, [31:0] address
//   LOAD.V  [59] bank (0 RVX, 1 RVY), [55:48] register, [31:0] address (N words)
//   MATMUL  [59] RMX select, [58] RMY select, [57] accumulate (keep P), [47:32] length
//   MUL.V/ADD.V/APP.V  [59:58] destination bank (0 none, 1 RVX, 2 RVY), [57] write to
//           buffers, [55:48] destination register, [47:46]/[45:38] source 0 select/index,
//           [37:36]/[35:28] source 1 select/index (select: 0 RVX, 1 RVY, 2 RVC)
//   STORE.M [59] format (0 int8, 1 bfloat16), [58] transpose, [47:32] stride, [31:0] address
//   STORE.V [59] format (0 bfloat16, 1 int8), [47:32] vectors, [31:0] address
//   HALT
//
// Follows the paper (Table 4, Sec. 5.1, Fig. 9, Fig. 10): the nine instruction types,
// fetching instructions from external memory without a host, dependency detection and
// parallel LOAD.M/MATMUL. Own choices: the encoding, HALT, the prefetch queue, the
// resource-mask scoreboard. A start is taken only when no fetch is in flight.
module tataa_controller
  import tataa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] start_pc,
  output logic        done,
  // instruction port
  output logic        if_req_valid,
  input  logic        if_req_ready,
  output logic [31:0] if_req_addr,
  input  logic        if_rsp_valid,
  input  logic [63:0] if_rsp_data,
  // issue
  output logic [63:0] instr,
  output logic [1:0]  ld_issue,
  output logic        ex_issue,
  output logic        st_issue,
  input  logic [1:0]  ld_busy,
  input  logic        ex_busy,
  input  logic        ex_vec_ready,   // execution unit can take another vector op now
  input  logic        ex_hazard,      // RAW hazard of instr on an in-flight vector result
  input  logic        st_busy,
  // configuration registers
  output logic [15:0]       cfg_scale,
  output logic [3:0][15:0]  cfg_const,
  // event counters for observation
  output logic [31:0] n_issued,
  output logic [31:0] n_stall,
  output logic [31:0] n_overlap,
  output logic [31:0] n_hazard
);

  localparam int R_RMX0 = 0, R_RMX1 = 1, R_BA = 2, R_BB = 3, R_ARR = 4, R_DMB = 5;

  localparam int QD = 4;   // instruction prefetch queue depth

  typedef enum logic [1:0] {C_IDLE, C_RUN, C_HALT} cstate_e;
  cstate_e     state;
  logic [31:0] fpc;                      // next address to fetch
  logic [2:0]  qcnt, outst;              // queued instructions, fetches in flight
  logic [1:0]  qrd, qwr;
  logic [63:0] iq [QD];
  logic        hold;                     // an instruction is at the head of the queue
  opcode_e     opc;
  logic [5:0]  need;
  logic [5:0]  mask_ld0, mask_ld1, mask_ex, mask_st, held;

  assign hold  = (state == C_RUN) && (qcnt != 0);
  assign instr = iq[qrd];
  assign opc = opcode_e'(instr[63:60]);

  always_comb begin
    need = '0;
    unique case (opc)
      OP_LOAD_M: need[3'(instr[59:58])] = 1'b1;   // RMX0, RMX1, bank a, bank b
      OP_LOAD_V: need[instr[59] ? R_BB : R_BA] = 1'b1;
      OP_MATMUL: begin
        need[instr[59] ? R_RMX1 : R_RMX0] = 1'b1;
        need[instr[58] ? R_BB : R_BA]     = 1'b1;
        need[R_ARR]                       = 1'b1;
      end
      OP_MUL_V, OP_ADD_V, OP_APP_V: begin
        need[R_BA]  = 1'b1;
        need[R_BB]  = 1'b1;
        need[R_ARR] = 1'b1;
        need[R_DMB] = instr[57];
      end
      OP_STORE_M: begin
        need[R_ARR] = 1'b1;
        need[R_DMB] = 1'b1;
      end
      OP_STORE_V: need[R_DMB] = 1'b1;
      default: need = '0;
    endcase
  end

  assign held = (ld_busy[0] ? mask_ld0 : '0) | (ld_busy[1] ? mask_ld1 : '0)
              | (ex_busy ? mask_ex : '0) | (st_busy ? mask_st : '0);

  logic all_idle, can_go;
  logic [5:0] held_other_ex;
  assign all_idle      = !(|ld_busy) && !ex_busy && !st_busy;
  assign held_other_ex = (ld_busy[0] ? mask_ld0 : '0) | (ld_busy[1] ? mask_ld1 : '0)
                       | (st_busy ? mask_st : '0);

  always_comb begin
    can_go   = 1'b0;
    ld_issue = '0;
    ex_issue = 1'b0;
    st_issue = 1'b0;
    if (hold) begin
      unique case (opc)
        OP_CONFIG: can_go = !ex_busy && !st_busy;
        OP_LOAD_M, OP_LOAD_V: begin
          if ((need & held) == '0) begin
            if (!ld_busy[0])      begin can_go = 1'b1; ld_issue[0] = 1'b1; end
            else if (!ld_busy[1]) begin can_go = 1'b1; ld_issue[1] = 1'b1; end
          end
        end
        OP_MATMUL: begin
          can_go   = !ex_busy && ((need & held) == '0);
          ex_issue = can_go;
        end
        OP_MUL_V, OP_ADD_V, OP_APP_V: begin
          can_go   = (need & held_other_ex) == '0 && !ex_hazard &&
                     (!ex_busy || ex_vec_ready);
          ex_issue = can_go;
        end
        OP_STORE_M, OP_STORE_V: begin
          can_go   = !st_busy && ((need & held) == '0);
          st_issue = can_go;
        end
        OP_HALT: can_go = all_idle;
        default: can_go = 1'b1;   // unknown opcodes are skipped
      endcase
    end
  end

  // fetch ahead while the queue (counting fetches in flight) has room
  assign if_req_valid = (state == C_RUN) && (3'(qcnt + outst) < 3'(QD));
  assign if_req_addr  = fpc;
  logic fire, push, pop;
  assign fire = if_req_valid && if_req_ready;
  assign push = if_rsp_valid && (state == C_RUN);
  assign pop  = hold && can_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      fpc       <= '0;
      qcnt      <= '0;
      outst     <= '0;
      qrd       <= '0;
      qwr       <= '0;
      iq        <= '{default: '0};
      done      <= 1'b0;
      mask_ld0  <= '0;
      mask_ld1  <= '0;
      mask_ex   <= '0;
      mask_st   <= '0;
      cfg_scale <= 16'h3f80;   // 1.0
      cfg_const <= '0;
      n_issued  <= '0;
      n_stall   <= '0;
      n_overlap <= '0;
      n_hazard  <= '0;
    end else begin
      // fetches in flight; responses after HALT are dropped
      outst <= outst + 3'(fire) - 3'(if_rsp_valid);
      if (push) begin
        iq[qwr] <= if_rsp_data;
        qwr     <= qwr + 1'b1;
      end
      qcnt <= qcnt + 3'(push) - 3'(pop);
      if (fire) fpc <= fpc + 1;
      if (pop) qrd <= qrd + 1'b1;

      if (hold) begin
        if (can_go) begin
          n_issued <= n_issued + 1;
          if (!all_idle && opc != OP_HALT && opc != OP_CONFIG) n_overlap <= n_overlap + 1;
          if (ld_issue[0]) mask_ld0 <= need;
          if (ld_issue[1]) mask_ld1 <= need;
          if (ex_issue)    mask_ex  <= ex_busy ? (mask_ex | need) : need;
          if (st_issue)    mask_st  <= need;
          if (opc == OP_CONFIG) begin
            if (instr[59:56] == 4'd0) cfg_scale <= instr[15:0];
            else if (instr[59:56] <= 4'd4) cfg_const[2'(instr[59:56] - 4'd1)] <= instr[15:0];
          end
          if (opc == OP_HALT) begin
            state <= C_HALT;
            done  <= 1'b1;
            qcnt  <= '0;
            qrd   <= '0;
            qwr   <= '0;
          end
        end else begin
          n_stall <= n_stall + 1;
          if (ex_hazard && (opc == OP_MUL_V || opc == OP_ADD_V || opc == OP_APP_V))
            n_hazard <= n_hazard + 1;
        end
      end

      // (re)start once no fetch is left in flight
      if (state != C_RUN && start && outst == 0) begin
        fpc   <= start_pc;
        done  <= 1'b0;
        state <= C_RUN;
        qcnt  <= '0;
        qrd   <= '0;
        qwr   <= '0;
      end
    end
  end

endmodule
