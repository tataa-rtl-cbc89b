// tb_tataa_controller: tests fetch, decode and issue of the core controller.
//
// A random program of 300 instructions (loads into every buffer and bank, MATMUL,
// vector ops, stores, CONFIG) ending in HALT is served from a small instruction
// memory with random ready and a two-cycle latency. Stand-in units go busy for a random
// time after each issue; a vector op keeps the execution unit busy but ready for more
// vector ops, a MATMUL makes it not ready. A random hazard signal is raised on vector
// ops. Checks: instructions issue in program order, each to the right unit (loads to a
// free port), never while their unit is busy, never while a resource they need is held
// by another running unit, never during a hazard; CONFIG lands in the right register;
// done rises only after every unit is idle. Also counts that loads and MATMUL really
// overlapped (double buffering) and that a hazard stall happened.
module tb_tataa_controller;
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

  logic             start, done, if_req_valid, if_req_ready, if_rsp_valid;
  logic [31:0]      start_pc, if_req_addr;
  logic [63:0]      if_rsp_data, instr;
  logic [1:0]       ld_issue, ld_busy;
  logic             ex_issue, st_issue, ex_busy, ex_vec_ready, ex_hazard, st_busy;
  logic [15:0]      cfg_scale;
  logic [3:0][15:0] cfg_const;
  logic [31:0]      n_issued, n_stall, n_overlap, n_hazard;

  tataa_controller dut (.*);

  localparam int NP = 300;
  logic [63:0] prog [NP + 1];

  // instruction memory: in-order responses two cycles after acceptance
  logic [31:0] pend_a [$];
  int          pend_t [$];
  int          cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (if_rsp_valid) begin void'(pend_a.pop_front()); void'(pend_t.pop_front()); end
    if (if_req_valid && if_req_ready) begin pend_a.push_back(if_req_addr); pend_t.push_back(cyc + 2); end
    if (pend_a.size() > 0 && pend_t[0] <= cyc + 1) begin
      if_rsp_valid <= 1'b1;
      if_rsp_data  <= (pend_a[0] - 32'd100 <= NP) ? prog[pend_a[0] - 32'd100] : 64'd0;
    end else if_rsp_valid <= 1'b0;
    if_req_ready <= ($urandom_range(3) != 0);
  end

  // reference resource needs (bits: RMX0, RMX1, bank a, bank b, array, buffers)
  function automatic logic [5:0] need_of(input logic [63:0] i);
    logic [5:0] n;
    n = '0;
    unique case (i[63:60])
      4'd1: n[i[59:58]] = 1'b1;
      4'd2: n[i[59] ? 3 : 2] = 1'b1;
      4'd3: begin n[i[59] ? 1 : 0] = 1; n[i[58] ? 3 : 2] = 1; n[4] = 1; end
      4'd4, 4'd5, 4'd6: begin n[2] = 1; n[3] = 1; n[4] = 1; n[5] = i[57]; end
      4'd7: begin n[4] = 1; n[5] = 1; end
      4'd8: n[5] = 1;
      default: n = '0;
    endcase
    return n;
  endfunction

  // stand-in units
  int         t_ld [2], t_ex, t_st;
  logic [5:0] m_ld [2], m_ex, m_st;
  bit         ex_mm;
  assign ld_busy[0]   = t_ld[0] > 0;
  assign ld_busy[1]   = t_ld[1] > 0;
  assign ex_busy      = t_ex > 0;
  assign st_busy      = t_st > 0;
  assign ex_vec_ready = !(ex_busy && ex_mm);

  int nexp = 0, m_overlap_mm = 0, m_hazard = 0, m_two_ld = 0;
  logic [15:0] exp_scale = 16'h3f80;
  logic [15:0] exp_const [4] = '{default: 16'h0};

  always @(posedge clk) begin
    logic [5:0] held_all, held_nex, nd;
    logic [3:0] op;
    op = instr[63:60];
    nd = need_of(instr);
    held_all = (ld_busy[0] ? m_ld[0] : 0) | (ld_busy[1] ? m_ld[1] : 0) | (ex_busy ? m_ex : 0) | (st_busy ? m_st : 0);
    held_nex = (ld_busy[0] ? m_ld[0] : 0) | (ld_busy[1] ? m_ld[1] : 0) | (st_busy ? m_st : 0);
    for (int p = 0; p < 2; p++) if (t_ld[p] > 0) t_ld[p]--;
    if (t_ex > 0) t_ex--;
    if (t_st > 0) t_st--;
    if (|ld_issue || ex_issue || st_issue) begin
      check(instr == prog[nexp], $sformatf("issue order at instruction %0d", nexp));
      check($countones({ld_issue, ex_issue, st_issue}) == 1, "one unit per issue");
      nexp++;
    end
    for (int p = 0; p < 2; p++) if (ld_issue[p]) begin
      check(op == 4'd1 || op == 4'd2, "load goes to a load port");
      check(t_ld[p] == 0 || !ld_busy[p], "load port free");
      check((nd & held_all) == 0, "load waits for its resources");
      if (p == 1) check(ld_busy[0], "port 1 only when port 0 is busy");
      if (ex_busy && ex_mm) m_overlap_mm++;
      if (ld_busy[1 - p]) m_two_ld++;
      t_ld[p] = int'($urandom_range(12)) + 1;
      m_ld[p] = nd;
    end
    if (ex_issue) begin
      check(op >= 4'd3 && op <= 4'd6, "MATMUL / vector op goes to the execution unit");
      if (op != 4'd3) check(!ex_hazard, "no vector issue during a hazard");
      if (op == 4'd3) begin
        check(!ex_busy && (nd & held_all) == 0, "MATMUL waits for the unit and its resources");
        ex_mm = 1;
        t_ex  = int'($urandom_range(30)) + 5;
        m_ex  = nd;
      end else begin
        check(ex_vec_ready && (nd & held_nex) == 0, "vector op waits for its resources");
        if (!ex_busy) ex_mm = 0;
        m_ex = ex_busy ? (m_ex | nd) : nd;
        t_ex = (t_ex > 6) ? t_ex : 6;
      end
    end
    if (st_issue) begin
      check(op == 4'd7 || op == 4'd8, "store goes to the store unit");
      check(!st_busy && (nd & held_all) == 0, "store waits for its unit and resources");
      t_st = int'($urandom_range(20)) + 1;
      m_st = nd;
    end
    if (dut.hold && op == 4'd0 && dut.can_go) begin
      if (instr[59:56] == 0) exp_scale = instr[15:0];
      else exp_const[instr[57:56] - 2'd1] = instr[15:0];
      nexp++;
    end
    if (dut.hold && dut.can_go && op == 4'd15) begin
      check(!(|ld_busy) && !ex_busy && !st_busy, "HALT waits for all units");
      nexp++;
    end
    if (dut.hold && !dut.can_go && ex_hazard && op >= 4'd4 && op <= 4'd6) m_hazard++;
    ex_hazard <= ($urandom_range(4) == 0);
  end

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    start = 0; start_pc = 32'd100; if_req_ready = 0; if_rsp_valid = 0; if_rsp_data = '0;
    ex_hazard = 0; t_ld = '{0, 0}; t_ex = 0; t_st = 0; ex_mm = 0;
    m_ld = '{6'd0, 6'd0}; m_ex = 0; m_st = 0;
    for (int i = 0; i < NP; i++) begin
      int r;
      r = int'($urandom_range(9));
      unique case (r)
        0, 1, 2: prog[i] = i_load_m(int'($urandom_range(3)), 8, i);
        3:       prog[i] = i_load_v(int'($urandom_range(1)), 16, i);
        4:       prog[i] = i_matmul(int'($urandom_range(1)), int'($urandom_range(1)), int'($urandom_range(1)), 8);
        5, 6:    prog[i] = i_vec(4 + int'($urandom_range(2)), int'($urandom_range(2)), int'($urandom_range(1)), 16, 0, 16, 1, 17);
        7:       prog[i] = i_store_m(0, 0, 1, i);
        8:       prog[i] = i_store_v(0, 1, i);
        default: prog[i] = i_config(int'($urandom_range(4)), 16'($urandom));
      endcase
    end
    prog[NP] = i_halt();
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    repeat (2) @(posedge clk);
    check(nexp == NP + 1, $sformatf("all instructions issued (%0d)", nexp));
    check(cfg_scale == exp_scale, "scale register");
    for (int c = 0; c < 4; c++) check(cfg_const[c] == exp_const[c], $sformatf("constant %0d", c));
    check(n_issued == NP + 1, "issue counter");
    check(m_overlap_mm > 0, "a load overlapped a MATMUL");
    check(m_two_ld > 0, "both load ports busy together");
    check(m_hazard > 0, "a hazard stalled a vector op");
    $display("overlap with MATMUL %0d, two loads %0d, hazard stalls %0d", m_overlap_mm, m_two_ld, m_hazard);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
