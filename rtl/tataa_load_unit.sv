// tataa_load_unit: one of the two memory load ports of a TATAA core.
//
// Executes LOAD.M and LOAD.V. It sends one read request per word (address, address+1,
// ...) as fast as the port accepts them, with any number outstanding, and turns each
// response, which arrives in request order, into a register-file write command for
// the crossbar:
//   LOAD.M RMX0/RMX1: word j -> RFX buffer, address j   (len words)
//   LOAD.M RMY0/RMY1: word j -> DMRFY0 bank a/b, address j
//   LOAD.V RVXi/RVYi: word j -> RFY of DMPU j, bank a/b, address i (N words, one
//                     W-lane slice of the 128-lane vector per DMPU)
// busy is high from issue until the last response has been written.
//
// Follows the paper (Sec. 4.2, 5.2.2): two load ports per core, routed to the register
// files by a crossbar, outstanding transactions to hide memory latency. Own choices:
// the simple request/response port in place of AXI, one word per request.
module tataa_load_unit
  import tataa_pkg::*;
#(
  parameter int N     = 8,
  parameter int MEM_W = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             issue,
  input  logic [63:0]      instr,
  output logic             busy,
  // memory read port
  output logic             rd_req_valid,
  input  logic             rd_req_ready,
  output logic [31:0]      rd_req_addr,
  input  logic             rd_rsp_valid,
  input  logic [MEM_W-1:0] rd_rsp_data,
  // write command to the crossbar
  output logic             wc_valid,
  output logic             wc_to_rfx,   // 1: RFX, 0: an RFY bank
  output logic             wc_sel,      // RMX buffer or RFY bank
  output logic [7:0]       wc_dmpu,
  output logic [15:0]      wc_addr,
  output logic [MEM_W-1:0] wc_data
);

  logic        is_v, to_rfx, sel;
  logic [7:0]  vreg;
  logic [31:0] base;
  logic [15:0] len, nreq, nrsp;

  assign rd_req_valid = busy && (nreq != len);
  assign rd_req_addr  = base + 32'(nreq);

  assign wc_valid  = busy && rd_rsp_valid;
  assign wc_to_rfx = to_rfx;
  assign wc_sel    = sel;
  assign wc_dmpu   = is_v ? nrsp[7:0] : 8'd0;
  assign wc_addr   = is_v ? 16'(vreg) : nrsp;
  assign wc_data   = rd_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      is_v   <= 1'b0;
      to_rfx <= 1'b0;
      sel    <= 1'b0;
      vreg   <= '0;
      base   <= '0;
      len    <= '0;
      nreq   <= '0;
      nrsp   <= '0;
    end else if (issue) begin
      busy <= 1'b1;
      is_v <= (instr[63:60] == OP_LOAD_V);
      base <= instr[31:0];
      nreq <= '0;
      nrsp <= '0;
      if (instr[63:60] == OP_LOAD_V) begin
        to_rfx <= 1'b0;
        sel    <= instr[59];
        vreg   <= instr[55:48];
        len    <= 16'(N);
      end else begin
        to_rfx <= !instr[59];
        sel    <= instr[58];
        len    <= instr[47:32];
      end
    end else if (busy) begin
      if (rd_req_valid && rd_req_ready) nreq <= nreq + 1'b1;
      if (rd_rsp_valid) begin
        nrsp <= nrsp + 1'b1;
        if (nrsp + 1'b1 == len) busy <= 1'b0;
      end
    end
  end

  a_no_stray_rsp: assert property (@(posedge clk) (rst_n && rd_rsp_valid) |-> busy);

endmodule
