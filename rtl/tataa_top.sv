// tataa_top: the TATAA accelerator, K independent cores.
//
// Each core runs its own instruction stream from external memory (start/start_pc,
// done) and has its own memory ports: an instruction read port, two load ports and a
// write port. The external high-bandwidth memory and its interconnect are outside this
// module; their channels appear here as arrays indexed by core. The cores share only
// the clock and reset. Every core reports its event counters on stats[k].
//
// Follows the paper (Sec. 4.1, 6.1): K = 8 cores, each with two 256-bit memory
// channels for loads (16 channels in all), cores working independently (the workload is
// split over the cores by the compiler). Own choices: the simple request/response port
// protocol, a separate write port and instruction port per core.
module tataa_top
  import tataa_pkg::*;
#(
  parameter int K         = 8,
  parameter int N         = 8,
  parameter int W         = 16,
  parameter int D_MAT     = 512,
  parameter int D_FPV     = 32,
  parameter int DMB_DEPTH = 64,
  parameter int MEM_W     = 16 * W
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [K-1:0]                   start,
  input  logic [K-1:0][31:0]             start_pc,
  output logic [K-1:0]                   done,
  output logic [K-1:0]                   if_req_valid,
  input  logic [K-1:0]                   if_req_ready,
  output logic [K-1:0][31:0]             if_req_addr,
  input  logic [K-1:0]                   if_rsp_valid,
  input  logic [K-1:0][63:0]             if_rsp_data,
  output logic [K-1:0][1:0]              rd_req_valid,
  input  logic [K-1:0][1:0]              rd_req_ready,
  output logic [K-1:0][1:0][31:0]        rd_req_addr,
  input  logic [K-1:0][1:0]              rd_rsp_valid,
  input  logic [K-1:0][1:0][MEM_W-1:0]   rd_rsp_data,
  output logic [K-1:0]                   wr_valid,
  input  logic [K-1:0]                   wr_ready,
  output logic [K-1:0][31:0]             wr_addr,
  output logic [K-1:0][MEM_W-1:0]        wr_data,
  output stats_t [K-1:0]                 stats
);

  for (genvar k = 0; k < K; k++) begin : g_core
    tataa_core #(
      .N(N), .W(W), .D_MAT(D_MAT), .D_FPV(D_FPV), .DMB_DEPTH(DMB_DEPTH), .MEM_W(MEM_W)
    ) u_core (
      .clk, .rst_n,
      .start       (start[k]),
      .start_pc    (start_pc[k]),
      .done        (done[k]),
      .if_req_valid(if_req_valid[k]),
      .if_req_ready(if_req_ready[k]),
      .if_req_addr (if_req_addr[k]),
      .if_rsp_valid(if_rsp_valid[k]),
      .if_rsp_data (if_rsp_data[k]),
      .rd_req_valid(rd_req_valid[k]),
      .rd_req_ready(rd_req_ready[k]),
      .rd_req_addr (rd_req_addr[k]),
      .rd_rsp_valid(rd_rsp_valid[k]),
      .rd_rsp_data (rd_rsp_data[k]),
      .wr_valid    (wr_valid[k]),
      .wr_ready    (wr_ready[k]),
      .wr_addr     (wr_addr[k]),
      .wr_data     (wr_data[k]),
      .stats       (stats[k])
    );
  end

endmodule
