// tataa_rfx: X-direction register file (matrix buffers RMX0 and RMX1).
//
// Two matrix buffers of D_MAT words each give the double buffering that lets a load
// into one overlap a MatMul reading the other. A word holds one int8 per row of the
// systolic array, 4*N int8 in all: bits [8*(4d+k) +: 8] go to row k of DMPU d, so the
// read word is the N ports to the N DMPUs. One write port (from the load crossbar),
// one read port; the read is registered (data one cycle after the address).
//
// Follows the paper (Fig. 6(a)): two buffers of depth D_mat, total depth 2*D_mat,
// shared by all DMPUs, used only in int8 MatMul mode. Own choices: D_MAT = 512 (the
// paper gives no number) and a word of 32*N bits, one int8 for each of the 4*N array
// rows (the figure prints 8b per DMPU port), which makes a word exactly one 256-bit
// memory beat at N = 8.
module tataa_rfx #(
  parameter int N     = 8,
  parameter int D_MAT = 512,
  parameter int AW    = $clog2(D_MAT)
) (
  input  logic              clk,
  input  logic              we,
  input  logic              wsel,      // 0: RMX0, 1: RMX1
  input  logic [AW-1:0]     waddr,
  input  logic [32*N-1:0]   wdata,
  input  logic              rsel,
  input  logic [AW-1:0]     raddr,
  output logic [32*N-1:0]   rdata
);

  logic [32*N-1:0] mem [2*D_MAT];

  always_ff @(posedge clk) begin
    if (we) mem[{wsel, waddr}] <= wdata;
    rdata <= mem[{rsel, raddr}];
  end

endmodule
