// tataa_rfy: Y-direction register file of one DMPU, banks RFYa and RFYb.
//
// Each bank is DEPTH words of 16*W bits: W bfloat16 lanes, or, in int8 MatMul mode,
// two int8 per array column. DMRFY0, the instance in front of DMPU 0, is D_mat deep
// and also serves as the matrix buffers RMY0 (= RFYa) and RMY1 (= RFYb); the other
// instances are D_fpv deep and hold only bfloat16 vectors. Vector register RVXi of
// the instruction set is address i of RFYa, RVYi address i of RFYb.
// Each bank has one write port. Two read ports, each free to address either bank,
// supply the two operands of a vector instruction (port 0 also feeds the MatMul Y
// stream). Reads are registered: data one cycle after the address.
//
// Follows the paper (Fig. 6(b)): two banks of 16*W bits, D_mat deep for DMRFY0 and
// D_fpv deep for RFY1..N-1. Own choices: the depths (512 and 32), the second read
// port, and reading the RVX/RVY register names of the assembly examples as the two banks.
module tataa_rfy #(
  parameter int W     = 16,
  parameter int DEPTH = 512,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wa_en,
  input  logic [AW-1:0]     wa_addr,
  input  logic [16*W-1:0]   wa_data,
  input  logic              wb_en,
  input  logic [AW-1:0]     wb_addr,
  input  logic [16*W-1:0]   wb_data,
  input  logic              r0_bank,   // 0: RFYa, 1: RFYb
  input  logic [AW-1:0]     r0_addr,
  output logic [16*W-1:0]   r0_data,
  input  logic              r1_bank,
  input  logic [AW-1:0]     r1_addr,
  output logic [16*W-1:0]   r1_data
);

  logic [16*W-1:0] bank_a [DEPTH];
  logic [16*W-1:0] bank_b [DEPTH];

  always_ff @(posedge clk) begin
    if (wa_en) bank_a[wa_addr] <= wa_data;
    if (wb_en) bank_b[wb_addr] <= wb_data;
    r0_data <= r0_bank ? bank_b[r0_addr] : bank_a[r0_addr];
    r1_data <= r1_bank ? bank_b[r1_addr] : bank_a[r1_addr];
  end

endmodule
