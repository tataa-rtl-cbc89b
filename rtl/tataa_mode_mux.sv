// tataa_mode_mux: the run-time mode switch in front of one DMPU.
//
// In int8 MatMul mode the DMPU's top input is the bottom output of the DMPU above it
// (for DMPU 0, the skewed int8 matrix Y read from RMY0/RMY1), so all DMPUs form one
// systolic array. In bfloat16 mode the top input is built from this DMPU's own RFY
// read: a valid bit and the operation code common to all lanes, OP0 from the first
// operand read and OP1 from the second, per lane.
//
// Purely combinational. Follows the paper (Fig. 2(a) "Mode MUX", Fig. 6(c)); the
// record format it builds is this design's own (see tataa_pkg::lane_t).
module tataa_mode_mux
  import tataa_pkg::*;
#(
  parameter int W = 16
) (
  input  mode_e              mode,
  input  lane_t [W-1:0]      chain_in,   // previous DMPU bottom / skewed Y
  input  logic               fp_vld,
  input  fop_e               fp_op,
  input  logic [W-1:0][15:0] fp_op0,
  input  logic [W-1:0][15:0] fp_op1,
  output lane_t [W-1:0]      dmpu_top
);

  always_comb begin
    for (int c = 0; c < W; c++) begin
      if (mode == MODE_MM) begin
        dmpu_top[c] = chain_in[c];
      end else begin
        dmpu_top[c]     = '0;
        dmpu_top[c].vld = fp_vld;
        dmpu_top[c].op  = fp_vld ? fp_op : FOP_NONE;
        dmpu_top[c].ma  = 18'(fp_op0[c]);
        dmpu_top[c].mb  = 18'(fp_op1[c]);
      end
    end
  end

endmodule
