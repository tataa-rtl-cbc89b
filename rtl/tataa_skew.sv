// tataa_skew: staircase delay line in front of the systolic array.
//
// Lane i of the input comes out i*STEP cycles later (lane 0 unregistered), so that
// the operands of one reduction index reach the PEs of a diagonal together. When
// in_vld is low the lanes take zeros, which keeps the accumulators unchanged while
// nothing is fed. One register per lane and cycle of delay.
//
// Follows the systolic-array input skew implied by Fig. 2 and 4 of the paper;
// STEP = 1 for the X rows (row r of the array sees a column of Y r cycles after row 0)
// and STEP = 2 for the Y columns (X takes two cycles per column through L and R) are
// this design's timing.
module tataa_skew #(
  parameter int LANES = 4,
  parameter int WIDTH = 8,
  parameter int STEP  = 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_vld,
  input  logic [LANES-1:0][WIDTH-1:0] din,
  output logic [LANES-1:0][WIDTH-1:0] dout
);

  assign dout[0] = in_vld ? din[0] : '0;

  for (genvar i = 1; i < LANES; i++) begin : g_lane
    localparam int D = i * STEP;
    logic [D-1:0][WIDTH-1:0] sr;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) sr <= '0;
      else begin
        sr[0] <= in_vld ? din[i] : '0;
        for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
      end
    end
    assign dout[i] = sr[D-1];
  end

endmodule
