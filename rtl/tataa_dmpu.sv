// tataa_dmpu: dual-mode processing unit, W columns by 4 rows of tataa_pe.
//
// Row k holds stage-k PEs (S0 at the top, S3 at the bottom). Horizontally each PE's
// R register feeds the L register of its right neighbour; row k of the unit takes its
// X operand at left_in[k]. Vertically each PE's bottom record feeds the top of the PE
// below; column c takes top_in[c] and delivers bot_out[c].
//
// int8 MatMul mode: the unit is a 4-row slice of the core's systolic array; bot_out
// is chained by the mode MUX to the next unit's top_in, and during a drain it carries
// the accumulated results out one row per cycle.
// bfloat16 mode: each column is an independent 4-stage FPU; a record entering top_in
// leaves bot_out four cycles later with the bfloat16 result in ma[15:0]. The horizontal
// paths are idle.
//
// Follows the paper (Fig. 2(b), Fig. 4, Fig. 5): W columns x 4 rows, column = FPU,
// rows = pipeline stages S0..S3. The port grouping is this design's own.
module tataa_dmpu
  import tataa_pkg::*;
#(
  parameter int W     = 16,
  parameter int ACC_W = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  mode_e           mode,
  input  logic            mm_clr,
  input  logic            mm_drain,
  input  logic [3:0][7:0] left_in,
  input  lane_t [W-1:0]   top_in,
  output lane_t [W-1:0]   bot_out
);

  logic [3:0][W:0][7:0] hx;   // horizontal X links, hx[r][c] enters column c
  lane_t [4:0][W-1:0]   vy;   // vertical links, vy[r][c] enters row r

  for (genvar r = 0; r < 4; r++) begin : g_row
    assign hx[r][0] = left_in[r];
    for (genvar c = 0; c < W; c++) begin : g_col
      tataa_pe #(.STAGE(r), .ACC_W(ACC_W)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .mode     (mode),
        .mm_clr   (mm_clr),
        .mm_drain (mm_drain),
        .left_in  (hx[r][c]),
        .right_out(hx[r][c+1]),
        .top_in   (vy[r][c]),
        .bot_out  (vy[r+1][c])
      );
    end
  end

  assign vy[0]   = top_in;
  assign bot_out = vy[4];

endmodule
