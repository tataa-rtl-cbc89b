// tataa_pe: dual-mode processing element.
//
// One integer multiplier (27x18, signed) and one 48-bit adder, the resources of one
// FPGA DSP slice, are shared by two uses:
//
//  * int8 MatMul mode (MODE_MM). The PE is an output-stationary MAC of a systolic
//    array. Register L takes an int8 of X from the left and passes it on through R;
//    register A takes two packed int8 of Y from the top, and the bottom register
//    passes the top record on down. Both int8 of A are multiplied by L in one
//    multiply: a pre-adder forms hi*2^18 + lo, so the 48-bit accumulator P holds two
//    partial sums (lo in bits 17:0, hi above). mm_drain loads the bottom register
//    with the two sums, each cut to an ACC_W-bit integer (hi is corrected for the
//    borrow of a negative lo), after which the records shift down one row per cycle.
//    mm_clr clears P. Two-cycle horizontal hop (L then R), one-cycle vertical hop.
//
//  * bfloat16 mode (MODE_FP). The four PEs of a column form a four-stage floating
//    point pipeline; parameter STAGE says which stage this PE is. Each stage reads
//    the record from the top, uses the shared MUL/ADD and a little top/bottom logic,
//    and registers the result in the bottom register (one cycle per stage):
//      S0: fpapp only, t = 0x5f37 - (y >> 1) on the ADD, duplicated as both operands;
//          fpmul/fpadd bypass.
//      S1: signed digit -> 2's complement of both mantissas (hidden one restored);
//          ADD forms e0+e1 (mul/app) or e0-e1 (add).
//      S2: mul/app: clamp e0+e1 into [127,382] (flags kept), ADD adds -127.
//          add: power-of-two LUT 2^(G-|e0-e1|) and selector; MUL aligns the smaller
//          mantissa; ADD forms the larger exponent.
//      S3: MUL multiplies the mantissas (mul/app) or ADD adds the aligned mantissas
//          (add); bottom logic converts back to signed digit, finds the leading one,
//          shifts, hides the '1', adjusts the exponent and clamps it to 0..255.
//
// Follows the paper (Fig. 3, 4 and 5): the stage assignment, the reuse of MUL and ADD,
// the magic number, the 0/255 clamp, the leading-one normalizer, the combined MAC of
// two int8 in one multiplier and int16 accumulation results.
// Own choices: G = 8 guard bits for fpadd alignment (a shift beyond G drops the
// smaller operand), truncation instead of rounding, exponent-zero inputs read as zero,
// results below the normal range flushed to zero and above it set to infinity
// (exponent 255, mantissa 0), infinities and NaNs not treated specially.
module tataa_pe
  import tataa_pkg::*;
#(
  parameter int STAGE = 0,
  parameter int ACC_W = 16,
  parameter int G     = GUARD
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mode_e       mode,
  input  logic        mm_clr,
  input  logic        mm_drain,
  input  logic [7:0]  left_in,
  output logic [7:0]  right_out,
  input  lane_t       top_in,
  output lane_t       bot_out
);

  logic [7:0]          l_q, r_q;
  logic [15:0]         a_q;
  logic signed [47:0]  p_q;
  lane_t               b_q;

  // shared arithmetic
  logic signed [26:0]  mul_a;
  logic signed [17:0]  mul_b;
  logic signed [44:0]  mul_p;
  logic signed [47:0]  add_a, add_b, add_s;

  assign mul_p = mul_a * mul_b;
  assign add_s = add_a + add_b;

  // bfloat16 field views of the incoming record
  logic [15:0] op0, op1;
  logic [7:0]  e0, e1;
  logic [8:0]  m0u, m1u;
  logic signed [8:0] m0s, m1s;
  assign op0 = top_in.ma[15:0];
  assign op1 = top_in.mb[15:0];
  assign e0  = op0[14:7];
  assign e1  = op1[14:7];
  assign m0u = (e0 == 8'd0) ? 9'd0 : {1'b0, 1'b1, op0[6:0]};
  assign m1u = (e1 == 8'd0) ? 9'd0 : {1'b0, 1'b1, op1[6:0]};
  // SD -> 2's complement: bitwise invert, +1, select on the sign
  assign m0s = op0[15] ? signed'(~m0u + 9'd1) : signed'(m0u);
  assign m1s = op1[15] ? signed'(~m1u + 9'd1) : signed'(m1u);

  // S2 helpers
  logic signed [9:0] dexp;
  logic [9:0]        adexp;
  logic [17:0]       pow2;
  logic signed [9:0] exc;
  logic              e_of, e_uf;
  assign dexp  = top_in.ex;
  assign adexp = dexp[9] ? 10'(-dexp) : 10'(dexp);
  assign pow2  = (adexp <= 10'(G)) ? (18'd1 << (G - int'(adexp))) : 18'd0;
  assign e_of  = top_in.ex > 10'sd382;
  assign e_uf  = top_in.ex < 10'sd127;
  assign exc   = e_of ? 10'sd382 : (e_uf ? 10'sd127 : top_in.ex);

  lane_t fp_next;
  logic signed [18:0] s3_val;
  logic [18:0]        s3_mag;
  logic               s3_sign;
  int                 s3_p;
  int                 s3_e;
  logic [18:0]        s3_sh;

  always_comb begin
    mul_a   = '0;
    mul_b   = '0;
    add_a   = '0;
    add_b   = '0;
    fp_next = top_in;
    s3_val  = '0;
    s3_mag  = '0;
    s3_sign = 1'b0;
    s3_p    = -1;
    s3_e    = 0;
    s3_sh   = '0;
    if (mode == MODE_MM) begin
      // combined MAC: pre-adder packs the two int8 of A
      mul_a = (27'(signed'(a_q[15:8])) <<< 18) + 27'(signed'(a_q[7:0]));
      mul_b = 18'(signed'(l_q));
      add_a = p_q;
      add_b = 48'(mul_p);
    end else begin
      unique case (STAGE)
        0: begin
          if (top_in.op == FOP_APP) begin
            add_a = 48'(ISQRT_MAGIC);
            add_b = -48'({1'b0, op0[15:1]});
            fp_next.ma = 18'(add_s[15:0]);
            fp_next.mb = 18'(add_s[15:0]);
          end
        end
        1: begin
          add_a = 48'(e0);
          add_b = (top_in.op == FOP_ADD) ? -48'(e1) : 48'(e1);
          fp_next.ex = add_s[9:0];
          fp_next.ey = e0;
          fp_next.ma = 18'(m0s);
          fp_next.mb = 18'(m1s);
          fp_next.of = 1'b0;
          fp_next.uf = 1'b0;
        end
        2: begin
          if (top_in.op == FOP_ADD) begin
            // e_t = max(e0, e1) = e0 - min(e0 - e1, 0)
            add_a = 48'(top_in.ey);
            add_b = dexp[9] ? -48'(dexp) : 48'sd0;
            // selector: the operand with the smaller exponent is aligned
            mul_a = dexp[9] ? 27'(top_in.ma) : 27'(top_in.mb);
            mul_b = signed'(pow2);
            fp_next.ex = add_s[9:0];
            fp_next.ma = dexp[9] ? (top_in.mb <<< G) : (top_in.ma <<< G);
            fp_next.mb = mul_p[17:0];
          end else begin
            add_a = 48'(exc);
            add_b = -48'(EBIAS);
            fp_next.ex = add_s[9:0];
            fp_next.of = e_of;
            fp_next.uf = e_uf;
          end
        end
        default: begin
          int frac;
          if (top_in.op == FOP_ADD) begin
            add_a  = 48'(top_in.ma);
            add_b  = 48'(top_in.mb);
            s3_val = add_s[18:0];
            frac   = 7 + G;
          end else begin
            mul_a  = 27'(top_in.ma);
            mul_b  = top_in.mb;
            s3_val = mul_p[18:0];
            frac   = 14;
          end
          // bottom logic: 2's complement -> signed digit, then normalize
          s3_sign = s3_val[18];
          s3_mag  = s3_sign ? 19'(~s3_val + 19'sd1) : 19'(s3_val);
          for (int i = 0; i < 19; i++) if (s3_mag[i]) s3_p = i;
          s3_e  = int'(top_in.ex) + s3_p - frac;
          s3_sh = (s3_p >= 7) ? (s3_mag >> (s3_p - 7)) : (s3_mag << (7 - s3_p));
          fp_next.ex = '0;
          fp_next.ey = '0;
          fp_next.mb = '0;
          if (s3_p < 0) fp_next.ma = '0;
          else if (top_in.uf || s3_e <= 0) fp_next.ma = 18'({s3_sign, 15'd0});
          else if (top_in.of || s3_e >= 255) fp_next.ma = 18'({s3_sign, 8'hff, 7'd0});
          else fp_next.ma = 18'({s3_sign, s3_e[7:0], s3_sh[6:0]});
        end
      endcase
    end
  end

  // packed accumulator -> two ACC_W-bit results
  logic [ACC_W-1:0] res_lo, res_hi;
  logic [29:0]      hi_full;
  assign res_lo  = p_q[ACC_W-1:0];
  assign hi_full = p_q[47:18] + 30'(p_q[17]);
  assign res_hi  = hi_full[ACC_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_q <= '0;
      r_q <= '0;
      a_q <= '0;
      p_q <= '0;
      b_q <= '0;
    end else if (mode == MODE_MM) begin
      l_q <= left_in;
      r_q <= l_q;
      a_q <= top_in.ma[15:0];
      p_q <= mm_clr ? '0 : add_s;
      if (mm_drain) begin
        b_q    <= '0;
        b_q.ma <= 18'(res_lo);
        b_q.mb <= 18'(res_hi);
      end else begin
        b_q <= top_in;
      end
    end else begin
      l_q <= '0;
      r_q <= '0;
      a_q <= '0;
      b_q <= fp_next;
      if (!top_in.vld) b_q.vld <= 1'b0;
    end
  end

  assign right_out = r_q;
  assign bot_out   = b_q;

endmodule
