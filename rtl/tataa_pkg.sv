// tataa_pkg: types, constants and arithmetic helpers shared by the TATAA core.
//
// Holds the operating mode, the bfloat16 operation codes, the record that travels
// down a PE column (one per stage boundary), the 64-bit instruction format and the
// scalar conversion functions used by the quantization unit.
//
// Follows the paper: two modes (int8 MatMul / bfloat16 SIMD), three bfloat16 basic
// operations (fpmul, fpadd, fpapp), the nine instruction types of the ISA, the
// fast-inverse-square-root magic number 0x5f37 and the exponent bias 127.
// Own choices: the bit-level instruction encoding, the HALT instruction, the record
// layout between PE stages, truncation (round toward zero) of every bfloat16 result,
// and flushing exponent-zero inputs to zero.
package tataa_pkg;

  typedef enum logic {MODE_MM = 1'b0, MODE_FP = 1'b1} mode_e;

  typedef enum logic [1:0] {FOP_MUL = 2'd0, FOP_ADD = 2'd1, FOP_APP = 2'd2, FOP_NONE = 2'd3} fop_e;

  localparam logic [15:0] ISQRT_MAGIC = 16'h5f37;  // Algorithm 1
  localparam int          EBIAS       = 127;
  localparam int          GUARD       = 8;         // fpadd alignment guard bits (own choice)

  // Record passed from the bottom of one PE to the top of the next one in a column.
  // MatMul mode uses ma[15:0] (two packed int8 of Y while computing, two int16
  // results while draining). bfloat16 mode uses the fields stage by stage:
  //   into S0 : ma[15:0]=OP0, mb[15:0]=OP1
  //   S0->S1  : same, with OP0/OP1 replaced by t for fpapp
  //   S1->S2  : ex=e0+e1 (mul/app) or e0-e1 (add), ey=e0, ma={s0,m0} 2s, mb={s1,m1} 2s
  //   S2->S3  : ex=e_t, ma/mb = operands for MUL (mul/app) or ADD (add), of/uf flags
  //   S3 out  : ma[15:0] = bfloat16 result
  typedef struct packed {
    logic              vld;
    fop_e              op;
    logic              of;
    logic              uf;
    logic signed [9:0] ex;
    logic [7:0]        ey;
    logic signed [17:0] ma;
    logic signed [17:0] mb;
  } lane_t;

  localparam int LANE_W = $bits(lane_t);

  // ---------------------------------------------------------------- ISA
  typedef enum logic [3:0] {
    OP_CONFIG  = 4'd0,
    OP_LOAD_M  = 4'd1,
    OP_LOAD_V  = 4'd2,
    OP_MATMUL  = 4'd3,
    OP_MUL_V   = 4'd4,
    OP_ADD_V   = 4'd5,
    OP_APP_V   = 4'd6,
    OP_STORE_M = 4'd7,
    OP_STORE_V = 4'd8,
    OP_HALT    = 4'd15
  } opcode_e;

  // vector operand source: bank a (RVX), bank b (RVY) or a CONFIG constant (RVC)
  typedef enum logic [1:0] {SRC_A = 2'd0, SRC_B = 2'd1, SRC_C = 2'd2} vsrc_e;

  // quantization configurations of the store path
  typedef enum logic [1:0] {
    Q_I16_I8   = 2'd0,
    Q_I16_BF16 = 2'd1,
    Q_BF16_I8  = 2'd2,
    Q_BF16_BF16 = 2'd3
  } qmode_e;

  localparam int INSTR_W = 64;

  // ---------------------------------------------------------------- scalar helpers
  // Truncating normalization of mag * 2^(e_off) into bfloat16, mag unsigned.
  // e_off already includes the bias. Used by the store-path quantizer.
  function automatic logic [15:0] bf16_pack(input logic s, input logic [31:0] mag, input int e_off);
    int p;
    int e;
    logic [31:0] sh;
    p = -1;
    for (int i = 0; i < 32; i++) if (mag[i]) p = i;
    if (p < 0) return 16'h0000;
    e = e_off + p;
    if (e <= 0) return 16'h0000;
    if (e >= 255) return {s, 8'hff, 7'h00};
    sh = (p >= 7) ? (mag >> (p - 7)) : (mag << (7 - p));
    return {s, e[7:0], sh[6:0]};
  endfunction

  // floor(v * 2^sh) saturated to int8, v signed
  function automatic logic [7:0] sat_i8_shift(input logic signed [31:0] v, input int sh);
    logic signed [63:0] w;
    if (sh >= 0) begin
      if (sh > 24) w = (v == 0) ? 64'sd0 : (v < 0 ? -64'sd1000 : 64'sd1000);
      else w = 64'(v) <<< sh;
    end else begin
      if (sh < -40) w = (v < 0) ? -64'sd1 : 64'sd0;
      else w = 64'(v) >>> (-sh);
    end
    if (w > 127) return 8'h7f;
    if (w < -128) return 8'h80;
    return w[7:0];
  endfunction

  // int16 accumulator times bfloat16 scale, floored to int8 (Eq. 1)
  function automatic logic [7:0] q_i16_i8(input logic [15:0] x, input logic [15:0] s);
    logic signed [31:0] prod;
    if (s[14:7] == 0) return 8'h00;
    prod = 32'(signed'(x)) * 32'(signed'({1'b0, 1'b1, s[6:0]}));
    if (s[15]) prod = -prod;
    return sat_i8_shift(prod, int'(s[14:7]) - EBIAS - 7);
  endfunction

  // int16 accumulator times bfloat16 scale, as bfloat16
  function automatic logic [15:0] q_i16_bf16(input logic [15:0] x, input logic [15:0] s);
    logic signed [31:0] prod;
    logic              sg;
    if (s[14:7] == 0) return 16'h0000;
    prod = 32'(signed'(x)) * 32'(signed'({1'b0, 1'b1, s[6:0]}));
    sg   = prod[31] ^ s[15];
    if (prod < 0) prod = -prod;
    return bf16_pack(sg, prod, int'(s[14:7]) - 7);
  endfunction

  // bfloat16 value times bfloat16 scale, floored to int8
  function automatic logic [7:0] q_bf16_i8(input logic [15:0] x, input logic [15:0] s);
    logic signed [31:0] prod;
    if (s[14:7] == 0 || x[14:7] == 0) return 8'h00;
    prod = 32'({1'b1, x[6:0]}) * 32'({1'b1, s[6:0]});
    if (x[15] ^ s[15]) prod = -prod;
    return sat_i8_shift(prod, int'(x[14:7]) + int'(s[14:7]) - 2 * EBIAS - 14);
  endfunction

  // event counters of one core, for observation by a host or testbench
  typedef struct packed {
    logic [31:0] issued;     // instructions issued
    logic [31:0] stall;      // cycles an instruction waited to issue
    logic [31:0] overlap;    // instructions issued while another unit was running
    logic [31:0] hazard;     // cycles a vector op waited on a result still in flight
    logic [31:0] vec;        // vector operations executed
    logic [31:0] mm;         // MATMUL instructions executed
    logic [31:0] mode_sw;    // switches of the array between int8 and bfloat16 mode
    logic [31:0] store_m;    // STORE.M executed
    logic [31:0] store_v;    // STORE.V executed
  } stats_t;

endpackage
