// tataa_tb_pkg: reference models and instruction encoders shared by the testbenches.
//
// The bfloat16 references work on real numbers, independently of the bit-level
// datapath: they decode the operands, compute the exact result in double precision
// and round it toward zero to bfloat16, with the number rules this design uses
// (exponent-zero operands are zero, results below the normal range become a signed
// zero, results above it a signed infinity, an exact zero is +0; fpadd drops the
// operand whose exponent is more than 8 below the other's). The quantization references
// multiply by the scale in real arithmetic and floor / saturate. The encoders build
// the 64-bit instructions of the core's instruction set.
package tataa_tb_pkg;

  // ---------------------------------------------------------------- bfloat16
  function automatic real bf2r(input logic [15:0] x);
    real v;
    int  e;
    e = int'(x[14:7]);
    if (e == 0) return 0.0;
    v = 1.0 + real'(x[6:0]) / 128.0;
    for (int i = 0; i < e - 127; i++) v = v * 2.0;
    for (int i = 0; i < 127 - e; i++) v = v / 2.0;
    return x[15] ? -v : v;
  endfunction

  // round toward zero to bfloat16; sz: signed zero on underflow (else +0)
  function automatic logic [15:0] r2bf(input real v, input bit sz);
    real a;
    int  e;
    logic s;
    int  m;
    if (v == 0.0) return 16'h0000;
    s = (v < 0.0);
    a = s ? -v : v;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    e = e + 127;
    if (e <= 0)   return sz ? {s, 15'd0} : 16'h0000;
    if (e >= 255) return {s, 8'hff, 7'd0};
    m = int'($floor((a - 1.0) * 128.0));
    return {s, e[7:0], m[6:0]};
  endfunction

  function automatic logic [15:0] ref_fmul(input logic [15:0] a, input logic [15:0] b);
    int es;
    if (a[14:7] == 0 || b[14:7] == 0) return 16'h0000;
    es = int'(a[14:7]) + int'(b[14:7]);
    if (es < 127) return {a[15] ^ b[15], 15'd0};
    if (es > 382) return {a[15] ^ b[15], 8'hff, 7'd0};
    return r2bf(bf2r(a) * bf2r(b), 1'b1);
  endfunction

  function automatic logic [15:0] ref_fadd(input logic [15:0] a, input logic [15:0] b);
    int  d;
    real va, vb;
    d  = int'(a[14:7]) - int'(b[14:7]);
    va = bf2r(a);
    vb = bf2r(b);
    if (d > 8)  vb = 0.0;
    if (d < -8) va = 0.0;
    return r2bf(va + vb, 1'b1);
  endfunction

  function automatic logic [15:0] ref_fapp(input logic [15:0] x);
    logic [15:0] t;
    t = 16'h5f37 - {1'b0, x[15:1]};
    return ref_fmul(t, t);
  endfunction

  // ---------------------------------------------------------------- quantization
  function automatic logic [7:0] sat8(input real v);
    real f;
    f = $floor(v);
    if (f > 127.0)  return 8'h7f;
    if (f < -128.0) return 8'h80;
    return 8'(int'(f));
  endfunction

  function automatic logic [7:0] ref_q_i16_i8(input logic signed [15:0] x, input logic [15:0] s);
    if (s[14:7] == 0) return 8'h00;
    return sat8(real'(x) * bf2r(s));
  endfunction

  function automatic logic [15:0] ref_q_i16_bf16(input logic signed [15:0] x, input logic [15:0] s);
    if (s[14:7] == 0) return 16'h0000;
    return r2bf(real'(x) * bf2r(s), 1'b0);
  endfunction

  function automatic logic [7:0] ref_q_bf16_i8(input logic [15:0] x, input logic [15:0] s);
    if (s[14:7] == 0 || x[14:7] == 0) return 8'h00;
    return sat8(bf2r(x) * bf2r(s));
  endfunction

  // a random bfloat16 with exponent in [lo, hi]
  function automatic logic [15:0] rnd_bf(input int lo, input int hi);
    int e;
    e = lo + int'($urandom_range(hi - lo));
    return {1'($urandom), e[7:0], 7'($urandom)};
  endfunction

  // ---------------------------------------------------------------- instructions
  function automatic logic [63:0] i_config(input int tgt, input logic [15:0] v);
    return {4'd0, 4'(tgt), 40'd0, v};
  endfunction
  // buf: 0 RMX0, 1 RMX1, 2 RMY0, 3 RMY1
  function automatic logic [63:0] i_load_m(input int bufsel, input int len, input int addr);
    return {4'd1, 2'(bufsel), 10'd0, 16'(len), 32'(addr)};
  endfunction
  function automatic logic [63:0] i_load_v(input int bank, input int vreg, input int addr);
    return {4'd2, 1'(bank), 3'd0, 8'(vreg), 16'd0, 32'(addr)};
  endfunction
  function automatic logic [63:0] i_matmul(input int xs, input int ys, input int acc, input int len);
    return {4'd3, 1'(xs), 1'(ys), 1'(acc), 9'd0, 16'(len), 32'd0};
  endfunction
  // op: 4 MUL.V, 5 ADD.V, 6 APP.V; dst 0 none 1 A 2 B; sel 0 A 1 B 2 const
  function automatic logic [63:0] i_vec(input int op, input int dst, input int wb, input int didx,
                                        input int s0sel, input int s0, input int s1sel, input int s1);
    return {4'(op), 2'(dst), 1'(wb), 1'b0, 8'(didx), 2'(s0sel), 8'(s0), 2'(s1sel), 8'(s1), 28'd0};
  endfunction
  function automatic logic [63:0] i_store_m(input int bf, input int tr, input int stride, input int addr);
    return {4'd7, 1'(bf), 1'(tr), 10'd0, 16'(stride), 32'(addr)};
  endfunction
  function automatic logic [63:0] i_store_v(input int i8, input int cnt, input int addr);
    return {4'd8, 1'(i8), 11'd0, 16'(cnt), 32'(addr)};
  endfunction
  function automatic logic [63:0] i_halt();
    return {4'd15, 60'd0};
  endfunction

endpackage
