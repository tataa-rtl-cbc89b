// tataa_quant_layout: on-chip quantization and layout conversion on the store path.
//
// Takes rows of results from the dual-mode buffers and turns them into memory words
// (16*W bits, one 256-bit beat at W = 16) with their addresses.
//
// Four quantization configurations, all with one bfloat16 scale preloaded by CONFIG:
//   Q_I16_I8    int16 MatMul result * scale, floored and saturated to int8 (Eq. 1)
//   Q_I16_BF16  int16 MatMul result * scale, as bfloat16
//   Q_BF16_I8   bfloat16 vector element * scale, floored and saturated to int8
//   Q_BF16_BF16 no conversion
// A MatMul row holds 2*W int16 in lanes 0..2W-1; a vector row holds N*W bfloat16 in
// all lanes. One output word is converted per cycle, so 2*W converters suffice.
//
// Layout: word k of row i goes to base + i*stride + k, which gives row-by-row and
// vector layouts by address control alone. With transpose set (int8 MatMul output
// only, for K and V), the whole 4*N x 2*W int8 tile is buffered and written column by
// column instead: column j, 4*N int8 with row 0 in the low byte, to base + j*stride.
//
// Interface: start latches the configuration; rows then arrive on in_valid/in_ready
// with their row index; words leave on wr_valid/wr_ready; done pulses after the last
// word. Accepting a row takes one cycle, each word one cycle while wr_ready is high.
//
// Follows the paper (Sec. 4.6, Fig. 7, Eq. 1): four quantization configurations with
// a preloaded floating-point scale, bfloat16->bfloat16 skipped, only a sub-matrix
// transpose in hardware, everything else by write-back addresses. Own choices: the
// scale format (bfloat16), floor and saturation details, the word/row packing, the
// stride-based address rule, and transpose limited to int8 tiles with 4*N = 2*W.
module tataa_quant_layout
  import tataa_pkg::*;
#(
  parameter int N = 8,
  parameter int W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  qmode_e                  cfg_qmode,
  input  logic                    cfg_transpose,
  input  logic [31:0]             cfg_base,
  input  logic [15:0]             cfg_stride,
  input  logic [15:0]             cfg_rows,
  input  logic [15:0]             cfg_scale,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [15:0]             in_idx,
  input  logic [N*W-1:0][15:0]    in_lanes,
  output logic                    wr_valid,
  input  logic                    wr_ready,
  output logic [31:0]             wr_addr,
  output logic [16*W-1:0]         wr_data,
  output logic                    busy,
  output logic                    done
);

  localparam int TR = 4 * N;   // tile rows
  localparam int TC = 2 * W;   // tile columns

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_EMIT, S_TWR, S_TEMIT} state_e;
  state_e state;

  qmode_e      qm;
  logic        tr;
  logic [31:0] base;
  logic [15:0] stride, rows_left, ridx, scale;
  logic [15:0] k, nwords;
  logic [N*W-1:0][15:0] row_q;
  logic [TR-1:0][TC-1:0][7:0] tile;

  always_comb begin
    unique case (qm)
      Q_I16_I8:    nwords = 16'd1;
      Q_I16_BF16:  nwords = 16'd2;
      Q_BF16_BF16: nwords = 16'(N);
      default:     nwords = 16'(N / 2);
    endcase
  end

  // conversion of word k of the held row
  logic [16*W-1:0] cword;
  always_comb begin
    cword = '0;
    unique case (qm)
      Q_I16_I8:
        for (int i = 0; i < TC; i++) cword[8*i +: 8] = q_i16_i8(row_q[i], scale);
      Q_I16_BF16:
        for (int i = 0; i < W; i++)
          cword[16*i +: 16] = q_i16_bf16(row_q[int'(k[0]) * W + i], scale);
      Q_BF16_BF16:
        for (int i = 0; i < W; i++) cword[16*i +: 16] = row_q[int'(k) * W + i];
      default:
        for (int i = 0; i < TC; i++) cword[8*i +: 8] = q_bf16_i8(row_q[int'(k) * TC + i], scale);
    endcase
  end

  logic [16*W-1:0] tword;
  always_comb begin
    tword = '0;
    for (int r = 0; r < TR; r++) tword[8*r +: 8] = tile[r][k[$clog2(TC)-1:0]];
  end

  assign in_ready = (state == S_WAIT);
  assign wr_valid = (state == S_EMIT) || (state == S_TEMIT);
  assign wr_data  = (state == S_TEMIT) ? tword : cword;
  assign wr_addr  = (state == S_TEMIT) ? base + 32'(k) * 32'(stride)
                                       : base + 32'(ridx) * 32'(stride) + 32'(k);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      qm        <= Q_I16_I8;
      tr        <= 1'b0;
      base      <= '0;
      stride    <= '0;
      rows_left <= '0;
      ridx      <= '0;
      scale     <= '0;
      k         <= '0;
      row_q     <= '0;
      tile      <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          qm        <= cfg_qmode;
          tr        <= cfg_transpose;
          base      <= cfg_base;
          stride    <= cfg_stride;
          rows_left <= cfg_rows;
          scale     <= cfg_scale;
          state     <= S_WAIT;
        end
        S_WAIT: if (in_valid) begin
          row_q <= in_lanes;
          ridx  <= in_idx;
          k     <= '0;
          state <= tr ? S_TWR : S_EMIT;
        end
        S_EMIT: if (wr_ready) begin
          if (k == nwords - 1'b1) begin
            k         <= '0;
            rows_left <= rows_left - 1'b1;
            if (rows_left == 16'd1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else state <= S_WAIT;
          end else k <= k + 1'b1;
        end
        S_TWR: begin
          for (int i = 0; i < TC; i++) tile[ridx[$clog2(TR)-1:0]][i] <= cword[8*i +: 8];
          rows_left <= rows_left - 1'b1;
          if (rows_left == 16'd1) begin
            state <= S_TEMIT;
            ridx  <= '0;
            k     <= '0;
          end else state <= S_WAIT;
        end
        default: if (wr_ready) begin   // S_TEMIT: column k to base + k*stride
          if (k == 16'(TC - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
            k     <= '0;
          end else begin
            k <= k + 1'b1;
          end
        end
      endcase
    end
  end

  initial begin
    if (TR * 8 != 16 * W) $info("transposed store needs 4*N == 2*W");
  end

endmodule
