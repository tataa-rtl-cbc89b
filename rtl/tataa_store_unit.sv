// tataa_store_unit: executes STORE.M and STORE.V through the quantization unit.
//
// STORE.M: pulses mm_drain, which copies every PE's two accumulated results into its
// bottom register; for the next 4*N cycles the rows shift out of the last DMPU, row
// 4*N-1 first, and drain_push writes them into the last dual-mode buffer. Meanwhile
// the rows are popped from that buffer and handed to tataa_quant_layout with their
// row index (int16 -> int8 or int16 -> bfloat16, optional transpose).
// STORE.V: for each of the requested vectors, waits until every buffer holds a word,
// pops one word from each (N x W bfloat16 = one 128-lane vector at the defaults) and
// hands it over as one row (bfloat16 -> bfloat16, or bfloat16 -> int8 with the scale).
// Vector v goes to address + v * (words per vector).
// busy is high from issue until the quantization unit has written its last word.
//
// Follows the paper (Sec. 4.4-4.6): results leave the array through the bottom
// registers into the buffers and are quantized on the way to memory. Own choices: the
// drain sequencing, the row order, and packing of STORE.V rows.
module tataa_store_unit
  import tataa_pkg::*;
#(
  parameter int N = 8,
  parameter int W = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        issue,
  input  logic [63:0]                 instr,
  input  logic [15:0]                 cfg_scale,
  output logic                        busy,
  // array drain and buffers
  output logic                        mm_drain,
  output logic                        drain_push,
  input  logic [N-1:0][32*W-1:0]      dmb_rdata,
  input  logic [N-1:0]                dmb_empty,
  output logic [N-1:0]                dmb_pop,
  // memory write channel
  output logic                        wr_valid,
  input  logic                        wr_ready,
  output logic [31:0]                 wr_addr,
  output logic [16*W-1:0]             wr_data,
  output logic [31:0]                 n_store_m,
  output logic [31:0]                 n_store_v
);

  localparam int TR = 4 * N;

  logic        is_v, active;
  logic [15:0] rows_out, dcnt;
  logic        q_start, q_ready, q_valid, q_busy, q_done;
  qmode_e      q_mode;
  logic [15:0] q_idx, q_stride, q_rows;
  logic [N*W-1:0][15:0] q_lanes;

  opcode_e opc;
  assign opc = opcode_e'(instr[63:60]);

  always_comb begin
    if (opc == OP_STORE_V) begin
      q_mode   = instr[59] ? Q_BF16_I8 : Q_BF16_BF16;
      q_stride = instr[59] ? 16'(N / 2) : 16'(N);
      q_rows   = instr[47:32];
    end else begin
      q_mode   = instr[59] ? Q_I16_BF16 : Q_I16_I8;
      q_stride = instr[47:32];
      q_rows   = 16'(TR);
    end
  end
  assign q_start = issue;

  // row presented to the quantizer
  always_comb begin
    q_lanes = '0;
    if (is_v) begin
      for (int d = 0; d < N; d++)
        for (int c = 0; c < W; c++) q_lanes[d*W + c] = dmb_rdata[d][16*c +: 16];
      q_valid = active && !(|dmb_empty);
    end else begin
      for (int c = 0; c < 2*W; c++) q_lanes[c] = dmb_rdata[N-1][16*c +: 16];
      q_valid = active && !dmb_empty[N-1];
    end
  end
  assign q_idx   = is_v ? rows_out : 16'(TR - 1) - rows_out;
  assign dmb_pop = (q_valid && q_ready) ? (is_v ? {N{1'b1}} : (N)'(1) << (N - 1)) : '0;
  assign busy    = active || q_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_v       <= 1'b0;
      active     <= 1'b0;
      rows_out   <= '0;
      dcnt       <= '0;
      mm_drain   <= 1'b0;
      drain_push <= 1'b0;
      n_store_m  <= '0;
      n_store_v  <= '0;
    end else begin
      mm_drain <= 1'b0;
      if (issue) begin
        is_v     <= (opc == OP_STORE_V);
        active   <= 1'b1;
        rows_out <= '0;
        if (opc == OP_STORE_V) n_store_v <= n_store_v + 1;
        else begin
          n_store_m <= n_store_m + 1;
          mm_drain  <= 1'b1;
        end
      end else begin
        if (q_valid && q_ready) rows_out <= rows_out + 1'b1;
        if (q_done) active <= 1'b0;
      end
      // drain window: the 4N cycles after mm_drain
      if (mm_drain) begin
        drain_push <= 1'b1;
        dcnt       <= 16'(TR - 1);
      end else if (drain_push) begin
        if (dcnt == 0) drain_push <= 1'b0;
        else dcnt <= dcnt - 1'b1;
      end
    end
  end

  tataa_quant_layout #(.N(N), .W(W)) u_quant (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (q_start),
    .cfg_qmode    (q_mode),
    .cfg_transpose(opc == OP_STORE_M && instr[58]),
    .cfg_base     (instr[31:0]),
    .cfg_stride   (q_stride),
    .cfg_rows     (q_rows),
    .cfg_scale    (cfg_scale),
    .in_valid     (q_valid),
    .in_ready     (q_ready),
    .in_idx       (q_idx),
    .in_lanes     (q_lanes),
    .wr_valid     (wr_valid),
    .wr_ready     (wr_ready),
    .wr_addr      (wr_addr),
    .wr_data      (wr_data),
    .busy         (q_busy),
    .done         (q_done)
  );

endmodule
