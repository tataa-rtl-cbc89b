// tataa_dmb: dual-mode buffer below one DMPU.
//
// A first-in first-out buffer of DEPTH words of 32*W bits. In int8 MatMul mode only
// the buffer of the last DMPU is written: it receives one drained row of the output
// tile per cycle, 2*W int16 results. In bfloat16 mode every buffer receives the W
// bfloat16 results of its DMPU (low 16*W bits) for each vector instruction that asks
// for write-back. The store path pops the words on their way to the quantization
// unit. The head word is visible on rdata while not empty (show-ahead); push and pop
// in the same cycle are allowed. Pushing a full or popping an empty buffer is a
// protocol error caught by assertions.
//
// Follows the paper (Sec. 4.5, Fig. 6(c)): one buffer per DMPU, results held there
// before being written to external memory, only the last one active in MatMul mode.
// Own choices: FIFO organisation, DEPTH = 64 (the paper gives no number; it must hold
// one output tile of 4*N rows).
module tataa_dmb #(
  parameter int W     = 16,
  parameter int DEPTH = 64,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            push,
  input  logic [32*W-1:0] wdata,
  input  logic            pop,
  output logic [32*W-1:0] rdata,
  output logic            empty,
  output logic            full,
  output logic [AW:0]     count
);

  logic [32*W-1:0] mem [DEPTH];
  logic [AW-1:0]   wp, rp;

  always_ff @(posedge clk) if (push) mem[wp] <= wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assign rdata = mem[rp];
  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) !rst_n || !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) !rst_n || !(pop && empty));

endmodule
