// tb_tataa_mem: behavioural external memory for one TATAA core (testbench only).
//
// Stands in for the board's high-bandwidth memory and its channels. It serves the
// core's instruction port from imem (64-bit words) and its two load ports and write
// port from mem (MEM_W-bit words). Each request channel is accepted with a random
// ready (about 3 in 4 cycles when STALL is set) and answered LAT cycles later, in order,
// with any number of requests outstanding. Writes land in mem when accepted; nwr
// counts them. The testbench fills and inspects imem/mem hierarchically.
module tb_tataa_mem #(
  parameter int MEM_W = 64,
  parameter int DEPTH = 4096,
  parameter int LAT   = 3,
  parameter bit STALL = 1'b1
) (
  input  logic                  clk,
  input  logic                  if_req_valid,
  output logic                  if_req_ready,
  input  logic [31:0]           if_req_addr,
  output logic                  if_rsp_valid,
  output logic [63:0]           if_rsp_data,
  input  logic [1:0]            rd_req_valid,
  output logic [1:0]            rd_req_ready,
  input  logic [1:0][31:0]      rd_req_addr,
  output logic [1:0]            rd_rsp_valid,
  output logic [1:0][MEM_W-1:0] rd_rsp_data,
  input  logic                  wr_valid,
  output logic                  wr_ready,
  input  logic [31:0]           wr_addr,
  input  logic [MEM_W-1:0]      wr_data
);

  logic [63:0]      imem [256];
  logic [MEM_W-1:0] mem  [DEPTH];
  int               nwr;
  longint           now;

  int     iq_a[$];
  longint iq_t[$];
  int     q_a0[$], q_a1[$];
  longint q_t0[$], q_t1[$];

  initial begin
    nwr          = 0;
    now          = 0;
    if_req_ready = 1'b0;
    if_rsp_valid = 1'b0;
    if_rsp_data  = '0;
    rd_req_ready = '0;
    rd_rsp_valid = '0;
    rd_rsp_data  = '0;
    wr_ready     = 1'b0;
    for (int i = 0; i < 256; i++) imem[i] = '0;
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  function automatic logic rdy();
    return !STALL || ($urandom_range(3) != 0);
  endfunction

  always @(posedge clk) begin
    now++;
    // instruction port
    if (if_rsp_valid) begin void'(iq_a.pop_front()); void'(iq_t.pop_front()); end
    if (if_req_valid && if_req_ready) begin iq_a.push_back(int'(if_req_addr)); iq_t.push_back(now + longint'(LAT)); end
    if (iq_a.size() > 0 && iq_t[0] <= now + 1) begin
      if_rsp_valid <= 1'b1;
      if_rsp_data  <= imem[iq_a[0] % 256];
    end else begin
      if_rsp_valid <= 1'b0;
    end
    if_req_ready <= rdy();
    // load ports
    if (rd_rsp_valid[0]) begin void'(q_a0.pop_front()); void'(q_t0.pop_front()); end
    if (rd_rsp_valid[1]) begin void'(q_a1.pop_front()); void'(q_t1.pop_front()); end
    if (rd_req_valid[0] && rd_req_ready[0]) begin q_a0.push_back(int'(rd_req_addr[0])); q_t0.push_back(now + longint'(LAT)); end
    if (rd_req_valid[1] && rd_req_ready[1]) begin q_a1.push_back(int'(rd_req_addr[1])); q_t1.push_back(now + longint'(LAT)); end
    // after a pop the next head is presented; a fresh head waits for its latency
    if (q_a0.size() > 0 && q_t0[0] <= now + 1) begin
      rd_rsp_valid[0] <= 1'b1;
      rd_rsp_data[0]  <= mem[q_a0[0] % DEPTH];
    end else rd_rsp_valid[0] <= 1'b0;
    if (q_a1.size() > 0 && q_t1[0] <= now + 1) begin
      rd_rsp_valid[1] <= 1'b1;
      rd_rsp_data[1]  <= mem[q_a1[0] % DEPTH];
    end else rd_rsp_valid[1] <= 1'b0;
    rd_req_ready <= {rdy(), rdy()};
    // write port
    if (wr_valid && wr_ready) begin
      mem[int'(wr_addr) % DEPTH] = wr_data;
      nwr++;
    end
    wr_ready <= rdy();
  end

endmodule
