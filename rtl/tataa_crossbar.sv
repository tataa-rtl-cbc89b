// tataa_crossbar: routes the two load ports and the vector write-back to the
// register-file write ports of a core.
//
// Each load port presents at most one write command per cycle: a target (RFX, or
// bank a/b of the RFY in front of DMPU wc_dmpu), an address and a memory word. The
// execution unit presents bfloat16 results for all DMPUs at once (ex_wb_*), written to
// the same bank and address of every RFY. Every register-file write port takes the
// command aimed at it, whichever source it comes from; port 0 has priority over port 1
// and both over the write-back, although the controller never lets two sources aim at
// the same bank (an assertion checks this). Purely combinational.
//
// Follows the paper (Sec. 4.2: the memory ports are not fixed to RFX or RFY but routed
// by a crossbar). Own choices: the command format and the priority order.
module tataa_crossbar #(
  parameter int N     = 8,
  parameter int W     = 16,
  parameter int MEM_W = 16 * W
) (
  input  logic                          clk,
  input  logic                          rst_n,   // only gates the assertions
  input  logic [1:0]                    wc_valid,
  input  logic [1:0]                    wc_to_rfx,
  input  logic [1:0]                    wc_sel,
  input  logic [1:0][7:0]               wc_dmpu,
  input  logic [1:0][15:0]              wc_addr,
  input  logic [1:0][MEM_W-1:0]         wc_data,
  input  logic                          ex_wb_en,
  input  logic                          ex_wb_bank,
  input  logic [15:0]                   ex_wb_addr,
  input  logic [N-1:0][16*W-1:0]        ex_wb_data,
  output logic                          rfx_we,
  output logic                          rfx_wsel,
  output logic [15:0]                   rfx_waddr,
  output logic [32*N-1:0]               rfx_wdata,
  output logic [N-1:0]                  rfy_wa_en,
  output logic [N-1:0][15:0]            rfy_wa_addr,
  output logic [N-1:0][16*W-1:0]        rfy_wa_data,
  output logic [N-1:0]                  rfy_wb_en,
  output logic [N-1:0][15:0]            rfy_wb_addr,
  output logic [N-1:0][16*W-1:0]        rfy_wb_data
);

  always_comb begin
    rfx_we    = 1'b0;
    rfx_wsel  = 1'b0;
    rfx_waddr = '0;
    rfx_wdata = '0;
    for (int p = 1; p >= 0; p--) begin
      if (wc_valid[p] && wc_to_rfx[p]) begin
        rfx_we    = 1'b1;
        rfx_wsel  = wc_sel[p];
        rfx_waddr = wc_addr[p];
        rfx_wdata = (32*N)'(wc_data[p]);
      end
    end
    for (int d = 0; d < N; d++) begin
      rfy_wa_en[d]   = ex_wb_en && !ex_wb_bank;
      rfy_wa_addr[d] = ex_wb_addr;
      rfy_wa_data[d] = ex_wb_data[d];
      rfy_wb_en[d]   = ex_wb_en && ex_wb_bank;
      rfy_wb_addr[d] = ex_wb_addr;
      rfy_wb_data[d] = ex_wb_data[d];
      for (int p = 1; p >= 0; p--) begin
        if (wc_valid[p] && !wc_to_rfx[p] && int'(wc_dmpu[p]) == d) begin
          if (!wc_sel[p]) begin
            rfy_wa_en[d]   = 1'b1;
            rfy_wa_addr[d] = wc_addr[p];
            rfy_wa_data[d] = (16*W)'(wc_data[p]);
          end else begin
            rfy_wb_en[d]   = 1'b1;
            rfy_wb_addr[d] = wc_addr[p];
            rfy_wb_data[d] = (16*W)'(wc_data[p]);
          end
        end
      end
    end
  end

  // no two sources may aim at the same register-file port in one cycle
  logic both_rfx, both_rfy;
  assign both_rfx = &wc_valid && &wc_to_rfx;
  assign both_rfy = &wc_valid && !(|wc_to_rfx) && wc_dmpu[0] == wc_dmpu[1] && wc_sel[0] == wc_sel[1];
  a_no_rfx_clash: assert property (@(posedge clk) !rst_n || !both_rfx);
  a_no_rfy_clash: assert property (@(posedge clk) !rst_n || !both_rfy);
  a_no_wb_clash:  assert property (@(posedge clk) !rst_n || !(ex_wb_en && |(wc_valid & ~wc_to_rfx)));

endmodule
