// tb_tataa_crossbar: tests the register-file write crossbar (N = 8, W = 16).
//
// Random legal combinations of the two load-port commands (RFX or an RFY bank of any
// DMPU, never two commands to the same port) and of the vector write-back are applied;
// every RFX and RFY write port must carry exactly the command aimed at it, or nothing.
module tb_tataa_crossbar;
  localparam int N = 8, W = 16, MW = 16 * W;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic [1:0]             wc_valid, wc_to_rfx, wc_sel;
  logic [1:0][7:0]        wc_dmpu;
  logic [1:0][15:0]       wc_addr;
  logic [1:0][MW-1:0]     wc_data;
  logic                   ex_wb_en, ex_wb_bank;
  logic [15:0]            ex_wb_addr;
  logic [N-1:0][16*W-1:0] ex_wb_data;
  logic                   rfx_we, rfx_wsel;
  logic [15:0]            rfx_waddr;
  logic [32*N-1:0]        rfx_wdata;
  logic [N-1:0]           rfy_wa_en, rfy_wb_en;
  logic [N-1:0][15:0]     rfy_wa_addr, rfy_wb_addr;
  logic [N-1:0][16*W-1:0] rfy_wa_data, rfy_wb_data;

  tataa_crossbar #(.N(N), .W(W)) dut (.*);

  initial begin : watchdog
    #1000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      bit ok;
      // draw until legal
      do begin
        for (int p = 0; p < 2; p++) begin
          wc_valid[p]  = 1'($urandom);
          wc_to_rfx[p] = ($urandom_range(3) == 0);
          wc_sel[p]    = 1'($urandom);
          wc_dmpu[p]   = 8'($urandom_range(N - 1));
          wc_addr[p]   = 16'($urandom);
          wc_data[p]   = {8{$urandom}};
        end
        ex_wb_en   = ($urandom_range(3) == 0);
        ex_wb_bank = 1'($urandom);
        ex_wb_addr = 16'($urandom);
        for (int d = 0; d < N; d++) ex_wb_data[d] = {8{$urandom}};
        ok = !(&wc_valid && &wc_to_rfx) &&
             !(&wc_valid && !(|wc_to_rfx) && wc_dmpu[0] == wc_dmpu[1] && wc_sel[0] == wc_sel[1]) &&
             !(ex_wb_en && |(wc_valid & ~wc_to_rfx));
      end while (!ok);
      #1;
      // RFX
      begin
        int p;
        p = (wc_valid[0] && wc_to_rfx[0]) ? 0 : (wc_valid[1] && wc_to_rfx[1]) ? 1 : -1;
        check(rfx_we == (p >= 0), "RFX write enable");
        if (p >= 0) check(rfx_wsel == wc_sel[p] && rfx_waddr == wc_addr[p] && rfx_wdata == wc_data[p], "RFX command");
      end
      // RFY banks
      for (int d = 0; d < N; d++) for (int b = 0; b < 2; b++) begin
        int p;
        bit en;
        logic [15:0] a;
        logic [16*W-1:0] dd;
        p = -1;
        for (int q = 0; q < 2; q++)
          if (wc_valid[q] && !wc_to_rfx[q] && int'(wc_dmpu[q]) == d && int'(wc_sel[q]) == b) p = q;
        en = (p >= 0) || (ex_wb_en && int'(ex_wb_bank) == b);
        a  = (p >= 0) ? wc_addr[p] : ex_wb_addr;
        dd = (p >= 0) ? wc_data[p] : ex_wb_data[d];
        if (b == 0) begin
          check(rfy_wa_en[d] == en, $sformatf("RFY%0d bank a enable", d));
          if (en) check(rfy_wa_addr[d] == a && rfy_wa_data[d] == dd, $sformatf("RFY%0d bank a command", d));
        end else begin
          check(rfy_wb_en[d] == en, $sformatf("RFY%0d bank b enable", d));
          if (en) check(rfy_wb_addr[d] == a && rfy_wb_data[d] == dd, $sformatf("RFY%0d bank b command", d));
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
