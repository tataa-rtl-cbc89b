// tb_tataa_rfy: tests a Y register file (W = 16, depth 512: the size of DMRFY0).
//
// Random simultaneous writes to banks a and b and two random reads from either bank,
// against a reference model; read data must appear one cycle after the address, with
// the old contents when the same word is written in that cycle.
module tb_tataa_rfy;
  localparam int W = 16, D = 512, AW = 9;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic            wa_en, wb_en, r0_bank, r1_bank;
  logic [AW-1:0]   wa_addr, wb_addr, r0_addr, r1_addr;
  logic [16*W-1:0] wa_data, wb_data, r0_data, r1_data;

  tataa_rfy #(.W(W), .DEPTH(D)) dut (.*);

  logic [16*W-1:0] ref_m [2][D];

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wa_en = 0; wb_en = 0;
    for (int a = 0; a < D; a++) begin
      ref_m[0][a] = {8{$urandom}};
      ref_m[1][a] = {8{$urandom}};
      wa_en <= 1; wa_addr <= AW'(a); wa_data <= ref_m[0][a];
      wb_en <= 1; wb_addr <= AW'(a); wb_data <= ref_m[1][a];
      @(posedge clk);
    end
    for (int it = 0; it < 3000; it++) begin
      logic            ea, eb, b0, b1;
      int              aa, ab, a0, a1;
      logic [16*W-1:0] da, db, e0, e1;
      ea = 1'($urandom); eb = 1'($urandom); b0 = 1'($urandom); b1 = 1'($urandom);
      aa = int'($urandom_range(D - 1)); ab = int'($urandom_range(D - 1));
      a0 = (it % 4 == 0) ? aa : int'($urandom_range(D - 1));
      a1 = (it % 4 == 1) ? ab : int'($urandom_range(D - 1));
      da = {8{$urandom}}; db = {8{$urandom}};
      wa_en <= ea; wa_addr <= AW'(aa); wa_data <= da;
      wb_en <= eb; wb_addr <= AW'(ab); wb_data <= db;
      r0_bank <= b0; r0_addr <= AW'(a0);
      r1_bank <= b1; r1_addr <= AW'(a1);
      e0 = ref_m[b0][a0];
      e1 = ref_m[b1][a1];
      @(posedge clk);
      #1;
      check(r0_data == e0, $sformatf("read port 0 at iteration %0d", it));
      check(r1_data == e1, $sformatf("read port 1 at iteration %0d", it));
      if (ea) ref_m[0][aa] = da;
      if (eb) ref_m[1][ab] = db;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
