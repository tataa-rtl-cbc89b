// tb_tataa_mode_mux: tests the mode MUX in front of a DMPU (W = 16).
//
// With random inputs in both modes: in MatMul mode the output must be the chained
// record unchanged; in bfloat16 mode each lane must carry the valid bit, the operation
// (FOP_NONE when not valid) and the lane's two operands, with the other fields zero.
module tb_tataa_mode_mux;
  import tataa_pkg::*;

  localparam int W = 16;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  mode_e              mode;
  lane_t [W-1:0]      chain_in, dmpu_top;
  logic               fp_vld;
  fop_e               fp_op;
  logic [W-1:0][15:0] fp_op0, fp_op1;

  tataa_mode_mux #(.W(W)) dut (.*);

  initial begin : watchdog
    #100000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      for (int c = 0; c < W; c++) begin
        chain_in[c] = lane_t'({$urandom, $urandom, $urandom});
        fp_op0[c]   = 16'($urandom);
        fp_op1[c]   = 16'($urandom);
      end
      fp_vld = 1'($urandom);
      fp_op  = fop_e'($urandom_range(2));
      mode   = mode_e'(it % 2);
      #1;
      for (int c = 0; c < W; c++) begin
        if (mode == MODE_MM) check(dmpu_top[c] == chain_in[c], "MatMul mode passes the chain");
        else begin
          check(dmpu_top[c].vld == fp_vld, "valid bit");
          check(dmpu_top[c].op == (fp_vld ? fp_op : FOP_NONE), "operation");
          check(dmpu_top[c].ma == 18'(fp_op0[c]) && dmpu_top[c].mb == 18'(fp_op1[c]), "operands");
          check(dmpu_top[c].ex == 0 && dmpu_top[c].ey == 0 && !dmpu_top[c].of && !dmpu_top[c].uf, "other fields zero");
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
