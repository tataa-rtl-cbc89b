// tb_tataa_rfx: tests the X register file (RMX0/RMX1, N = 8, depth 512).
//
// Random writes to both buffers and random reads, including a read of the address
// being written in the same cycle, against a reference array. Read data must appear
// one cycle after the address (the old contents when written in that same cycle).
module tb_tataa_rfx;
  localparam int N = 8, D = 512, AW = 9;

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

  logic            we, wsel, rsel;
  logic [AW-1:0]   waddr, raddr;
  logic [32*N-1:0] wdata, rdata;

  tataa_rfx #(.N(N), .D_MAT(D)) dut (.*);

  logic [32*N-1:0] ref_m [2][D];
  logic [32*N-1:0] exp_d;
  bit              exp_v;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    we = 0; wsel = 0; rsel = 0; waddr = 0; raddr = 0; wdata = '0; exp_v = 0;
    // fill both buffers
    for (int b = 0; b < 2; b++) for (int a = 0; a < D; a++) begin
      ref_m[b][a] = {8{$urandom}};
      we <= 1; wsel <= 1'(b); waddr <= AW'(a); wdata <= ref_m[b][a];
      @(posedge clk);
    end
    we <= 0;
    @(posedge clk);
    for (int it = 0; it < 3000; it++) begin
      logic b, rb;
      int   a, ra;
      b  = 1'($urandom); a = int'($urandom_range(D - 1));
      rb = 1'($urandom); ra = (it % 5 == 0) ? a : int'($urandom_range(D - 1));
      if (it % 5 == 0) rb = b;
      begin
        logic            w;
        logic [32*N-1:0] d;
        w = 1'($urandom);
        d = {8{$urandom}};
        we <= w; wsel <= b; waddr <= AW'(a); wdata <= d;
        rsel <= rb; raddr <= AW'(ra);
        exp_d = ref_m[rb][ra];   // contents before this cycle's write
        @(posedge clk);
        #1;
        check(rdata == exp_d, $sformatf("read data at iteration %0d", it));
        if (w) ref_m[b][a] = d;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
