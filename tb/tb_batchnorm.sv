// tb_batchnorm: loads random per-node scale and shift, drives random sums and
// compares y with ((x * s) >> (ACC_F + 10 - OUT_F)) + b, truncated toward
// minus infinity and wrapped to OUT_W bits. Also checks the reset values
// (scale 1.0, shift 0) and that at least one result overflowed and wrapped.
module tb_batchnorm;
  import tb_ref_pkg::wrap;
  localparam int N = 6, AW = 14, AF = 4, OW = 12, OF = 6;
  logic clk = 0, rst_n = 0;
  logic we = 0, sel = 0;
  logic [2:0] addr = 0;
  logic [15:0] wdata = 0;
  logic signed [AW-1:0] acc [N];
  logic signed [OW-1:0] y [N];
  longint sc [N], sh [N];
  int checks = 0, failures = 0, wraps = 0;

  batchnorm #(.N(N), .ACC_W(AW), .ACC_F(AF), .OUT_W(OW), .OUT_F(OF)) dut (.*);

  always #5 clk = ~clk;

  task automatic check();
    longint p;
    #1;
    for (int i = 0; i < N; i++) begin
      p = ((longint'(acc[i]) * sc[i]) >>> (AF + 10 - OF)) + sh[i];
      if (wrap(p, OW) != p) wraps++;
      checks++;
      if (longint'(y[i]) != wrap(p, OW)) begin
        failures++;
        $display("FAIL node %0d x=%0d s=%0d b=%0d got %0d exp %0d", i, acc[i], sc[i], sh[i], y[i], wrap(p, OW));
      end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin sc[i] = 1024; sh[i] = 0; acc[i] = AW'($urandom_range(0, 4000) - 2000); end
    repeat (2) @(negedge clk);
    rst_n = 1;
    check();
    for (int i = 0; i < N; i++) begin
      sc[i] = longint'($urandom_range(0, 8191)) - 4096;
      sh[i] = longint'($urandom_range(0, 1023)) - 512;
      @(negedge clk); we = 1; sel = 0; addr = 3'(i); wdata = 16'(sc[i]);
      @(negedge clk); we = 1; sel = 1; addr = 3'(i); wdata = 16'(sh[i]);
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N; i++) acc[i] = AW'($urandom_range(0, 16383) - 8192);
      check();
    end
    checks++;
    if (wraps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
