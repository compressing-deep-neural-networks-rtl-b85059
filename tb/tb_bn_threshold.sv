// tb_bn_threshold: loads random thresholds into a binary and a ternary
// bn_threshold, drives random sums (and sums equal to each threshold, to pin
// down which side is inclusive) and compares the codes with
//   binary : +1 (1) if x >= thr0 else -1 (0)
//   ternary: +1 (01) if x > thr1, -1 (11) if x < thr0, else 0 (00).
// Counts how many ternary outputs are 0 and fails if none is.
module tb_bn_threshold;
  localparam int N = 8, W = 10;
  logic clk = 0, rst_n = 0;
  logic we = 0, sel = 0;
  logic [2:0] addr = 0;
  logic [W-1:0] wdata = 0;
  logic signed [W-1:0] acc [N];
  logic [N-1:0] act_b;
  logic [2*N-1:0] act_t;
  int t0 [N], t1 [N];
  int checks = 0, failures = 0, zeros = 0;

  bn_threshold #(.N(N), .ACC_W(W), .TERNARY(1'b0)) dut_b (.clk, .rst_n, .we, .sel, .addr, .wdata, .acc, .act(act_b));
  bn_threshold #(.N(N), .ACC_W(W), .TERNARY(1'b1)) dut_t (.clk, .rst_n, .we, .sel, .addr, .wdata, .acc, .act(act_t));

  always #5 clk = ~clk;

  task automatic check();
    logic [1:0] e;
    #1;
    for (int i = 0; i < N; i++) begin
      checks += 2;
      if (act_b[i] !== (int'(acc[i]) >= t0[i])) begin
        failures++;
        $display("FAIL bin node %0d x=%0d thr=%0d got %b", i, acc[i], t0[i], act_b[i]);
      end
      e = (int'(acc[i]) > t1[i]) ? 2'b01 : (int'(acc[i]) < t0[i]) ? 2'b11 : 2'b00;
      if (e == 2'b00) zeros++;
      if (act_t[i*2 +: 2] !== e) begin
        failures++;
        $display("FAIL ter node %0d x=%0d thr=%0d/%0d got %b", i, acc[i], t0[i], t1[i], act_t[i*2 +: 2]);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      t0[i] = $urandom_range(0, 200) - 150;
      t1[i] = t0[i] + $urandom_range(0, 100);
      @(negedge clk); we = 1; sel = 0; addr = 3'(i); wdata = W'(t0[i]);
      @(negedge clk); we = 1; sel = 1; addr = 3'(i); wdata = W'(t1[i]);
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 3; k++) begin
      for (int i = 0; i < N; i++) acc[i] = W'(k == 0 ? t0[i] : k == 1 ? t1[i] : t1[i] + 1);
      check();
    end
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) acc[i] = W'($urandom_range(0, 400) - 200);
      check();
    end
    checks++;
    if (zeros == 0) failures++;
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
