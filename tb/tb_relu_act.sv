// tb_relu_act: drives random <16,6> values (and the edge values 0, 1.0 and
// 1.0 + 1 LSB) into a ReLU and a clipped ReLU and compares with max(0, x) and
// min(max(0, x), 1.0).
module tb_relu_act;
  localparam int N = 4, W = 16, F = 6;
  logic signed [W-1:0] x [N];
  logic signed [W-1:0] y_r [N];
  logic signed [W-1:0] y_c [N];
  int checks = 0, failures = 0;

  relu_act #(.N(N), .W(W), .F(F), .CLIP(1'b0)) dut_r (.x(x), .y(y_r));
  relu_act #(.N(N), .W(W), .F(F), .CLIP(1'b1)) dut_c (.x(x), .y(y_c));

  task automatic check();
    int er, ec;
    #1;
    for (int i = 0; i < N; i++) begin
      er = (x[i] < 0) ? 0 : int'(x[i]);
      ec = (er > 64) ? 64 : er;
      checks += 2;
      if (int'(y_r[i]) != er) begin failures++; $display("FAIL relu x=%0d got %0d", x[i], y_r[i]); end
      if (int'(y_c[i]) != ec) begin failures++; $display("FAIL clip x=%0d got %0d", x[i], y_c[i]); end
    end
  endtask

  initial begin
    x[0] = 0; x[1] = 64; x[2] = 65; x[3] = -1;
    check();
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N; i++) x[i] = W'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
