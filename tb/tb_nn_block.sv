// tb_nn_block: runs nn_block in its shapes: binary tanh (merged BN
// threshold) on fixed inputs, ternary tanh on ternary inputs with ternary
// weights, ReLU and clipped ReLU (explicit BN) on binary inputs, and the last
// block (BN, no activation). Fails if no configuration with explicit BN saw a
// wrap, clip or ReLU zero, or the ternary one produced no 0.
module tb_nn_block;
  import bnn_pkg::*;
  int c[5], f[5], e[5];
  bit d[5];
  int checks, failures;

  tb_nn_block_run #(.N_IN(12), .N_OUT(5), .REUSE(3), .IN_KIND(IN_FIXED),   .W_TERNARY(1'b0), .ACT(ACT_BINARY_TANH))
    u0 (.checks(c[0]), .failures(f[0]), .events(e[0]), .done(d[0]));
  tb_nn_block_run #(.N_IN(16), .N_OUT(6), .REUSE(4), .IN_KIND(IN_TERNARY), .W_TERNARY(1'b1), .ACT(ACT_TERNARY_TANH))
    u1 (.checks(c[1]), .failures(f[1]), .events(e[1]), .done(d[1]));
  tb_nn_block_run #(.N_IN(20), .N_OUT(8), .REUSE(2), .IN_KIND(IN_BINARY),  .W_TERNARY(1'b0), .ACT(ACT_RELU))
    u2 (.checks(c[2]), .failures(f[2]), .events(e[2]), .done(d[2]));
  tb_nn_block_run #(.N_IN(20), .N_OUT(8), .REUSE(5), .IN_KIND(IN_BINARY),  .W_TERNARY(1'b1), .ACT(ACT_CLIPPED_RELU))
    u3 (.checks(c[3]), .failures(f[3]), .events(e[3]), .done(d[3]));
  tb_nn_block_run #(.N_IN(10), .N_OUT(4), .REUSE(1), .IN_KIND(IN_BINARY),  .W_TERNARY(1'b0), .ACT(ACT_BINARY_TANH), .LAST(1'b1))
    u4 (.checks(c[4]), .failures(f[4]), .events(e[4]), .done(d[4]));

  initial begin
    wait (d[0] && d[1] && d[2] && d[3] && d[4]);
    checks = 0; failures = 0;
    for (int i = 0; i < 5; i++) begin checks += c[i]; failures += f[i]; end
    for (int i = 1; i < 4; i++) begin
      checks++;
      if (e[i] == 0) begin failures++; $display("FAIL configuration %0d saw no zero/clip/wrap", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3] + c[4], 1);
    $finish;
  end
endmodule
