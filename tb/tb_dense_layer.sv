// tb_dense_layer: runs dense_layer in three configurations: binary inputs
// with binary weights (the XNOR path, with a padded last chunk), fixed-point
// inputs with ternary weights, and ternary inputs with binary weights (one
// sample per cycle, REUSE = 1). See tb_dense_run for what is checked.
module tb_dense_layer;
  import bnn_pkg::*;
  int c0, f0, s0, c1, f1, s1, c2, f2, s2;
  bit d0, d1, d2;
  int checks, failures;

  tb_dense_run #(.N_IN(20), .N_OUT(6), .REUSE(3), .IN_KIND(IN_BINARY),  .W_TERNARY(1'b0))
    u0 (.checks(c0), .failures(f0), .stalls(s0), .done(d0));
  tb_dense_run #(.N_IN(10), .N_OUT(4), .REUSE(4), .IN_KIND(IN_FIXED),   .W_TERNARY(1'b1))
    u1 (.checks(c1), .failures(f1), .stalls(s1), .done(d1));
  tb_dense_run #(.N_IN(9),  .N_OUT(5), .REUSE(1), .IN_KIND(IN_TERNARY), .W_TERNARY(1'b0))
    u2 (.checks(c2), .failures(f2), .stalls(s2), .done(d2));

  initial begin
    wait (d0 && d1 && d2);
    checks = c0 + c1 + c2 + 3;
    failures = f0 + f1 + f2;
    if (s0 == 0) failures++;
    if (s1 == 0) failures++;
    if (s2 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
