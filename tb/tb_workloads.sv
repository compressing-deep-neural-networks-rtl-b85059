// tb_workloads: the jet-tagging network configurations of the reference
// study, each at its published layer sizes, fixed-point format and
// initiation interval, with random parameters:
//   jet BNN             16-64-32-32-5,      binary, binary tanh,   <16,6>,  II 1
//   jet TNN             16-64-32-32-5,      ternary, ternary tanh, <16,6>,  II 1
//   jet hybrid TNN      16-64-32-32-5,      ternary, clipped ReLU, <16,6>,  II 1
//   jet best BNN        16-448-224-224-5,   binary, binary tanh,   <16,6>,  II 16
// Each streams a few samples through tb_bnn_top_run, which checks every
// score, the latency (sum of the reuse factors) and the interval.
// The MNIST TNN and hybrid variants are exercised at reduced sizes in
// tb_bnn_top, and the default MNIST BNN runs at full size in
// tb_bnn_top_full. The 256-wide MNIST BNN differs from the default only in
// its sizes; the wider jet network here covers that shape.
module tb_workloads;
  import bnn_pkg::*;
  localparam int K = 4;
  int c[K], f[K], st[K], bp[K], fl[K], z[K], w[K], cl[K], r0[K];
  bit d[K];

  tb_bnn_top_run #(.N0(16), .N1(64), .N2(32), .N3(32), .N4(5), .W_TERNARY(1'b0),
                   .HIDDEN_ACT(ACT_BINARY_TANH), .FIX_I(6), .R1(1), .R2(1), .R3(1), .R4(1), .NS(10))
    u_jet_bnn (c[0], f[0], st[0], bp[0], fl[0], z[0], w[0], cl[0], r0[0], d[0]);
  tb_bnn_top_run #(.N0(16), .N1(64), .N2(32), .N3(32), .N4(5), .W_TERNARY(1'b1),
                   .HIDDEN_ACT(ACT_TERNARY_TANH), .FIX_I(6), .R1(1), .R2(1), .R3(1), .R4(1), .NS(10))
    u_jet_tnn (c[1], f[1], st[1], bp[1], fl[1], z[1], w[1], cl[1], r0[1], d[1]);
  tb_bnn_top_run #(.N0(16), .N1(64), .N2(32), .N3(32), .N4(5), .W_TERNARY(1'b1),
                   .HIDDEN_ACT(ACT_CLIPPED_RELU), .FIX_I(6), .R1(1), .R2(1), .R3(1), .R4(1), .NS(10))
    u_jet_htnn (c[2], f[2], st[2], bp[2], fl[2], z[2], w[2], cl[2], r0[2], d[2]);
  tb_bnn_top_run #(.N0(16), .N1(448), .N2(224), .N3(224), .N4(5), .W_TERNARY(1'b0),
                   .HIDDEN_ACT(ACT_BINARY_TANH), .FIX_I(6), .R1(16), .R2(16), .R3(16), .R4(16), .NS(8))
    u_jet_best_bnn (c[3], f[3], st[3], bp[3], fl[3], z[3], w[3], cl[3], r0[3], d[3]);

  initial begin
    int checks, failures;
    bit all;
    do begin
      #1000;
      all = 1;
      for (int i = 0; i < K; i++) all &= d[i];
    end while (!all);
    checks = 0; failures = 0;
    for (int i = 0; i < K; i++) begin
      $display("workload %0d: checks=%0d failures=%0d", i, c[i], f[i]);
      checks += c[i]; failures += f[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
