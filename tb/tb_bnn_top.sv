// tb_bnn_top: end-to-end test of the network in its four hidden-layer
// variants, at reduced layer sizes: binary weights with binary tanh (BNN),
// ternary weights with ternary tanh (TNN), binary weights with ReLU (hybrid
// BNN) and ternary weights with clipped ReLU (hybrid TNN); each with its own
// reuse factors and fixed-point format. Every score is checked against the
// reference model, and each mechanism must have happened at least once:
// output stall, input back-pressure, overlapping samples, ternary 0
// activation, BN overflow wrap, ReLU zero and clip.
module tb_bnn_top;
  import bnn_pkg::*;
  int c[4], f[4], st[4], bp[4], fl[4], z[4], w[4], cl[4], r0[4];
  bit d[4];
  int checks, failures;

  tb_bnn_top_run #(.N0(24), .N1(12), .N2(10), .N3(8), .N4(5), .W_TERNARY(1'b0),
                   .HIDDEN_ACT(ACT_BINARY_TANH), .FIX_I(8), .R1(4), .R2(3), .R3(2), .R4(1))
    u_bnn (c[0], f[0], st[0], bp[0], fl[0], z[0], w[0], cl[0], r0[0], d[0]);
  tb_bnn_top_run #(.N0(20), .N1(16), .N2(8), .N3(8), .N4(4), .W_TERNARY(1'b1),
                   .HIDDEN_ACT(ACT_TERNARY_TANH), .FIX_I(6), .R1(2), .R2(5), .R3(1), .R4(2))
    u_tnn (c[1], f[1], st[1], bp[1], fl[1], z[1], w[1], cl[1], r0[1], d[1]);
  tb_bnn_top_run #(.N0(16), .N1(10), .N2(10), .N3(6), .N4(5), .W_TERNARY(1'b0),
                   .HIDDEN_ACT(ACT_RELU), .FIX_I(10), .R1(3), .R2(3), .R3(3), .R4(3))
    u_hbnn (c[2], f[2], st[2], bp[2], fl[2], z[2], w[2], cl[2], r0[2], d[2]);
  tb_bnn_top_run #(.N0(16), .N1(10), .N2(8), .N3(8), .N4(5), .W_TERNARY(1'b1),
                   .HIDDEN_ACT(ACT_CLIPPED_RELU), .FIX_I(10), .R1(1), .R2(1), .R3(1), .R4(1))
    u_htnn (c[3], f[3], st[3], bp[3], fl[3], z[3], w[3], cl[3], r0[3], d[3]);

  task automatic need(string what, int n);
    checks++;
    $display("mechanism %-26s seen %0d times", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
  endtask

  initial begin
    wait (d[0] && d[1] && d[2] && d[3]);
    checks = 0; failures = 0;
    for (int i = 0; i < 4; i++) begin checks += c[i]; failures += f[i]; end
    need("output stall",            st[0] + st[1] + st[2] + st[3]);
    need("input back-pressure",     bp[0] + bp[1] + bp[2] + bp[3]);
    need("overlapping samples",     fl[0] + fl[1] + fl[2] + fl[3]);
    need("ternary zero activation", z[1]);
    need("BN overflow wrap",        w[0] + w[1] + w[2] + w[3]);
    need("ReLU zero",               r0[2] + r0[3]);
    need("clipped ReLU clip",       cl[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3], 1);
    $finish;
  end
endmodule
