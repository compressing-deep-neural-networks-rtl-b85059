// tb_bnn_top_full: the network at its default size, the binary MNIST
// classifier (784 inputs, 128-128-128 hidden nodes with binary weights and
// binary tanh, 10 scores, <16, 8>, reuse factor 14 in every layer).
//
// Random parameters are drawn for all four blocks and loaded through the
// configuration bus (5,920 writes). Then NS random images with pixels in
// [0, 1) stream through back to back. Every score is compared with the
// reference model; the first image's latency must be 4 x 14 = 56 cycles and,
// with the pipeline full, images must be accepted every 14 cycles. The
// predicted class (arg-max of the scores) is checked too.
module tb_bnn_top_full;
  import bnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N0 = 784, N1 = 128, N2 = 128, N3 = 128, N4 = 10;
  localparam int R = 14, FF = 8, NS = 8;

  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic signed [15:0] in_data [N0];
  logic signed [15:0] score [N4];
  int cyc = 0;
  int checks = 0, failures = 0;

  bnn_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic int argmax_l(longint v[]);
    int b = 0;
    for (int i = 1; i < v.size(); i++) if (v[i] > v[b]) b = i;
    return b;
  endfunction

  initial begin
    layer_model m[4];
    cfg_wr_t q[$];
    longint x[NS][], a[], h1[], h2[], h3[], e[NS][], got_v[];
    int acc_cyc[NS];
    int sent, got;
    m[0] = new(N0, N1, R, IN_FIXED,  16, FF, 1'b0, ACT_BINARY_TANH, 1'b0, FF);
    m[1] = new(N1, N2, R, IN_BINARY, 16, FF, 1'b0, ACT_BINARY_TANH, 1'b0, FF);
    m[2] = new(N2, N3, R, IN_BINARY, 16, FF, 1'b0, ACT_BINARY_TANH, 1'b0, FF);
    m[3] = new(N3, N4, R, IN_BINARY, 16, FF, 1'b0, ACT_BINARY_TANH, 1'b1, FF);
    m[0].draw(128);
    for (int l = 1; l < 4; l++) m[l].draw(1);
    for (int l = 0; l < 4; l++) m[l].cfg_list(l, q);
    for (int s = 0; s < NS; s++) begin
      x[s] = new[N0];
      foreach (x[s][i]) x[s][i] = ($urandom_range(0, 3) == 0) ? 0 : longint'($urandom_range(0, 255));
      m[0].forward(x[s], a, h1);
      m[1].forward(h1, a, h2);
      m[2].forward(h2, a, h3);
      m[3].forward(h3, a, e[s]);
    end
    for (int i = 0; i < N0; i++) in_data[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (q[k]) begin @(negedge clk); cfg = q[k]; end
    @(negedge clk);
    cfg = '0;
    $display("loaded %0d parameter words", q.size());
    sent = 0; got = 0;
    out_ready = 1;
    while (got < NS) begin
      @(negedge clk);
      in_valid = (sent < NS);
      if (sent < NS) for (int i = 0; i < N0; i++) in_data[i] = 16'(x[sent][i]);
      #1;
      if (out_valid && out_ready) begin
        got_v = new[N4];
        for (int o = 0; o < N4; o++) begin
          got_v[o] = longint'(score[o]);
          checks++;
          if (longint'(score[o]) != e[got][o]) begin
            failures++;
            $display("FAIL image %0d score %0d got %0d exp %0d", got, o, score[o], e[got][o]);
          end
        end
        checks++;
        if (argmax_l(got_v) != argmax_l(e[got])) failures++;
        $display("image %0d: class %0d, latency %0d cycles", got, argmax_l(got_v), cyc - acc_cyc[got]);
        if (got == 0) begin
          checks++;
          if (cyc - acc_cyc[0] != 4 * R) begin
            failures++;
            $display("FAIL latency %0d, expected %0d", cyc - acc_cyc[0], 4 * R);
          end
        end
        got++;
      end
      if (in_valid && in_ready) begin
        acc_cyc[sent] = cyc;
        if (sent >= 1) begin
          checks++;
          if (acc_cyc[sent] - acc_cyc[sent-1] != R) begin
            failures++;
            $display("FAIL interval %0d, expected %0d", acc_cyc[sent] - acc_cyc[sent-1], R);
          end
        end
        sent++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
