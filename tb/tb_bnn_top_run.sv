// tb_bnn_top_run: end-to-end run of one bnn_top configuration.
//
// Draws random parameters for the four blocks (tb_ref_pkg::layer_model),
// loads them through the configuration bus, and streams NS random input
// vectors (values in [-1.0, 1.0]) through the network twice: first with the
// scores always taken, where the first sample's latency must be
// REUSE1+REUSE2+REUSE3+REUSE4 cycles and, once the pipeline is full, the
// interval between accepted samples must equal the largest reuse factor;
// then with random input gaps and output stalls. Every score is compared
// with the chained model. Reports counts of checks, failures and of the
// mechanisms seen: output stalls, input back-pressure, several samples in
// flight, ternary zeros, BN overflow wraps, clips and ReLU zeros.
module tb_bnn_top_run import bnn_pkg::*; import tb_ref_pkg::*; #(
  parameter int   N0 = 24, N1 = 12, N2 = 10, N3 = 8, N4 = 5,
  parameter bit   W_TERNARY  = 1'b0,
  parameter act_e HIDDEN_ACT = ACT_BINARY_TANH,
  parameter int   FIX_I = 8,
  parameter int   R1 = 4, R2 = 3, R3 = 2, R4 = 1,
  parameter int   NS = 12
) (
  output int checks,
  output int failures,
  output int n_stall,
  output int n_backpressure,
  output int n_inflight,
  output int n_zero,
  output int n_wrap,
  output int n_clip,
  output int n_relu0,
  output bit done
);
  localparam int FIX_W = 16;
  localparam int FF    = FIX_W - FIX_I;
  localparam in_kind_e HK = (HIDDEN_ACT == ACT_BINARY_TANH)  ? IN_BINARY :
                            (HIDDEN_ACT == ACT_TERNARY_TANH) ? IN_TERNARY : IN_FIXED;
  localparam int RMAX = (R1 > R2 ? (R1 > R3 ? (R1 > R4 ? R1 : R4) : (R3 > R4 ? R3 : R4))
                                 : (R2 > R3 ? (R2 > R4 ? R2 : R4) : (R3 > R4 ? R3 : R4)));

  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic signed [FIX_W-1:0] in_data [N0];
  logic signed [FIX_W-1:0] score [N4];
  int cyc = 0;

  bnn_top #(.N_INPUT(N0), .N_H1(N1), .N_H2(N2), .N_H3(N3), .N_OUTPUT(N4),
            .W_TERNARY(W_TERNARY), .HIDDEN_ACT(HIDDEN_ACT), .FIX_W(FIX_W), .FIX_I(FIX_I),
            .REUSE1(R1), .REUSE2(R2), .REUSE3(R3), .REUSE4(R4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    layer_model m[4];
    cfg_wr_t q[$];
    longint x[NS][], a[], h1[], h2[], h3[], e[NS][];
    int acc_cyc[NS];
    int sent, got, mag;
    checks = 0; failures = 0; done = 0;
    n_stall = 0; n_backpressure = 0; n_inflight = 0;
    mag = (HK == IN_FIXED) ? (1 << FF) / 2 : 1;
    m[0] = new(N0, N1, R1, IN_FIXED, FIX_W, FF, W_TERNARY, HIDDEN_ACT, 1'b0, FF);
    m[1] = new(N1, N2, R2, HK,       FIX_W, FF, W_TERNARY, HIDDEN_ACT, 1'b0, FF);
    m[2] = new(N2, N3, R3, HK,       FIX_W, FF, W_TERNARY, HIDDEN_ACT, 1'b0, FF);
    m[3] = new(N3, N4, R4, HK,       FIX_W, FF, W_TERNARY, HIDDEN_ACT, 1'b1, FF);
    m[0].draw((1 << FF) / 2);
    for (int l = 1; l < 4; l++) m[l].draw(mag);
    for (int l = 0; l < 4; l++) m[l].cfg_list(l, q);
    for (int s = 0; s < NS; s++) begin
      x[s] = new[N0];
      foreach (x[s][i]) x[s][i] = longint'($urandom_range(0, 2 << FF)) - (1 << FF);
      m[0].forward(x[s], a, h1);
      m[1].forward(h1, a, h2);
      m[2].forward(h2, a, h3);
      m[3].forward(h3, a, e[s]);
    end
    n_zero = 0; n_wrap = 0; n_clip = 0; n_relu0 = 0;
    for (int l = 0; l < 4; l++) begin
      n_zero += m[l].n_zero; n_wrap += m[l].n_wrap; n_clip += m[l].n_clip; n_relu0 += m[l].n_relu0;
    end
    for (int i = 0; i < N0; i++) in_data[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (q[k]) begin @(negedge clk); cfg = q[k]; end
    @(negedge clk);
    cfg = '0;
    for (int phase = 0; phase < 2; phase++) begin
      sent = 0; got = 0;
      while (got < NS) begin
        @(negedge clk);
        out_ready = (phase == 0) ? 1'b1 : ($urandom_range(0, 2) != 0);
        in_valid  = (sent < NS) && (phase == 0 || $urandom_range(0, 3) != 0);
        if (sent < NS) for (int i = 0; i < N0; i++) in_data[i] = FIX_W'(x[sent][i]);
        #1;
        if (out_valid && !out_ready) n_stall++;
        if (in_valid && !in_ready && sent > got) n_backpressure++;
        if (sent - got >= 2) n_inflight++;
        if (out_valid && out_ready) begin
          for (int o = 0; o < N4; o++) begin
            checks++;
            if (longint'(score[o]) != e[got][o]) begin
              failures++;
              $display("FAIL top sample %0d score %0d got %0d exp %0d", got, o, score[o], e[got][o]);
            end
          end
          if (phase == 0 && got == 0) begin
            checks++;
            if (cyc - acc_cyc[0] != R1 + R2 + R3 + R4) begin
              failures++;
              $display("FAIL top latency %0d, expected %0d", cyc - acc_cyc[0], R1 + R2 + R3 + R4);
            end
          end
          got++;
        end
        if (in_valid && in_ready) begin
          acc_cyc[sent] = cyc;
          if (phase == 0 && sent >= 6) begin
            checks++;
            if (acc_cyc[sent] - acc_cyc[sent-1] != RMAX) begin
              failures++;
              $display("FAIL top interval %0d, expected %0d", acc_cyc[sent] - acc_cyc[sent-1], RMAX);
            end
          end
          sent++;
        end
      end
      @(negedge clk);
      in_valid = 0;
    end
    done = 1;
  end
endmodule
