// tb_dense_run: drives one dense_layer configuration and checks it against
// tb_ref_pkg::layer_model. Loads random weights, then runs NS samples twice:
// first with the output always taken, checking every sum, the latency
// (result valid REUSE cycles after the cycle the input is accepted in) and the initiation interval (REUSE
// cycles between back-to-back accepts); then with random input gaps and
// output stalls, checking every sum. Reports its counts on its ports.
module tb_dense_run import bnn_pkg::*; import tb_ref_pkg::*; #(
  parameter int       N_IN      = 20,
  parameter int       N_OUT     = 6,
  parameter int       REUSE     = 3,
  parameter in_kind_e IN_KIND   = IN_BINARY,
  parameter bit       W_TERNARY = 1'b0,
  parameter int       NS        = 8
) (
  output int checks,
  output int failures,
  output int stalls,
  output bit done
);
  localparam int FIX_W = 16;
  localparam int IN_B  = in_bits(IN_KIND, FIX_W);
  localparam int CH    = (N_IN + REUSE - 1) / REUSE;
  localparam int WB    = W_TERNARY ? 2 : 1;
  localparam int ACC_W = acc_width(IN_KIND, FIX_W, N_IN);
  localparam int WAW   = clog2i(REUSE * N_OUT) > 0 ? clog2i(REUSE * N_OUT) : 1;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [N_IN*IN_B-1:0] in_data = '0;
  logic w_we = 0;
  logic [WAW-1:0] w_addr = '0;
  logic [CH*WB-1:0] w_data = '0;
  logic signed [ACC_W-1:0] acc [N_OUT];
  int cyc = 0;

  dense_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .REUSE(REUSE), .IN_KIND(IN_KIND),
                .FIX_W(FIX_W), .W_TERNARY(W_TERNARY)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    layer_model m;
    cfg_wr_t q[$];
    longint x[NS][], e_acc[NS][], e_y[];
    int acc_cyc[NS];
    int sent, got, mag;
    checks = 0; failures = 0; stalls = 0; done = 0;
    mag = (IN_KIND == IN_FIXED) ? 256 : 1;
    m = new(N_IN, N_OUT, REUSE, IN_KIND, FIX_W, 8, W_TERNARY, ACT_RELU, 1'b1, 8);
    m.draw(mag);
    m.cfg_list(0, q);
    for (int s = 0; s < NS; s++) begin
      x[s] = new[N_IN];
      foreach (x[s][i]) begin
        if (IN_KIND == IN_FIXED)        x[s][i] = longint'($urandom_range(0, 1023)) - 512;
        else if (IN_KIND == IN_TERNARY) x[s][i] = longint'($urandom_range(0, 2)) - 1;
        else                            x[s][i] = ($urandom_range(0, 1) != 0) ? 1 : -1;
      end
      m.forward(x[s], e_acc[s], e_y);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (q[k]) if (q[k].sel == CFG_WEIGHT) begin
      @(negedge clk);
      w_we = 1; w_addr = WAW'(q[k].addr); w_data = (CH*WB)'(q[k].data);
    end
    @(negedge clk);
    w_we = 0;
    for (int phase = 0; phase < 2; phase++) begin
      sent = 0; got = 0;
      while (got < NS) begin
        @(negedge clk);
        out_ready = (phase == 0) ? 1'b1 : ($urandom_range(0, 2) != 0);
        in_valid  = (sent < NS) && (phase == 0 || $urandom_range(0, 3) != 0);
        if (sent < NS) in_data = (N_IN*IN_B)'(pack(x[sent], IN_KIND, FIX_W));
        #1;
        if (out_valid && !out_ready) stalls++;
        if (out_valid && out_ready) begin
          for (int o = 0; o < N_OUT; o++) begin
            checks++;
            if (longint'(acc[o]) != e_acc[got][o]) begin
              failures++;
              $display("FAIL dense sample %0d node %0d got %0d exp %0d", got, o, acc[o], e_acc[got][o]);
            end
          end
          if (phase == 0) begin
            checks++;
            if (cyc - acc_cyc[got] != REUSE) begin
              failures++;
              $display("FAIL latency %0d, expected %0d", cyc - acc_cyc[got], REUSE);
            end
          end
          got++;
        end
        if (in_valid && in_ready) begin
          acc_cyc[sent] = cyc;
          if (phase == 0 && sent > 0) begin
            checks++;
            if (acc_cyc[sent] - acc_cyc[sent-1] != REUSE) begin
              failures++;
              $display("FAIL II %0d, expected %0d", acc_cyc[sent] - acc_cyc[sent-1], REUSE);
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
