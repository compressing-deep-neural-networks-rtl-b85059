// tb_nn_block_run: drives one nn_block configuration through the
// configuration bus and its streams, and checks every output element
// against tb_ref_pkg::layer_model. NS samples go through twice: with the
// output always taken (latency REUSE and interval REUSE checked), then with
// random gaps and stalls. Writes addressed to another layer id are sent too
// and must not disturb the block. Reports its counts on its ports.
module tb_nn_block_run import bnn_pkg::*; import tb_ref_pkg::*; #(
  parameter int       N_IN      = 12,
  parameter int       N_OUT     = 5,
  parameter int       REUSE     = 3,
  parameter in_kind_e IN_KIND   = IN_FIXED,
  parameter bit       W_TERNARY = 1'b0,
  parameter act_e     ACT       = ACT_BINARY_TANH,
  parameter bit       LAST      = 1'b0,
  parameter int       NS        = 10
) (
  output int checks,
  output int failures,
  output int events,
  output bit done
);
  localparam int  FIX_W  = 16;
  localparam int  FRAC   = 8;
  localparam int  IN_B   = in_bits(IN_KIND, FIX_W);
  localparam bit  THRESH = !LAST && (ACT == ACT_BINARY_TANH || ACT == ACT_TERNARY_TANH);
  localparam int  OB     = !THRESH ? FIX_W : (ACT == ACT_TERNARY_TANH ? 2 : 1);
  localparam in_kind_e OK = !THRESH ? IN_FIXED : (ACT == ACT_TERNARY_TANH ? IN_TERNARY : IN_BINARY);

  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [N_IN*IN_B-1:0] in_data = '0;
  logic [N_OUT*OB-1:0] out_data;
  int cyc = 0;

  nn_block #(.LAYER_ID(2), .N_IN(N_IN), .N_OUT(N_OUT), .REUSE(REUSE), .IN_KIND(IN_KIND),
             .FIX_W(FIX_W), .IN_F(FRAC), .W_TERNARY(W_TERNARY), .ACT(ACT), .LAST(LAST),
             .OUT_F(FRAC)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    layer_model m, other;
    cfg_wr_t q[$], qo[$];
    longint x[NS][], e_acc[], e_y[NS][];
    logic [N_OUT*OB-1:0] e_bits;
    int acc_cyc[NS];
    int sent, got;
    checks = 0; failures = 0; events = 0; done = 0;
    m = new(N_IN, N_OUT, REUSE, IN_KIND, FIX_W, FRAC, W_TERNARY, ACT, LAST, FRAC);
    m.draw(IN_KIND == IN_FIXED ? 128 : 1);
    m.cfg_list(2, q);
    other = new(N_IN, N_OUT, REUSE, IN_KIND, FIX_W, FRAC, W_TERNARY, ACT, LAST, FRAC);
    other.draw(1);
    other.cfg_list(1, qo);
    for (int s = 0; s < NS; s++) begin
      x[s] = new[N_IN];
      foreach (x[s][i]) begin
        if (IN_KIND == IN_FIXED)        x[s][i] = longint'($urandom_range(0, 511)) - 256;
        else if (IN_KIND == IN_TERNARY) x[s][i] = longint'($urandom_range(0, 2)) - 1;
        else                            x[s][i] = ($urandom_range(0, 1) != 0) ? 1 : -1;
      end
      m.forward(x[s], e_acc, e_y[s]);
    end
    events = m.n_zero + m.n_wrap + m.n_clip + m.n_relu0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // parameters of this block, then another layer's, which must be ignored
    foreach (q[k])  begin @(negedge clk); cfg = q[k];  end
    foreach (qo[k]) begin @(negedge clk); cfg = qo[k]; end
    @(negedge clk);
    cfg = '0;
    for (int phase = 0; phase < 2; phase++) begin
      sent = 0; got = 0;
      while (got < NS) begin
        @(negedge clk);
        out_ready = (phase == 0) ? 1'b1 : ($urandom_range(0, 2) != 0);
        in_valid  = (sent < NS) && (phase == 0 || $urandom_range(0, 3) != 0);
        if (sent < NS) in_data = (N_IN*IN_B)'(pack(x[sent], IN_KIND, FIX_W));
        #1;
        if (out_valid && out_ready) begin
          e_bits = (N_OUT*OB)'(pack(e_y[got], OK, FIX_W));
          for (int o = 0; o < N_OUT; o++) begin
            checks++;
            if (out_data[o*OB +: OB] !== e_bits[o*OB +: OB]) begin
              failures++;
              $display("FAIL block sample %0d node %0d got %h exp %h", got, o,
                       out_data[o*OB +: OB], e_bits[o*OB +: OB]);
            end
          end
          if (phase == 0) begin
            checks++;
            if (cyc - acc_cyc[got] != REUSE) begin
              failures++;
              $display("FAIL block latency %0d, expected %0d", cyc - acc_cyc[got], REUSE);
            end
          end
          got++;
        end
        if (in_valid && in_ready) begin
          acc_cyc[sent] = cyc;
          sent++;
        end
      end
      @(negedge clk);
      in_valid = 0;
    end
    done = 1;
  end
endmodule
