// nn_block: one block of the binary/ternary MLP: dense layer, batch
// normalisation and activation.
//
// The network is a chain of these blocks. Depending on ACT and LAST the
// block takes one of three shapes:
//   * hidden, binary or ternary tanh : dense_layer -> bn_threshold, the BN
//     merged into one or two comparisons per node; output 1 or 2 bits/node;
//   * hidden, ReLU or clipped ReLU   : dense_layer -> batchnorm -> relu_act;
//     output fixed point <OUT_W, OUT_W-OUT_F> per node;
//   * last block (LAST = 1)          : dense_layer -> batchnorm, no
//     activation; output fixed point scores.
// The block shapes follow the design; the block holds no pipeline register
// of its own, so its timing is the dense layer's: REUSE cycles from input
// accepted to output valid, one sample every REUSE cycles.
//
// Interface: valid/ready stream in and out; in_data packed N_IN elements of
// IN_B bits; out_data packed N_OUT elements of OB bits (element i at
// [i*OB +: OB]). Parameters are written through the shared configuration
// bus; the block reacts to writes whose layer field equals LAYER_ID.
module nn_block import bnn_pkg::*; #(
  parameter  int       LAYER_ID  = 0,
  parameter  int       N_IN      = 784,
  parameter  int       N_OUT     = 128,
  parameter  int       REUSE     = 14,
  parameter  in_kind_e IN_KIND   = IN_FIXED,
  parameter  int       FIX_W     = 16,
  parameter  int       IN_F      = 8,
  parameter  bit       W_TERNARY = 1'b0,
  parameter  act_e     ACT       = ACT_BINARY_TANH,
  parameter  bit       LAST      = 1'b0,
  parameter  int       OUT_F     = 8,
  localparam int       IN_B      = in_bits(IN_KIND, FIX_W),
  localparam bit       THRESH    = !LAST && (ACT == ACT_BINARY_TANH || ACT == ACT_TERNARY_TANH),
  localparam int       OB        = !THRESH ? FIX_W : (ACT == ACT_TERNARY_TANH ? 2 : 1),
  localparam int       ACC_W     = acc_width(IN_KIND, FIX_W, N_IN),
  localparam int       ACC_F     = (IN_KIND == IN_FIXED) ? IN_F : 0,
  localparam int       CH        = (N_IN + REUSE - 1) / REUSE,
  localparam int       WB        = W_TERNARY ? 2 : 1,
  localparam int       WAW       = clog2i(REUSE * N_OUT) > 0 ? clog2i(REUSE * N_OUT) : 1,
  localparam int       NAW       = clog2i(N_OUT) > 0 ? clog2i(N_OUT) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_wr_t               cfg,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [N_IN*IN_B-1:0]  in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [N_OUT*OB-1:0]   out_data
);

  logic                    mine;
  logic signed [ACC_W-1:0] acc [N_OUT];

  assign mine = cfg.en && (int'(cfg.layer) == LAYER_ID);

  dense_layer #(
    .N_IN(N_IN), .N_OUT(N_OUT), .REUSE(REUSE), .IN_KIND(IN_KIND),
    .FIX_W(FIX_W), .W_TERNARY(W_TERNARY)
  ) u_dense (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .in_data   (in_data),
    .w_we      (mine && cfg.sel == CFG_WEIGHT),
    .w_addr    (WAW'(cfg.addr)),
    .w_data    ((CH*WB)'(cfg.data)),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .acc       (acc)
  );

  if (THRESH) begin : g_thresh
    bn_threshold #(.N(N_OUT), .ACC_W(ACC_W), .TERNARY(ACT == ACT_TERNARY_TANH)) u_thr (
      .clk   (clk),
      .rst_n (rst_n),
      .we    (mine && (cfg.sel == CFG_THR0 || cfg.sel == CFG_THR1)),
      .sel   (cfg.sel == CFG_THR1),
      .addr  (NAW'(cfg.addr)),
      .wdata (ACC_W'(cfg.data)),
      .acc   (acc),
      .act   (out_data)
    );
  end else begin : g_bn
    logic signed [FIX_W-1:0] y [N_OUT];
    logic signed [FIX_W-1:0] z [N_OUT];
    batchnorm #(.N(N_OUT), .ACC_W(ACC_W), .ACC_F(ACC_F), .OUT_W(FIX_W), .OUT_F(OUT_F)) u_bn (
      .clk   (clk),
      .rst_n (rst_n),
      .we    (mine && (cfg.sel == CFG_BN_SCALE || cfg.sel == CFG_BN_SHIFT)),
      .sel   (cfg.sel == CFG_BN_SHIFT),
      .addr  (NAW'(cfg.addr)),
      .wdata (BN_SCALE_W'(cfg.data)),
      .acc   (acc),
      .y     (y)
    );
    if (LAST) begin : g_noact
      assign z = y;
    end else begin : g_relu
      relu_act #(.N(N_OUT), .W(FIX_W), .F(OUT_F), .CLIP(ACT == ACT_CLIPPED_RELU)) u_act (
        .x (y),
        .y (z)
      );
    end
    always_comb begin
      for (int i = 0; i < N_OUT; i++) out_data[i*OB +: OB] = OB'(z[i]);
    end
  end

endmodule
