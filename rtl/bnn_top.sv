// bnn_top: binary/ternary multilayer perceptron, four blocks deep.
//
// The network classifies one input vector (N_INPUT fixed-point features) into
// N_OUTPUT scores. It is a chain of four nn_blocks: three hidden blocks of
// N_H1, N_H2, N_H3 nodes, each a binary or ternary dense layer, BN and an
// activation, and an output block of dense layer and BN without activation.
// The class is the index of the largest score; that arg-max is left to the
// consumer of the scores.
//
// Configurations, chosen by parameters:
//   * W_TERNARY  : binary (+-1) or ternary (-1/0/+1) weights in every layer;
//   * HIDDEN_ACT : binary tanh or ternary tanh (BN folded into thresholds,
//                  1- or 2-bit activations between blocks), or ReLU / clipped
//                  ReLU (the hybrid networks: explicit BN, FIX_W-bit
//                  activations between blocks);
//   * FIX_W, FIX_I : the fixed-point format <FIX_W, FIX_I> of the input, of
//                  the ReLU outputs and of the scores;
//   * REUSE1..4  : reuse factor of each dense layer.
// The defaults are the binary MNIST network: 784 inputs, three hidden layers
// of 128 nodes, 10 outputs, binary weights, binary tanh, <16, 8>, reuse
// factor (initiation interval) 14.
//
// Interface: clk, active-low asynchronous rst_n; cfg writes trained
// parameters (see bnn_pkg and nn_block); in_valid/in_ready with in_data,
// out_valid/out_ready with score. Timing: a sample accepted in cycle t has
// its scores valid in cycle t + REUSE1 + REUSE2 + REUSE3 + REUSE4; the blocks
// work on different samples at once, so a new sample is taken every
// max(REUSEk) cycles. A stalled out_ready holds the scores and back-pressures
// the chain.
module bnn_top import bnn_pkg::*; #(
  parameter  int   N_INPUT    = 784,
  parameter  int   N_H1       = 128,
  parameter  int   N_H2       = 128,
  parameter  int   N_H3       = 128,
  parameter  int   N_OUTPUT   = 10,
  parameter  bit   W_TERNARY  = 1'b0,
  parameter  act_e HIDDEN_ACT = ACT_BINARY_TANH,
  parameter  int   FIX_W      = 16,
  parameter  int   FIX_I      = 8,
  parameter  int   REUSE1     = 14,
  parameter  int   REUSE2     = 14,
  parameter  int   REUSE3     = 14,
  parameter  int   REUSE4     = 14,
  localparam int   FIX_F      = FIX_W - FIX_I,
  localparam in_kind_e HK     = (HIDDEN_ACT == ACT_BINARY_TANH)  ? IN_BINARY :
                                (HIDDEN_ACT == ACT_TERNARY_TANH) ? IN_TERNARY : IN_FIXED,
  localparam int   HB         = in_bits(HK, FIX_W)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_wr_t                 cfg,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [FIX_W-1:0] in_data [N_INPUT],
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [FIX_W-1:0] score [N_OUTPUT]
);

  logic [N_INPUT*FIX_W-1:0]   x0;
  logic [N_H1*HB-1:0]         x1;
  logic [N_H2*HB-1:0]         x2;
  logic [N_H3*HB-1:0]         x3;
  logic [N_OUTPUT*FIX_W-1:0]  x4;
  logic v1, v2, v3, r1, r2, r3;

  always_comb begin
    for (int i = 0; i < N_INPUT; i++) x0[i*FIX_W +: FIX_W] = in_data[i];
    for (int i = 0; i < N_OUTPUT; i++) score[i] = signed'(x4[i*FIX_W +: FIX_W]);
  end

  nn_block #(
    .LAYER_ID(0), .N_IN(N_INPUT), .N_OUT(N_H1), .REUSE(REUSE1), .IN_KIND(IN_FIXED),
    .FIX_W(FIX_W), .IN_F(FIX_F), .W_TERNARY(W_TERNARY), .ACT(HIDDEN_ACT),
    .LAST(1'b0), .OUT_F(FIX_F)
  ) u_blk1 (
    .clk(clk), .rst_n(rst_n), .cfg(cfg),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(x0),
    .out_valid(v1), .out_ready(r1), .out_data(x1)
  );

  nn_block #(
    .LAYER_ID(1), .N_IN(N_H1), .N_OUT(N_H2), .REUSE(REUSE2), .IN_KIND(HK),
    .FIX_W(FIX_W), .IN_F(FIX_F), .W_TERNARY(W_TERNARY), .ACT(HIDDEN_ACT),
    .LAST(1'b0), .OUT_F(FIX_F)
  ) u_blk2 (
    .clk(clk), .rst_n(rst_n), .cfg(cfg),
    .in_valid(v1), .in_ready(r1), .in_data(x1),
    .out_valid(v2), .out_ready(r2), .out_data(x2)
  );

  nn_block #(
    .LAYER_ID(2), .N_IN(N_H2), .N_OUT(N_H3), .REUSE(REUSE3), .IN_KIND(HK),
    .FIX_W(FIX_W), .IN_F(FIX_F), .W_TERNARY(W_TERNARY), .ACT(HIDDEN_ACT),
    .LAST(1'b0), .OUT_F(FIX_F)
  ) u_blk3 (
    .clk(clk), .rst_n(rst_n), .cfg(cfg),
    .in_valid(v2), .in_ready(r2), .in_data(x2),
    .out_valid(v3), .out_ready(r3), .out_data(x3)
  );

  nn_block #(
    .LAYER_ID(3), .N_IN(N_H3), .N_OUT(N_OUTPUT), .REUSE(REUSE4), .IN_KIND(HK),
    .FIX_W(FIX_W), .IN_F(FIX_F), .W_TERNARY(W_TERNARY), .ACT(HIDDEN_ACT),
    .LAST(1'b1), .OUT_F(FIX_F)
  ) u_blk4 (
    .clk(clk), .rst_n(rst_n), .cfg(cfg),
    .in_valid(v3), .in_ready(r3), .in_data(x3),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(x4)
  );

endmodule
