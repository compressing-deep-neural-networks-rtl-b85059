// batchnorm: explicit batch normalisation of N node sums.
//
// Used where the BN cannot be folded into a threshold: before a ReLU or
// clipped ReLU in the hybrid networks, and in the last block, which has no
// activation. Each node has a scale s and a shift b, precomputed offline as
// s = gamma / sqrt(var + eps) and b = beta - mu * s, so that
//     y = x * s + b.
// x is a signed integer carrying ACC_F fraction bits, s has BN_SCALE_F
// fraction bits (bnn_pkg) and y, like b, is fixed point <OUT_W, OUT_W-OUT_F>.
// The product is truncated towards minus infinity to OUT_F fraction bits and
// the sum wraps on overflow, the default behaviour of the fixed-point types
// the design is compiled from; an out-of-range value therefore overflows
// rather than saturates. Each node costs one multiplier (a DSP on an FPGA).
// The scale format and the rounding are choices of this implementation.
//
// Interface: acc in, y out (N values each); scale/shift registers written
// through we/sel/addr/wdata (sel 0 = scale, 1 = shift, low bits of wdata).
// Timing: combinational; writes at the clock edge; registers reset to
// scale 1.0, shift 0.
module batchnorm #(
  parameter  int N     = 128,
  parameter  int ACC_W = 26,
  parameter  int ACC_F = 8,
  parameter  int OUT_W = 16,
  parameter  int OUT_F = 8,
  localparam int AW    = bnn_pkg::clog2i(N) > 0 ? bnn_pkg::clog2i(N) : 1,
  localparam int SW    = bnn_pkg::BN_SCALE_W,
  localparam int PW    = ACC_W + SW,
  localparam int SH    = ACC_F + bnn_pkg::BN_SCALE_F - OUT_F
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we,
  input  logic                    sel,
  input  logic [AW-1:0]           addr,
  input  logic [SW-1:0]           wdata,
  input  logic signed [ACC_W-1:0] acc [N],
  output logic signed [OUT_W-1:0] y [N]
);

  logic signed [SW-1:0]    scale [N];
  logic signed [OUT_W-1:0] shift [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        scale[i] <= SW'(1 << bnn_pkg::BN_SCALE_F);
        shift[i] <= '0;
      end
    end else if (we && int'(addr) < N) begin
      if (!sel) scale[addr] <= signed'(wdata);
      else      shift[addr] <= signed'(OUT_W'(wdata));
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [PW-1:0] p;
      p = PW'(acc[i]) * PW'(scale[i]);
      if (SH >= 0) p = p >>> SH;
      else         p = p <<< (-SH);
      y[i] = OUT_W'(p) + shift[i];
    end
  end

endmodule
