// relu_act: ReLU or clipped ReLU on N fixed-point values.
//
// ReLU gives max(0, x); the clipped ReLU (CLIP = 1) gives min(max(0, x),
// y_max) with y_max = 1.0, the value the design fixes for it. Values are
// signed fixed point <W, W-F>; 1.0 is 1 << F. Both functions follow the
// design; the output keeps the input's format.
//
// Interface: x in, y out, N values each. Timing: combinational.
module relu_act #(
  parameter int N    = 128,
  parameter int W    = 16,
  parameter int F    = 6,
  parameter bit CLIP = 1'b0
) (
  input  logic signed [W-1:0] x [N],
  output logic signed [W-1:0] y [N]
);

  localparam logic signed [W-1:0] ONE = W'(1) << F;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      if (x[i] < 0)               y[i] = '0;
      else if (CLIP && x[i] > ONE) y[i] = ONE;
      else                         y[i] = x[i];
    end
  end

endmodule
