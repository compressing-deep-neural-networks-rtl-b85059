// xnor_popcount: sum of N products of +-1 values held as single bits.
//
// With -1 encoded as 0 and +1 as 1, the product of two +-1 values is the
// XNOR of their bits (1 when they agree, 0 when they differ). The sum of the
// products over the lanes enabled in `mask` is then
//     sum = 2 * popcount(mask & ~(a ^ b)) - popcount(mask),
// which this module computes combinationally. The XNOR product is the one the
// binary network design prescribes; the mask, which lets the last chunk of a
// layer whose input count is not a multiple of the chunk size ignore its
// padding lanes, is this implementation's addition.
//
// Interface: a, b, mask are N-bit vectors; sum is signed, SW bits wide.
// Timing: purely combinational.
module xnor_popcount #(
  parameter  int N  = 56,
  localparam int SW = bnn_pkg::clog2i(N + 1) + 2
) (
  input  logic [N-1:0]          a,
  input  logic [N-1:0]          b,
  input  logic [N-1:0]          mask,
  output logic signed [SW-1:0]  sum
);

  logic [N-1:0] agree;
  logic [SW-1:0] n_agree, n_lanes;

  assign agree = mask & ~(a ^ b);

  always_comb begin
    n_agree = '0;
    n_lanes = '0;
    for (int i = 0; i < N; i++) begin
      n_agree = n_agree + SW'(agree[i]);
      n_lanes = n_lanes + SW'(mask[i]);
    end
    sum = signed'((n_agree << 1) - n_lanes);
  end

endmodule
