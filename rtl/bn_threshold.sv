// bn_threshold: batch normalisation merged with a binary or ternary tanh.
//
// BN maps a node's sum x to y = (x - mu) / sqrt(var + eps) * gamma + beta and
// binary tanh keeps only the sign of y, so the pair reduces to comparing x
// with the one value at which y changes sign. Ternary tanh has two such
// values. These thresholds are worked out offline from the four BN
// parameters and written here, one or two per node; at run time each node
// costs one or two comparators and no multiplier.
//   binary : out = +1 (bit 1) if x >= thr0, else -1 (bit 0)
//   ternary: out = +1 if x > thr1, -1 if x < thr0, else 0 (2-bit code)
// The merging follows the design; which side of a threshold is inclusive and
// the 2-bit code are choices of this implementation. A node whose BN scale
// gamma is negative flips the comparison; it is handled offline by negating
// that node's weights and thresholds, so the hardware only ever compares in
// one direction.
//
// Interface: acc (N signed values) in, act (N packed codes of OB bits) out;
// threshold registers written through we/sel/addr/wdata (sel 0 = thr0,
// 1 = thr1). Timing: the compare is combinational; writes take effect at the
// clock edge. Thresholds reset to 0.
module bn_threshold #(
  parameter  int N       = 128,
  parameter  int ACC_W   = 26,
  parameter  bit TERNARY = 1'b0,
  localparam int OB      = TERNARY ? 2 : 1,
  localparam int AW      = bnn_pkg::clog2i(N) > 0 ? bnn_pkg::clog2i(N) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we,
  input  logic                    sel,
  input  logic [AW-1:0]           addr,
  input  logic [ACC_W-1:0]        wdata,
  input  logic signed [ACC_W-1:0] acc [N],
  output logic [N*OB-1:0]         act
);

  logic signed [ACC_W-1:0] thr0 [N];
  logic signed [ACC_W-1:0] thr1 [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        thr0[i] <= '0;
        thr1[i] <= '0;
      end
    end else if (we && int'(addr) < N) begin
      if (!sel) thr0[addr] <= signed'(wdata);
      else      thr1[addr] <= signed'(wdata);
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      if (!TERNARY) begin
        act[i*OB +: OB] = OB'(acc[i] >= thr0[i]);
      end else begin
        if (acc[i] > thr1[i])      act[i*OB +: OB] = OB'(2'b01);
        else if (acc[i] < thr0[i]) act[i*OB +: OB] = OB'(2'b11);
        else                       act[i*OB +: OB] = OB'(2'b00);
      end
    end
  end

endmodule
