// dense_layer: binary or ternary fully connected layer, folded by a reuse
// factor.
//
// Each of the N_OUT nodes sums the products of the N_IN inputs with its
// weights. Weights are +-1 (binary, 1 bit) or -1/0/+1 (ternary, 2 bits), so no
// multiplier is needed: a binary input times a binary weight is an XNOR
// (xnor_popcount), and every other product is the input, its negation or zero.
// The work is spread over REUSE cycles, as the reuse factor / initiation
// interval of the design: the inputs are cut into REUSE chunks of
// CH = ceil(N_IN / REUSE) elements and, in cycle r, chunk r is multiplied by
// row r of the weight store and added to the N_OUT accumulators.
//
// The accumulator width is the smallest that holds the largest possible sum
// (N_IN for binary/ternary inputs), following the design's practice of sizing
// the pre-activation integer to the largest value the layer can produce.
// Biases are not kept: a following BN or threshold absorbs them.
//
// Interface: valid/ready stream in (in_data, N_IN elements packed, element i
// at bits [i*IN_B +: IN_B]) and out (acc, one signed ACC_W value per node).
// Weight words are written through w_we/w_addr/w_data (see weight_mem).
// Timing: an input accepted in cycle t (the first chunk is summed at the
// closing edge of that cycle) gives out_valid in cycle t + REUSE; a new input
// can be accepted in the cycle the previous result leaves, so back-to-back
// samples are REUSE cycles apart (II = REUSE).
// The folding scheme and the handshake are choices of this implementation.
module dense_layer import bnn_pkg::*; #(
  parameter  int       N_IN      = 784,
  parameter  int       N_OUT     = 128,
  parameter  int       REUSE     = 14,
  parameter  in_kind_e IN_KIND   = IN_FIXED,
  parameter  int       FIX_W     = 16,
  parameter  bit       W_TERNARY = 1'b0,
  localparam int       IN_B      = in_bits(IN_KIND, FIX_W),
  localparam int       WB        = W_TERNARY ? 2 : 1,
  localparam int       CH        = (N_IN + REUSE - 1) / REUSE,
  localparam int       ACC_W     = acc_width(IN_KIND, FIX_W, N_IN),
  localparam int       WAW       = clog2i(REUSE * N_OUT) > 0 ? clog2i(REUSE * N_OUT) : 1,
  localparam int       RW        = clog2i(REUSE) > 0 ? clog2i(REUSE) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // input stream
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [N_IN*IN_B-1:0]    in_data,
  // weight writes
  input  logic                    w_we,
  input  logic [WAW-1:0]          w_addr,
  input  logic [CH*WB-1:0]        w_data,
  // output stream
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [ACC_W-1:0] acc [N_OUT]
);

  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_DONE} state_e;
  localparam int PSW = clog2i(CH + 1) + 2 + ((IN_KIND == IN_FIXED) ? FIX_W : 0);

  state_e                     state;
  logic [RW-1:0]              row_q, row;
  logic [N_IN*IN_B-1:0]       in_buf, in_cur;
  logic [REUSE*CH*IN_B-1:0]   in_pad;
  logic [CH*IN_B-1:0]         chunk;
  logic [CH-1:0]              lane_ok;
  logic [CH*WB-1:0]           wrow [N_OUT];
  logic signed [PSW-1:0]      psum [N_OUT];
  logic                       accept;

  assign in_ready  = (state == S_IDLE) || (state == S_DONE && out_ready);
  assign out_valid = (state == S_DONE);
  assign accept    = in_valid && in_ready;
  assign row       = accept ? '0 : row_q;
  assign in_cur    = accept ? in_data : in_buf;
  assign in_pad    = (REUSE*CH*IN_B)'(in_cur);
  assign chunk     = in_pad[int'(row)*CH*IN_B +: CH*IN_B];

  always_comb begin
    for (int c = 0; c < CH; c++) lane_ok[c] = (int'(row) * CH + c) < N_IN;
  end

  weight_mem #(.ROWS(REUSE), .COLS(N_OUT), .WORD(CH*WB)) u_wmem (
    .clk   (clk),
    .we    (w_we),
    .waddr (w_addr),
    .wdata (w_data),
    .rrow  (row),
    .rdata (wrow)
  );

  // Partial sums of the current chunk, one per node.
  if (IN_KIND == IN_BINARY && !W_TERNARY) begin : g_xnor
    for (genvar o = 0; o < N_OUT; o++) begin : g_node
      logic signed [clog2i(CH + 1) + 1:0] s;
      xnor_popcount #(.N(CH)) u_xp (.a(chunk), .b(wrow[o]), .mask(lane_ok), .sum(s));
      assign psum[o] = PSW'(s);
    end
  end else begin : g_addsub
    for (genvar o = 0; o < N_OUT; o++) begin : g_node
      always_comb begin
        logic signed [PSW-1:0] s;
        logic signed [PSW-1:0] x;
        logic signed [1:0]     w;
        s = '0;
        for (int c = 0; c < CH; c++) begin
          if (IN_KIND == IN_FIXED)        x = PSW'(signed'(chunk[c*IN_B +: IN_B]));
          else if (IN_KIND == IN_TERNARY) x = PSW'(tern_val(2'(chunk[c*IN_B +: IN_B])));
          else                            x = chunk[c*IN_B] ? PSW'(1) : -PSW'(1);
          if (W_TERNARY) w = tern_val(2'(wrow[o][c*WB +: WB]));
          else           w = wrow[o][c*WB] ? 2'sd1 : -2'sd1;
          if (lane_ok[c]) begin
            if (w == 2'sd1)       s = s + x;
            else if (w == -2'sd1) s = s - x;
          end
        end
        psum[o] = s;
      end
    end
  end

  // Input buffer: holds the accepted vector for the remaining REUSE-1 cycles.
  always_ff @(posedge clk) begin
    if (accept) in_buf <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      row_q <= '0;
      for (int o = 0; o < N_OUT; o++) acc[o] <= '0;
    end else if (accept) begin
      for (int o = 0; o < N_OUT; o++) acc[o] <= ACC_W'(psum[o]);
      if (REUSE == 1) begin
        state <= S_DONE;
      end else begin
        state <= S_BUSY;
        row_q <= RW'(1);
      end
    end else if (state == S_BUSY) begin
      for (int o = 0; o < N_OUT; o++) acc[o] <= acc[o] + ACC_W'(psum[o]);
      if (int'(row_q) == REUSE - 1) begin
        state <= S_DONE;
        row_q <= '0;
      end else begin
        row_q <= row_q + RW'(1);
      end
    end else if (state == S_DONE && out_ready) begin
      state <= S_IDLE;
    end
  end

  // A result, once offered, stays until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (out_valid && !out_ready) |=> out_valid;
  endproperty
  a_hold: assert property (p_hold) else $error("dense_layer: out_valid dropped before out_ready");

endmodule
