// weight_mem: weight store of one dense layer.
//
// A dense layer of N_OUT nodes folded over ROWS = reuse-factor cycles reads,
// in cycle r, the weights that connect input chunk r to every node. The store
// is therefore an array of ROWS x COLS words (COLS = N_OUT), WORD bits each
// (CH weights of 1 or 2 bits). One word is written per cycle through the
// configuration port (address = row * COLS + col); a whole row, all COLS
// words, is read combinationally so the layer can use it in the same cycle.
// In an FPGA this maps onto block or distributed RAM; the paper reports BRAM
// use for the folded layers but not their organisation, so the row-wide
// layout and the write port are choices of this implementation.
//
// Timing: write takes effect at the clock edge; read is combinational.
// Contents are not reset: the weights must be written before use.
module weight_mem #(
  parameter  int ROWS = 14,
  parameter  int COLS = 128,
  parameter  int WORD = 56,
  localparam int AW   = bnn_pkg::clog2i(ROWS * COLS) > 0 ? bnn_pkg::clog2i(ROWS * COLS) : 1,
  localparam int RW   = bnn_pkg::clog2i(ROWS) > 0 ? bnn_pkg::clog2i(ROWS) : 1
) (
  input  logic            clk,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [WORD-1:0] wdata,
  input  logic [RW-1:0]   rrow,
  output logic [WORD-1:0] rdata [COLS]
);

  logic [WORD-1:0] mem [ROWS*COLS];

  always_ff @(posedge clk) begin
    if (we && (int'(waddr) < ROWS * COLS)) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) rdata[c] = mem[int'(rrow) * COLS + c];
  end

endmodule
