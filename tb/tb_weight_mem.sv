// tb_weight_mem: writes every word of a small weight store in random order
// with random data, then reads each row and compares all its words with a
// copy kept by the testbench; rewrites a few words and checks again.
module tb_weight_mem;
  localparam int ROWS = 3, COLS = 5, WORD = 7;
  logic clk = 0;
  logic we;
  logic [3:0] waddr;
  logic [WORD-1:0] wdata;
  logic [1:0] rrow;
  logic [WORD-1:0] rdata [COLS];
  logic [WORD-1:0] model [ROWS*COLS];
  int checks = 0, failures = 0;

  weight_mem #(.ROWS(ROWS), .COLS(COLS), .WORD(WORD)) dut (.*);

  always #5 clk = ~clk;

  task automatic write(int a, logic [WORD-1:0] d);
    @(negedge clk);
    we = 1; waddr = 4'(a); wdata = d;
    model[a] = d;
    @(negedge clk);
    we = 0;
  endtask

  task automatic check_all();
    for (int r = 0; r < ROWS; r++) begin
      rrow = 2'(r);
      #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (rdata[c] !== model[r*COLS + c]) begin
          failures++;
          $display("FAIL row %0d col %0d got %h exp %h", r, c, rdata[c], model[r*COLS + c]);
        end
      end
    end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; rrow = 0;
    for (int i = 0; i < ROWS*COLS; i++) write((i * 7) % (ROWS*COLS), WORD'($urandom));
    check_all();
    for (int i = 0; i < 6; i++) write($urandom_range(0, ROWS*COLS-1), WORD'($urandom));
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
