// tb_xnor_popcount: checks the XNOR/popcount sum against a direct sum of
// +-1 products (bit 1 = +1, bit 0 = -1) over the masked lanes, for the
// four-row truth table of the XNOR product and for random vectors.
module tb_xnor_popcount;
  localparam int N  = 13;
  localparam int SW = bnn_pkg::clog2i(N + 1) + 2;
  logic [N-1:0] a, b, mask;
  logic signed [SW-1:0] sum;
  int checks = 0, failures = 0;

  xnor_popcount #(.N(N)) dut (.a(a), .b(b), .mask(mask), .sum(sum));

  function automatic int ref_sum(logic [N-1:0] a_, logic [N-1:0] b_, logic [N-1:0] m_);
    int s = 0;
    for (int i = 0; i < N; i++)
      if (m_[i]) s += (a_[i] ? 1 : -1) * (b_[i] ? 1 : -1);
    return s;
  endfunction

  task automatic check();
    #1;
    checks++;
    if (int'(sum) != ref_sum(a, b, mask)) begin
      failures++;
      $display("FAIL a=%b b=%b m=%b sum=%0d exp=%0d", a, b, mask, sum, ref_sum(a, b, mask));
    end
  endtask

  initial begin
    // single-lane truth table: (-1,-1)->+1, (-1,+1)->-1, (+1,-1)->-1, (+1,+1)->+1
    for (int k = 0; k < 4; k++) begin
      a = '0; b = '0; mask = 13'd1;
      a[0] = k[1]; b[0] = k[0];
      check();
    end
    for (int t = 0; t < 500; t++) begin
      a = N'($urandom); b = N'($urandom);
      mask = (t % 4 == 0) ? '1 : N'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
