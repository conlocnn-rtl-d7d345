// tb_compressor_tree -- random check of the carry-save tree for 2 to 6 operands.
//
// Every instance must return the sum of its operands plus its single-bit
// increments, modulo 2^W.
module tb_compressor_tree;
  localparam int unsigned W = 20;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [5:0][W-1:0] ops;
  logic [4:0]        inc;
  logic [W-1:0]      sum2, sum3, sum4, sum5, sum6;

  compressor_tree #(.N_OPS(2), .W(W)) u2 (.ops(ops[1:0]), .inc(inc[0:0]), .sum(sum2));
  compressor_tree #(.N_OPS(3), .W(W)) u3 (.ops(ops[2:0]), .inc(inc[1:0]), .sum(sum3));
  compressor_tree #(.N_OPS(4), .W(W)) u4 (.ops(ops[3:0]), .inc(inc[2:0]), .sum(sum4));
  compressor_tree #(.N_OPS(5), .W(W)) u5 (.ops(ops[4:0]), .inc(inc[3:0]), .sum(sum5));
  compressor_tree #(.N_OPS(6), .W(W)) u6 (.ops(ops[5:0]), .inc(inc[4:0]), .sum(sum6));

  function automatic logic [W-1:0] ref_sum(input int n);
    logic [W-1:0] s = '0;
    for (int i = 0; i < n; i++) s += ops[i];
    for (int i = 0; i < n - 1; i++) s += W'(inc[i]);  // n operands carry n-1 increments
    return s;
  endfunction

  task automatic chk(input logic [W-1:0] got, input int n);
    checks++;
    if (got != ref_sum(n)) begin
      failures++;
      $display("FAIL N_OPS=%0d got %h exp %h", n, got, ref_sum(n));
    end
  endtask

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < 6; i++) ops[i] = W'($urandom);
      inc = 5'($urandom);
      if (t == 0) begin ops = '1; inc = '1; end
      #1;
      chk(sum2, 2); chk(sum3, 3); chk(sum4, 4); chk(sum5, 5); chk(sum6, 6);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
