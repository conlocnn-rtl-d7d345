// tb_elp_bsd_pkg -- checks the ELP_BSD format package.
//
// Checks the two worked examples of the format figure (11000b in
// {2^-2,[1,0,1,2,3],[1,0,1]} is -4+1, 1000b in {2^-2,[0,0,1,2,3],[1,0,1]} is
// 4+1), the weight widths of the four hardware-table formats (4, 7, 6, 6
// bits), the digit field positions, and decode() of every code of every
// format against the hand-written reference model.
module tb_elp_bsd_pkg;
  import elp_bsd_pkg::*;
  import tb_elp_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic check_all(input elp_bsd_fmt_t f, input ref_fmt_e r, input string name);
    for (int code = 0; code < (1 << ref_width(r)); code++)
      check(decode(f, 32'(code)) == ref_value(r, code),
            $sformatf("%s code %0h: decode %0d ref %0d", name, code, decode(f, 32'(code)), ref_value(r, code)));
  endtask

  initial begin
    // worked examples of the format figure
    check(decode(FMT_EX_SIGNED, 32'b11000) == -3, "example (c) 11000b = -4 + 1");
    check(decode(FMT_EX_UNSIGNED, 32'b1000) == 5, "example (d) 1000b = 4 + 1");
    check(weight_width(FMT_EX_SIGNED) == 5, "example (c) is 5 bits");
    check(weight_width(FMT_EX_UNSIGNED) == 4, "example (d) is 4 bits");
    // widths of the hardware-table formats
    check(weight_width(FMT_A) == 4, "FMT_A 4 bits");
    check(weight_width(FMT_B) == 7, "FMT_B 7 bits");
    check(weight_width(FMT_C) == 6, "FMT_C 6 bits");
    check(weight_width(FMT_D) == 6, "FMT_D 6 bits");
    // field positions: digit 1 on top
    check(digit_lsb(FMT_B, 0) == 3 && digit_lsb(FMT_B, 1) == 0, "FMT_B digit positions");
    check(digit_lsb(FMT_D, 0) == 3 && digit_lsb(FMT_D, 1) == 0, "FMT_D digit positions");
    check(idx_bits(D_S_15) == 1 && idx_bits(D_S_0TO7) == 3, "index widths");
    check(max_shift(FMT_B) == 7 && max_shift(FMT_EX_SIGNED) == 3, "max_shift");
    // every code of every format
    check_all(FMT_A, REF_A, "FMT_A");
    check_all(FMT_B, REF_B, "FMT_B");
    check_all(FMT_C, REF_C, "FMT_C");
    check_all(FMT_D, REF_D, "FMT_D");
    check_all(FMT_EX_UNSIGNED, REF_EX_U, "EX_U");
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
