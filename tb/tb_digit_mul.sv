// tb_digit_mul -- exhaustive check of the one-digit multiplier.
//
// Two instances: the 8-entry digit [1,0..7] and the 4-entry digit [1,1,2,4,5].
// For every activation, sign and index the product plus the correction bit must
// equal +/- act * 2^shift, with the shift list written out here.
module tb_digit_mul;
  import elp_bsd_pkg::*;

  localparam int unsigned OUT_W = 16;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [7:0] act;
  logic              neg;
  logic [2:0]        idx8;
  logic [1:0]        idx4;
  logic [OUT_W-1:0]  prod8, prod4;
  logic              corr8, corr4;

  digit_mul #(.SPEC(D_S_0TO7), .ACT_W(8), .OUT_W(OUT_W)) u8 (
    .act(act), .neg(neg), .idx(idx8), .prod(prod8), .corr(corr8));
  digit_mul #(.SPEC(D_S_1245), .ACT_W(8), .OUT_W(OUT_W)) u4 (
    .act(act), .neg(neg), .idx(idx4), .prod(prod4), .corr(corr4));

  int l1245 [4] = '{1, 2, 4, 5};

  initial begin
    for (int a = -128; a < 128; a++)
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < 8; i++) begin
          int exp8, exp4;
          act  = 8'(a);
          neg  = s[0];
          idx8 = 3'(i);
          idx4 = 2'(i);
          #1;
          exp8 = (s ? -a : a) * (1 << i);
          exp4 = (s ? -a : a) * (1 << l1245[i % 4]);
          checks++;
          if (OUT_W'(prod8 + OUT_W'(corr8)) != OUT_W'(exp8)) begin
            failures++;
            $display("FAIL 8-entry a=%0d neg=%0d idx=%0d got %0d exp %0d", a, s, i,
                     $signed(OUT_W'(prod8 + OUT_W'(corr8))), exp8);
          end
          checks++;
          if (OUT_W'(prod4 + OUT_W'(corr4)) != OUT_W'(exp4)) begin
            failures++;
            $display("FAIL 4-entry a=%0d neg=%0d idx=%0d got %0d exp %0d", a, s, i % 4,
                     $signed(OUT_W'(prod4 + OUT_W'(corr4))), exp4);
          end
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
