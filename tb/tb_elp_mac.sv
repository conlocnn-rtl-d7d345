// tb_elp_mac -- checks psum_out = psum_in + w * act for five weight formats.
//
// Instances: the four hardware-table formats (one- and two-digit) and the
// format with an unsigned first digit. Every weight code is tried with many
// random activations and partial sums, including the extreme ones; weight
// values come from the hand-written reference model.
module tb_elp_mac;
  import elp_bsd_pkg::*;
  import tb_elp_ref_pkg::*;

  localparam int unsigned ACC_W = 24;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [6:0]              w;
  logic signed [7:0]       act;
  logic signed [ACC_W-1:0] psum_in;
  logic signed [ACC_W-1:0] out_a, out_b, out_c, out_d, out_u;

  elp_mac #(.FMT(FMT_A), .ACT_W(8), .ACC_W(ACC_W)) ua (.w(w[3:0]), .act(act), .psum_in(psum_in), .psum_out(out_a));
  elp_mac #(.FMT(FMT_B), .ACT_W(8), .ACC_W(ACC_W)) ub (.w(w[6:0]), .act(act), .psum_in(psum_in), .psum_out(out_b));
  elp_mac #(.FMT(FMT_C), .ACT_W(8), .ACC_W(ACC_W)) uc (.w(w[5:0]), .act(act), .psum_in(psum_in), .psum_out(out_c));
  elp_mac #(.FMT(FMT_D), .ACT_W(8), .ACC_W(ACC_W)) ud (.w(w[5:0]), .act(act), .psum_in(psum_in), .psum_out(out_d));
  elp_mac #(.FMT(FMT_EX_UNSIGNED), .ACT_W(8), .ACC_W(ACC_W)) uu (.w(w[3:0]), .act(act), .psum_in(psum_in), .psum_out(out_u));

  task automatic chk(input logic signed [ACC_W-1:0] got, input ref_fmt_e f, input string name);
    int code = int'(w) & ((1 << ref_width(f)) - 1);
    logic signed [ACC_W-1:0] exp = ACC_W'(int'(psum_in) + ref_value(f, code) * int'(act));
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s w=%0h act=%0d psum=%0d got %0d exp %0d", name, code, act, psum_in, got, exp);
    end
  endtask

  initial begin
    for (int code = 0; code < 128; code++)
      for (int t = 0; t < 40; t++) begin
        w       = 7'(code);
        act     = (t == 0) ? -8'sd128 : (t == 1) ? 8'sd127 : 8'($urandom);
        psum_in = (t == 2) ? '0 : ACC_W'(($urandom % 2000000) - 1000000);
        #1;
        chk(out_a, REF_A, "FMT_A");
        chk(out_b, REF_B, "FMT_B");
        chk(out_c, REF_C, "FMT_C");
        chk(out_d, REF_D, "FMT_D");
        chk(out_u, REF_EX_U, "EX_U");
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
