// tb_npu_formats -- runs the top level in every weight format and at two
// activation widths: the configurations whose PEs the scheme was evaluated
// with (four ELP_BSD formats, 8-bit and 5-bit activations), on 8 x 8 arrays.
// Each configuration is driven and checked by one npu_format_check.
module tb_npu_formats;
  import elp_bsd_pkg::*;
  import tb_elp_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 8;
  int   ck [N];
  int   fl [N];
  logic dn [N];

  npu_format_check #(.FMT(FMT_A), .REF(REF_A), .ACT_W(8)) u_a8 (.clk(clk), .checks(ck[0]), .failures(fl[0]), .done(dn[0]));
  npu_format_check #(.FMT(FMT_A), .REF(REF_A), .ACT_W(5)) u_a5 (.clk(clk), .checks(ck[1]), .failures(fl[1]), .done(dn[1]));
  npu_format_check #(.FMT(FMT_B), .REF(REF_B), .ACT_W(8)) u_b8 (.clk(clk), .checks(ck[2]), .failures(fl[2]), .done(dn[2]));
  npu_format_check #(.FMT(FMT_B), .REF(REF_B), .ACT_W(5)) u_b5 (.clk(clk), .checks(ck[3]), .failures(fl[3]), .done(dn[3]));
  npu_format_check #(.FMT(FMT_C), .REF(REF_C), .ACT_W(8)) u_c8 (.clk(clk), .checks(ck[4]), .failures(fl[4]), .done(dn[4]));
  npu_format_check #(.FMT(FMT_C), .REF(REF_C), .ACT_W(5)) u_c5 (.clk(clk), .checks(ck[5]), .failures(fl[5]), .done(dn[5]));
  npu_format_check #(.FMT(FMT_D), .REF(REF_D), .ACT_W(8)) u_d8 (.clk(clk), .checks(ck[6]), .failures(fl[6]), .done(dn[6]));
  npu_format_check #(.FMT(FMT_D), .REF(REF_D), .ACT_W(5)) u_d5 (.clk(clk), .checks(ck[7]), .failures(fl[7]), .done(dn[7]));

  int checks, failures;
  bit all_done;

  initial begin
    do begin
      @(posedge clk);
      all_done = 1;
      for (int i = 0; i < N; i++) all_done &= dn[i];
    end while (!all_done);
    checks = 0; failures = 0;
    for (int i = 0; i < N; i++) begin checks += ck[i]; failures += fl[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    checks = 0; failures = 1;
    for (int i = 0; i < N; i++) begin checks += ck[i]; failures += fl[i]; end
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
