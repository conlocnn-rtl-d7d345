// tb_pe -- cycle-by-cycle check of one processing element (default 7-bit format).
//
// Random weights, load strobes, activations and partial sums are applied for
// many cycles. A register-level model written here tracks the pass-through
// and stationary weights and the activation. Every cycle it checks
//   w_out(t+1) = w_in(t), act_out(t+1) = act_in(t),
//   psum_out(t+1) = psum_in(t) + value(stationary weight) * act_out(t),
// and that a weight becomes stationary only through load.
module tb_pe;
  import elp_bsd_pkg::*;
  import tb_elp_ref_pkg::*;

  localparam int unsigned ACC_W = 24;
  int checks = 0, failures = 0, loads = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic                    rst_n, load;
  logic [6:0]              w_in, w_out;
  logic signed [7:0]       act_in, act_out;
  logic signed [ACC_W-1:0] psum_in, psum_out;

  pe dut (.clk(clk), .rst_n(rst_n), .load(load), .w_in(w_in), .w_out(w_out),
          .act_in(act_in), .act_out(act_out), .psum_in(psum_in), .psum_out(psum_out));

  // model state
  logic [6:0]              m_pass, m_stat;
  logic signed [7:0]       m_act;
  logic signed [ACC_W-1:0] m_psum;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    rst_n = 0; load = 0; w_in = '0; act_in = '0; psum_in = '0;
    m_pass = '0; m_stat = '0; m_act = '0; m_psum = '0;
    repeat (2) @(negedge clk);
    chk(w_out == 0 && act_out == 0 && psum_out == 0, "reset values");
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      chk(w_out == m_pass, $sformatf("w_out %h exp %h", w_out, m_pass));
      chk(act_out == m_act, $sformatf("act_out %0d exp %0d", act_out, m_act));
      chk(psum_out == m_psum, $sformatf("psum_out %0d exp %0d", psum_out, m_psum));
      w_in    = 7'($urandom);
      load    = ($urandom % 8) == 0;
      act_in  = 8'($urandom);
      psum_in = ACC_W'(($urandom % 2000000) - 1000000);
      if (load) loads++;
      // model update for the coming edge
      m_psum = ACC_W'(int'(psum_in) + ref_value(REF_B, int'(m_stat)) * int'(m_act));
      if (load) m_stat = m_pass;
      m_pass = w_in;
      m_act  = act_in;
    end
    chk(loads > 100, "load strobes exercised");
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
