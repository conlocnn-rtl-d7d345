// npu_format_check -- drives one conlocnn_npu built for a given ELP_BSD format
// and activation width, and checks its results.
//
// Loads one random weight tile (row ROWS-1 first, then w_load), streams NV
// random activation vectors with biases, and compares every result vector
// with bias + W^T a computed from the hand-written reference model
// (tb_elp_ref_pkg). It also checks the ROWS + COLS cycle latency. Activations
// cover the full signed ACT_W-bit range. Reports its totals on checks and
// failures and raises done at the end.
module npu_format_check
  import elp_bsd_pkg::*;
  import tb_elp_ref_pkg::*;
#(
  parameter elp_bsd_fmt_t FMT   = FMT_A,
  parameter ref_fmt_e     REF   = REF_A,
  parameter int unsigned  ACT_W = 8,
  parameter int unsigned  ROWS  = 8,
  parameter int unsigned  COLS  = 8,
  parameter int unsigned  NV    = 40
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int unsigned ACC_W = 24;
  localparam int unsigned WW    = weight_width(FMT);
  localparam int unsigned LAT   = ROWS + COLS;

  logic                       rst_n, w_load, act_valid, out_valid, busy;
  logic [COLS-1:0][WW-1:0]    w_in;
  logic signed [ACT_W-1:0]    act_in  [ROWS];
  logic signed [ACC_W-1:0]    bias_in [COLS];
  logic signed [ACC_W-1:0]    out     [COLS];

  conlocnn_npu #(.FMT(FMT), .ROWS(ROWS), .COLS(COLS), .ACT_W(ACT_W), .ACC_W(ACC_W)) dut (
    .clk(clk), .rst_n(rst_n), .w_in(w_in), .w_load(w_load),
    .act_valid(act_valid), .act_in(act_in), .bias_in(bias_in),
    .out_valid(out_valid), .out(out), .busy(busy));

  int wmat [ROWS][COLS];
  int exp_val [NV][COLS];
  int exp_cyc [NV];
  int cyc = 0, n_out = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (weights %0d bit, act %0d bit): %s", WW, ACT_W, what); end
  endtask

  task automatic tick();
    @(negedge clk);
    cyc++;
    if (out_valid) begin
      chk(n_out < NV, "unexpected result");
      if (n_out < NV) begin
        chk(cyc == exp_cyc[n_out] + LAT, "latency");
        for (int c = 0; c < COLS; c++)
          chk(out[c] == ACC_W'(exp_val[n_out][c]),
              $sformatf("vec %0d col %0d got %0d exp %0d", n_out, c, out[c], exp_val[n_out][c]));
        n_out++;
      end
    end
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    rst_n = 0; w_load = 0; act_valid = 0; w_in = '0;
    for (int r = 0; r < ROWS; r++) act_in[r] = '0;
    for (int c = 0; c < COLS; c++) bias_in[c] = '0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) wmat[r][c] = int'($urandom % (1 << WW));
    tick(); tick();
    rst_n = 1;
    for (int k = 0; k < ROWS; k++) begin
      tick();
      for (int c = 0; c < COLS; c++) w_in[c] = WW'(wmat[ROWS-1-k][c]);
    end
    tick(); w_load = 1;
    for (int v = 0; v < NV; v++) begin
      tick(); w_load = 0; act_valid = 1;
      for (int c = 0; c < COLS; c++) begin
        exp_val[v][c] = int'($urandom % 2000) - 1000;
        bias_in[c] = ACC_W'(exp_val[v][c]);
      end
      for (int r = 0; r < ROWS; r++) begin
        int a = (v == 0) ? -(1 << (ACT_W - 1)) : (v == 1) ? (1 << (ACT_W - 1)) - 1
                         : int'($urandom % (1 << ACT_W)) - (1 << (ACT_W - 1));
        act_in[r] = ACT_W'(a);
        for (int c = 0; c < COLS; c++) exp_val[v][c] += ref_value(REF, wmat[r][c]) * a;
      end
      exp_cyc[v] = cyc;
    end
    tick(); act_valid = 0;
    for (int k = 0; k < LAT + 2; k++) tick();
    chk(n_out == NV, $sformatf("%0d of %0d results", n_out, NV));
    done = 1;
  end
endmodule
