// tb_processing_array -- dataflow and timing check of a 4 x 3 array.
//
// Loads a random weight matrix with the shift-then-load protocol (row ROWS-1
// first), then streams random activation vectors with the skew done here:
// row r gets vector T's element at cycle T + r, column c gets vector T's bias
// at cycle T + c + 1. Column c must then show bias + sum_r W[r][c] * a[r]
// exactly at cycle T + ROWS + c + 1. A second weight matrix is shifted in
// while the first computes and loaded once the array has drained.
module tb_processing_array;
  import elp_bsd_pkg::*;
  import tb_elp_ref_pkg::*;

  localparam int unsigned ROWS = 4, COLS = 3, ACC_W = 24, NV = 60;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic                    rst_n, load;
  logic [COLS-1:0][6:0]    w_in;
  logic signed [7:0]       act_in   [ROWS];
  logic signed [ACC_W-1:0] psum_in  [COLS];
  logic signed [ACC_W-1:0] psum_out [COLS];

  processing_array #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .w_in(w_in),
    .act_in(act_in), .psum_in(psum_in), .psum_out(psum_out));

  int wmat [2][ROWS][COLS];      // weight codes of the two matrices
  int av   [2][NV][ROWS];        // activation vectors per phase
  int bv   [2][NV][COLS];        // biases per phase

  task automatic run_phase(input int ph);
    // cycle t of this phase: shift the next matrix's weights in during t = 0..ROWS-1
    for (int t = 0; t < NV + ROWS + COLS + 2; t++) begin
      @(negedge clk);
      // check outputs present in this cycle
      for (int c = 0; c < COLS; c++) begin
        int tv = t - ROWS - c - 1;
        if (tv >= 0 && tv < NV) begin
          int exp = bv[ph][tv][c];
          for (int r = 0; r < ROWS; r++) exp += ref_value(REF_B, wmat[ph][r][c]) * av[ph][tv][r];
          checks++;
          if (psum_out[c] != ACC_W'(exp)) begin
            failures++;
            $display("FAIL ph%0d vec %0d col %0d: got %0d exp %0d", ph, tv, c, psum_out[c], exp);
          end
        end
      end
      // skewed inputs
      for (int r = 0; r < ROWS; r++) act_in[r] = (t - r >= 0 && t - r < NV) ? 8'(av[ph][t-r][r]) : '0;
      for (int c = 0; c < COLS; c++) psum_in[c] = (t - c - 1 >= 0 && t - c - 1 < NV) ? ACC_W'(bv[ph][t-c-1][c]) : '0;
      // shift the other matrix in while this one computes
      for (int c = 0; c < COLS; c++) w_in[c] = (ph == 0 && t < ROWS) ? 7'(wmat[1][ROWS-1-t][c]) : 7'($urandom);
    end
  endtask

  initial begin
    for (int m = 0; m < 2; m++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) wmat[m][r][c] = $urandom % 128;
    for (int p = 0; p < 2; p++)
      for (int v = 0; v < NV; v++) begin
        for (int r = 0; r < ROWS; r++) av[p][v][r] = $signed(8'($urandom));
        for (int c = 0; c < COLS; c++) bv[p][v][c] = int'($urandom % 20000) - 10000;
        if (v == 0) for (int r = 0; r < ROWS; r++) av[p][v][r] = -128;
      end
    rst_n = 0; load = 0; w_in = '0;
    for (int r = 0; r < ROWS; r++) act_in[r] = '0;
    for (int c = 0; c < COLS; c++) psum_in[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // first matrix: row ROWS-1 first
    for (int t = 0; t < ROWS; t++) begin
      for (int c = 0; c < COLS; c++) w_in[c] = 7'(wmat[0][ROWS-1-t][c]);
      @(negedge clk);
    end
    load = 1;
    @(negedge clk);
    load = 0;
    run_phase(0);   // second matrix shifted in during the first ROWS cycles
    // the second matrix was shifted in at the start of phase 0, then random
    // weights followed, so shift it in again before loading
    for (int t = 0; t < ROWS; t++) begin
      for (int c = 0; c < COLS; c++) w_in[c] = 7'(wmat[1][ROWS-1-t][c]);
      @(negedge clk);
    end
    load = 1;
    @(negedge clk);
    load = 0;
    run_phase(1);
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
