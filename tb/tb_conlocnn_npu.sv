// tb_conlocnn_npu -- end-to-end test of the top level at its default size
// (32 x 32 PEs, 7-bit two-digit weights, 8-bit activations, 24-bit sums).
//
// Sequence:
//   1. shift weight matrix 0 in (row 31 first) and load it;
//   2. stream NV activation vectors with random bubbles and random biases;
//      while the array still computes them, shift matrix 1 in (double
//      buffering through the pass-through weight registers);
//   3. wait for busy to drop (a stall), load matrix 1 in that very cycle
//      together with the first vector of the second stream;
//   4. stream NV more vectors and drain.
// Every result vector is compared with bias + W^T a computed here from the
// hand-written weight reference, and must appear exactly ROWS + COLS cycles
// after its activation vector. The test also counts the mechanisms it must
// exercise (loads, shifting during computation, busy stalls, bubbles,
// negative digits, negative activations, biases) and fails if one never
// happened.
module tb_conlocnn_npu;
  import elp_bsd_pkg::*;
  import tb_elp_ref_pkg::*;

  localparam int unsigned ROWS = 32, COLS = 32, ACC_W = 24, NV = 80;
  localparam int unsigned LAT = ROWS + COLS;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic                    rst_n, w_load, act_valid, out_valid, busy;
  logic [COLS-1:0][6:0]    w_in;
  logic signed [7:0]       act_in  [ROWS];
  logic signed [ACC_W-1:0] bias_in [COLS];
  logic signed [ACC_W-1:0] out     [COLS];

  conlocnn_npu dut (
    .clk(clk), .rst_n(rst_n), .w_in(w_in), .w_load(w_load),
    .act_valid(act_valid), .act_in(act_in), .bias_in(bias_in),
    .out_valid(out_valid), .out(out), .busy(busy));

  int wmat [2][ROWS][COLS];
  int cyc = 0, cur_set = 0;

  // expected results, in issue order
  int exp_cyc [$];
  int exp_val [2*NV][COLS];
  int n_issued = 0;

  // mechanism counters
  int n_load = 0, n_shift_busy = 0, n_stall = 0, n_bubble = 0;
  int n_neg_digit = 0, n_neg_act = 0, n_bias = 0, n_results = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL cycle %0d: %s", cyc, what); end
  endtask

  // one clock: move to the next negedge and check what the design shows
  task automatic tick();
    @(negedge clk);
    cyc++;
    if (out_valid) begin
      chk(exp_cyc.size() > 0, "unexpected result");
      if (exp_cyc.size() > 0) begin
        int ic = exp_cyc.pop_front();
        chk(cyc == ic + LAT, $sformatf("latency %0d, expected %0d", cyc - ic, LAT));
        for (int c = 0; c < COLS; c++)
          chk(out[c] == ACC_W'(exp_val[n_results][c]),
              $sformatf("col %0d got %0d exp %0d", c, out[c], exp_val[n_results][c]));
        n_results++;
      end
    end
  endtask

  task automatic idle_inputs();
    w_load = 0; act_valid = 0;
    for (int r = 0; r < ROWS; r++) act_in[r] = 8'($urandom);   // ignored when not valid
    for (int c = 0; c < COLS; c++) bias_in[c] = ACC_W'($urandom);
  endtask

  // drive one activation vector in the current cycle and record its result
  task automatic issue_vector();
    int a [ROWS];
    int ev [COLS];
    act_valid = 1;
    for (int r = 0; r < ROWS; r++) begin
      a[r] = $signed(8'($urandom));
      if (n_issued == 0) a[r] = (r % 2) ? 127 : -128;
      act_in[r] = 8'(a[r]);
      if (a[r] < 0) n_neg_act++;
    end
    for (int c = 0; c < COLS; c++) begin
      ev[c] = int'($urandom % 200000) - 100000;
      bias_in[c] = ACC_W'(ev[c]);
      if (ev[c] != 0) n_bias++;
      for (int r = 0; r < ROWS; r++) ev[c] += ref_value(REF_B, wmat[cur_set][r][c]) * a[r];
    end
    exp_cyc.push_back(cyc);
    for (int c = 0; c < COLS; c++) exp_val[n_issued][c] = ev[c];
    n_issued++;
  endtask

  task automatic drive_weights(input int set, input int row);
    for (int c = 0; c < COLS; c++) w_in[c] = 7'(wmat[set][row][c]);
  endtask

  int last_issue, load_cyc;

  initial begin
    for (int m = 0; m < 2; m++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          wmat[m][r][c] = $urandom % 128;
          if (wmat[m][r][c][6] || wmat[m][r][c][2]) n_neg_digit++;
        end
    rst_n = 0; w_in = '0; idle_inputs();
    tick(); tick();
    rst_n = 1;
    chk(!busy && !out_valid, "idle after reset");

    // 1. matrix 0
    for (int k = 0; k < ROWS; k++) begin
      tick(); idle_inputs(); drive_weights(0, ROWS - 1 - k);
    end
    tick(); idle_inputs(); w_load = 1; n_load++;

    // 2. first stream, with bubbles
    for (int v = 0; v < NV; ) begin
      tick(); idle_inputs();
      w_in = '0;
      if ($urandom % 6 == 0) n_bubble++;
      else begin issue_vector(); last_issue = cyc; v++; end
    end
    // matrix 1 must be complete in the pass-through registers at load_cyc,
    // the first cycle in which busy is low again
    load_cyc = last_issue + ROWS + COLS - 1;
    while (cyc < load_cyc - 1) begin
      tick(); idle_inputs();
      if (cyc >= load_cyc - ROWS) begin
        drive_weights(1, ROWS - 1 - (cyc - (load_cyc - ROWS)));
        if (busy) n_shift_busy++;
      end
      if (busy) n_stall++;   // the host is waiting to load matrix 1
    end
    // 3. load matrix 1 together with the first vector of the second stream
    tick(); idle_inputs();
    chk(!busy, "busy low when the array has drained");
    w_load = 1; n_load++; cur_set = 1;
    issue_vector();

    // 4. second stream
    for (int v = 1; v < NV; ) begin
      tick(); idle_inputs();
      if ($urandom % 5 == 0) n_bubble++;
      else begin issue_vector(); v++; end
    end
    while (exp_cyc.size() > 0 && cyc < load_cyc + 4 * NV + 4 * LAT) begin
      tick(); idle_inputs();
    end
    chk(exp_cyc.size() == 0, "all results delivered");
    chk(n_results == 2 * NV, $sformatf("%0d results", n_results));

    $display("mechanisms: loads=%0d shift_while_busy=%0d busy_stall=%0d bubbles=%0d neg_digit_weights=%0d neg_acts=%0d biases=%0d",
             n_load, n_shift_busy, n_stall, n_bubble, n_neg_digit, n_neg_act, n_bias);
    chk(n_load == 2, "two weight loads");
    chk(n_shift_busy > 0, "weights shifted during computation");
    chk(n_stall > 0, "load stalled on busy");
    chk(n_bubble > 0, "bubbles in the stream");
    chk(n_neg_digit > 0, "negative weight digits");
    chk(n_neg_act > 0, "negative activations");
    chk(n_bias > 0, "nonzero biases");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
