// conlocnn_npu -- top level: ELP_BSD processing array with skew and de-skew.
//
// The design computes y = bias + W^T a for one activation vector a (ROWS
// signed ACT_W-bit values) per cycle. W is a ROWS x COLS matrix of ELP_BSD
// weights held stationary in the array. Each PE multiplies with shifters
// instead of a multiplier, and the per-layer scaling factor of the weights is
// left to whatever consumes the results. The core is processing_array, which
// the paper describes. Around it, this design adds what a weight-stationary
// systolic array needs before it can be used as a whole:
//   * input skew: row r's activation is delayed r cycles, so that each
//     activation meets its partial sum in every PE;
//   * bias skew: column c's bias enters the top of the array c+1 cycles late;
//   * output de-skew: column c's result is delayed COLS-1-c cycles, so that all
//     columns of one result vector appear together;
//   * a valid pipeline and a busy flag.
// Every result has latency LATENCY = ROWS + COLS cycles: act_valid at cycle T
// gives out_valid at cycle T + ROWS + COLS.
//
// Weights: drive w_in with row ROWS-1's weights first and row 0's last, on ROWS
// consecutive cycles (w_in may change while the array computes). Then pulse
// w_load once. The new weights apply to activation vectors that enter at or after
// the w_load cycle. w_load may only be raised while busy is low; busy is high
// while an earlier vector is still inside the array. An assertion checks this.
//
// Results are ACC_W-bit 2's complement sums and wrap on overflow; with the
// defaults (8-bit activations, weights of magnitude <= 160, 32 rows) they
// need 21 bits, so the 24-bit default cannot overflow.
module conlocnn_npu
  import elp_bsd_pkg::*;
#(
  parameter elp_bsd_fmt_t FMT   = FMT_DEFAULT,
  parameter int unsigned  ROWS  = 32,
  parameter int unsigned  COLS  = 32,
  parameter int unsigned  ACT_W = 8,
  parameter int unsigned  ACC_W = 24,
  localparam int unsigned WW      = weight_width(FMT),
  localparam int unsigned LATENCY = ROWS + COLS
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // weight loading
  input  logic [COLS-1:0][WW-1:0]         w_in,
  input  logic                            w_load,
  // activation vectors
  input  logic                            act_valid,
  input  logic signed [ACT_W-1:0]         act_in  [ROWS],
  input  logic signed [ACC_W-1:0]         bias_in [COLS],
  // results
  output logic                            out_valid,
  output logic signed [ACC_W-1:0]         out     [COLS],
  output logic                            busy
);

  logic signed [ACT_W-1:0] act_skew  [ROWS];
  logic signed [ACC_W-1:0] bias_skew [COLS];
  logic signed [ACC_W-1:0] psum_bot  [COLS];
  logic [LATENCY-1:0]      valid_sr;

  for (genvar r = 0; r < ROWS; r++) begin : g_act_skew
    delay_line #(.W(ACT_W), .DEPTH(r)) u_dly (
      .clk(clk), .rst_n(rst_n),
      .in (act_valid ? act_in[r] : '0),
      .out(act_skew[r])
    );
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col_skew
    delay_line #(.W(ACC_W), .DEPTH(c + 1)) u_bias_dly (
      .clk(clk), .rst_n(rst_n),
      .in (act_valid ? bias_in[c] : '0),
      .out(bias_skew[c])
    );
    delay_line #(.W(ACC_W), .DEPTH(COLS - 1 - c)) u_out_dly (
      .clk(clk), .rst_n(rst_n),
      .in (psum_bot[c]),
      .out(out[c])
    );
  end

  processing_array #(
    .FMT(FMT), .ROWS(ROWS), .COLS(COLS), .ACT_W(ACT_W), .ACC_W(ACC_W)
  ) u_array (
    .clk     (clk),
    .rst_n   (rst_n),
    .load    (w_load),
    .w_in    (w_in),
    .act_in  (act_skew),
    .psum_in (bias_skew),
    .psum_out(psum_bot)
  );

  // valid_sr[k] = act_valid of cycle t-1-k
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_sr <= '0;
    else        valid_sr <= {valid_sr[LATENCY-2:0], act_valid};
  end
  assign out_valid = valid_sr[LATENCY-1];

  // A vector that entered at cycle T is used by the last PE at cycle
  // T + ROWS + COLS - 1, so vectors of the last ROWS + COLS - 2 cycles still
  // need the current weights.
  assign busy = |valid_sr[ROWS+COLS-3:0];

  a_load_when_idle: assert property (@(posedge clk) disable iff (!rst_n) w_load |-> !busy)
    else $error("w_load raised while activation vectors are still in the array");

endmodule
