// processing_array -- ROWS x COLS weight-stationary array of ELP_BSD PEs.
//
// This is the TPU-like array of the paper's processing-array figure. Row r takes
// activations from the left at act_in[r] and passes them one PE to the right each
// cycle. Column c takes weights from the top at w_in[c]; they shift one PE down
// per cycle until a common load strobe makes them stationary. Partial sums
// enter column c at psum_in[c] (zero, or a bias), move one PE down per cycle
// and leave at the bottom on psum_out[c]. The array does no skewing. If the
// value for row r is presented r cycles after that of row 0, column c yields
//   psum_out[c] = psum_in[c] + sum_r W[r][c] * a[r]
// ROWS + c + 1 cycles after row 0's activation entered, provided psum_in[c] entered
// c + 1 cycles after it. conlocnn_npu adds that skewing.
//
// Loading: to place W[r][c] at row r, present row ROWS-1's weights first and
// row 0's last on ROWS consecutive cycles. Then raise load for one cycle.
// The 32 x 32 default size is the array the paper evaluates its PEs in; the
// load protocol is this design's choice.
module processing_array
  import elp_bsd_pkg::*;
#(
  parameter elp_bsd_fmt_t FMT   = FMT_DEFAULT,
  parameter int unsigned  ROWS  = 32,
  parameter int unsigned  COLS  = 32,
  parameter int unsigned  ACT_W = 8,
  parameter int unsigned  ACC_W = 24,
  localparam int unsigned WW    = weight_width(FMT)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                load,
  input  logic [COLS-1:0][WW-1:0]             w_in,
  input  logic signed [ACT_W-1:0]             act_in   [ROWS],
  input  logic signed [ACC_W-1:0]             psum_in  [COLS],
  output logic signed [ACC_W-1:0]             psum_out [COLS]
);

  // Nets between PEs: index [r][c] is the input of PE (r,c).
  logic [WW-1:0]           w_net    [ROWS+1][COLS];
  logic signed [ACT_W-1:0] act_net  [ROWS][COLS+1];
  logic signed [ACC_W-1:0] psum_net [ROWS+1][COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign w_net[0][c]    = w_in[c];
    assign psum_net[0][c] = psum_in[c];
    assign psum_out[c]    = psum_net[ROWS][c];
  end
  for (genvar r = 0; r < ROWS; r++) begin : g_left
    assign act_net[r][0] = act_in[r];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe #(.FMT(FMT), .ACT_W(ACT_W), .ACC_W(ACC_W)) u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .load    (load),
        .w_in    (w_net[r][c]),
        .w_out   (w_net[r+1][c]),
        .act_in  (act_net[r][c]),
        .act_out (act_net[r][c+1]),
        .psum_in (psum_net[r][c]),
        .psum_out(psum_net[r+1][c])
      );
    end
  end

endmodule
