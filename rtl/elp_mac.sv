// elp_mac -- multiply-accumulate of a 2's complement activation with an ELP_BSD weight.
//
// psum_out = psum_in + w * act, where w is the integer value of the encoded
// weight, sum_i (+/-) 2^shift_i. There is one digit_mul per digit of the
// format: an XOR inverter and a barrel shifter, with the digit's sign bit and
// index taken straight from the weight bit fields. The digit products and the
// incoming partial sum are added by a compressor tree and one carry-propagate
// adder. The +1 of each negative digit goes into a free carry slot of the tree.
// With a one-digit format this is the single-digit MAC of the paper:
// inverter, shifter, and an adder whose carry input is the sign bit. With two
// digits it is the paper's "1-digit MAC + 1-digit MUL" pair. Both structures
// follow the paper. How the field offsets are computed and the carry-slot
// trick are this design's own.
//
// Interface: w is the ELP_BSD word (digit 1 in the top bits), act the signed
// activation, psum_in/psum_out signed ACC_W-bit partial sums (wrap modulo
// 2^ACC_W). Purely combinational; the PE registers the result.
module elp_mac
  import elp_bsd_pkg::*;
#(
  parameter elp_bsd_fmt_t FMT   = FMT_DEFAULT,
  parameter int unsigned  ACT_W = 8,
  parameter int unsigned  ACC_W = 24,
  localparam int unsigned WW    = weight_width(FMT),
  localparam int unsigned ND    = int'(FMT.num_digits)
) (
  input  logic [WW-1:0]           w,
  input  logic signed [ACT_W-1:0] act,
  input  logic signed [ACC_W-1:0] psum_in,
  output logic signed [ACC_W-1:0] psum_out
);

  logic [ND:0][ACC_W-1:0] ops;   // ND digit products + the incoming partial sum
  logic [ND-1:0]          corr;  // one +1 per negative digit

  for (genvar i = 0; i < ND; i++) begin : g_digit
    localparam digit_spec_t  SPEC = FMT.digit[i];
    localparam int unsigned  IB   = idx_bits(SPEC);
    localparam int unsigned  LSB  = digit_lsb(FMT, i);
    localparam int unsigned  IW   = (IB == 0) ? 1 : IB;
    logic          neg;
    logic [IW-1:0] idx;

    if (IB == 0) begin : g_noidx
      assign idx = '0;
    end else begin : g_idx
      assign idx = w[LSB +: IB];
    end
    if (SPEC.is_signed) begin : g_signed
      assign neg = w[LSB + IB];
    end else begin : g_unsigned
      assign neg = 1'b0;
    end

    digit_mul #(.SPEC(SPEC), .ACT_W(ACT_W), .OUT_W(ACC_W)) u_mul (
      .act (act),
      .neg (neg),
      .idx (idx),
      .prod(ops[i]),
      .corr(corr[i])
    );
  end

  assign ops[ND] = psum_in;

  compressor_tree #(.N_OPS(ND + 1), .W(ACC_W)) u_tree (
    .ops(ops),
    .inc(corr),
    .sum(psum_out)
  );

endmodule
