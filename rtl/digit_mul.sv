// digit_mul -- multiplies an activation by one ELP_BSD digit (the "1-digit MUL").
//
// A digit is +/- 2^s, so the product is a shift of the activation, possibly
// negated. Following the single-digit MAC figure, the activation first passes an
// inverter (a row of XOR gates driven by the digit's sign bit) and then a
// barrel shifter driven by the digit's shift-count index. The index-to-shift
// table is hard-coded from the format (SPEC), so the index from the encoded
// weight drives the shifter directly.
//
// Two's complement negation is completed downstream: the unit outputs the
// one's complement ~(a << s) on prod, together with corr = sign, and the adder
// that consumes prod must add corr as a +1. To make this exact, the shifter
// fills the vacated low bits with the sign bit (ones for a negative digit),
// which is this design's choice: with zero fill, the +1 would have to be added
// at bit position s instead of bit 0. The barrel shifter is log2 stages of
// 2:1 multiplexers, one per bit of the shift count.
//
// Interface: act is a signed ACT_W-bit activation, neg the digit's sign bit
// (tie to 0 for an unsigned digit), idx the shift-count index. Purely
// combinational. OUT_W must hold ACT_W plus the largest shift count.
module digit_mul
  import elp_bsd_pkg::*;
#(
  parameter digit_spec_t SPEC  = D_S_0TO7,  // digit specification (shift-count table)
  parameter int unsigned ACT_W = 8,         // activation bits, 2's complement
  parameter int unsigned OUT_W = 16,        // product bits
  localparam int unsigned IDX_W = (idx_bits(SPEC) == 0) ? 1 : idx_bits(SPEC)
) (
  input  logic signed [ACT_W-1:0] act,
  input  logic                    neg,    // sign bit of the digit, 1 = negative
  input  logic [IDX_W-1:0]        idx,    // shift-count index (ignored when n = 1)
  output logic [OUT_W-1:0]        prod,   // +(a << s), or ~(a << s) when neg
  output logic                    corr    // +1 still to be added for a negative digit
);

  logic [SHIFT_W-1:0] shamt;
  logic [OUT_W-1:0]   inv;
  logic [OUT_W-1:0]   stage [SHIFT_W+1];

  // Hard-coded index -> shift-count lookup.
  always_comb begin
    shamt = '0;
    for (int unsigned k = 0; k < MAX_SHIFTS; k++)
      if (k < int'(SPEC.n) && (idx_bits(SPEC) == 0 ? (k == 0) : (IDX_W'(k) == idx)))
        shamt = SPEC.shift[k];
  end

  // Inverter: XOR every (sign-extended) activation bit with the sign bit.
  assign inv = OUT_W'(signed'(act)) ^ {OUT_W{neg}};

  // Barrel shifter, filling with the sign bit.
  assign stage[0] = inv;
  for (genvar b = 0; b < SHIFT_W; b++) begin : g_stage
    localparam int unsigned S = 1 << b;
    assign stage[b+1] = shamt[b] ? {stage[b][OUT_W-1-S:0], {S{neg}}} : stage[b];
  end

  assign prod = stage[SHIFT_W];
  assign corr = neg;

endmodule
