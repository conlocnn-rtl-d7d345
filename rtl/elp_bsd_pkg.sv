// elp_bsd_pkg -- types and constants of the ELP_BSD weight format.
//
// An ELP_BSD (Encoded Low-Precision Binary Signed Digit) weight is a sum of m
// power-of-two digits, value = SF * sum_i (+/-) 2^shift_i. Each digit has its
// own short list of allowed shift counts, and the weight stores, per digit, an
// optional sign bit and the index of the shift count in that list, on
// ceil(log2(n_i)) bits. Digit 1 sits in the most significant bits of the word,
// and inside a digit the sign bit sits above the index. A set sign bit means a
// negative digit; a digit declared unsigned has no sign bit and is positive.
// The scaling factor SF is per layer and is applied outside the processing
// array, so the hardware only ever sees the integer sum of signed powers of two.
//
// The field layout, the signed/unsigned option and the four formats of the
// hardware table (FMT_A .. FMT_D) follow the paper. The limits MAX_DIGITS = 3
// (the paper says 1-3 digits per PE are normally enough), MAX_SHIFTS = 8 and a
// largest shift count of 7 are this design's choices; they cover every format
// the paper evaluates. Index codes at or above n_i (possible only when n_i is
// not a power of two) decode to a shift count of 0.
package elp_bsd_pkg;

  localparam int unsigned MAX_DIGITS = 3;  // digits (1-digit units) per PE
  localparam int unsigned MAX_SHIFTS = 8;  // shift counts listed per digit
  localparam int unsigned SHIFT_W    = 3;  // shift counts 0..7

  // Specification of one digit: [Signed, Shift count_0, ..., Shift count_{n-1}]
  typedef struct packed {
    logic                                is_signed;
    logic [3:0]                          n;      // number of shift counts, 1..8
    logic [MAX_SHIFTS-1:0][SHIFT_W-1:0]  shift;  // shift[k] = Shift count_k
  } digit_spec_t;

  // Specification of a whole format; digit[0] is the first (most significant) digit.
  typedef struct packed {
    logic [1:0]                          num_digits;  // 1..MAX_DIGITS
    digit_spec_t [MAX_DIGITS-1:0]        digit;
  } elp_bsd_fmt_t;

  // Build a digit specification from its list of shift counts.
  function automatic digit_spec_t mk_digit(input logic is_signed, input int unsigned n,
                                           input int unsigned c0, input int unsigned c1,
                                           input int unsigned c2, input int unsigned c3,
                                           input int unsigned c4, input int unsigned c5,
                                           input int unsigned c6, input int unsigned c7);
    digit_spec_t d;
    d.is_signed = is_signed;
    d.n         = 4'(n);
    d.shift[0]  = SHIFT_W'(c0);
    d.shift[1]  = SHIFT_W'(c1);
    d.shift[2]  = SHIFT_W'(c2);
    d.shift[3]  = SHIFT_W'(c3);
    d.shift[4]  = SHIFT_W'(c4);
    d.shift[5]  = SHIFT_W'(c5);
    d.shift[6]  = SHIFT_W'(c6);
    d.shift[7]  = SHIFT_W'(c7);
    return d;
  endfunction

  function automatic elp_bsd_fmt_t mk_fmt(input int unsigned num_digits, input digit_spec_t d0,
                                          input digit_spec_t d1, input digit_spec_t d2);
    elp_bsd_fmt_t f;
    f.num_digits = 2'(num_digits);
    f.digit[0]   = d0;
    f.digit[1]   = d1;
    f.digit[2]   = d2;
    return f;
  endfunction

  localparam digit_spec_t NO_DIGIT = '0;

  // Digit lists of the formats in the paper's hardware table (SF omitted).
  localparam digit_spec_t D_S_0TO7  = mk_digit(1'b1, 8, 0, 1, 2, 3, 4, 5, 6, 7); // [1,0,1,2,3,4,5,6,7]
  localparam digit_spec_t D_S_1245  = mk_digit(1'b1, 4, 1, 2, 4, 5, 0, 0, 0, 0); // [1,1,2,4,5]
  localparam digit_spec_t D_S_15    = mk_digit(1'b1, 2, 1, 5, 0, 0, 0, 0, 0, 0); // [1,1,5]
  localparam digit_spec_t D_S_0257  = mk_digit(1'b1, 4, 0, 2, 5, 7, 0, 0, 0, 0); // [1,0,2,5,7]

  localparam elp_bsd_fmt_t FMT_A = mk_fmt(1, D_S_0TO7, NO_DIGIT, NO_DIGIT);  // 4-bit weights
  localparam elp_bsd_fmt_t FMT_B = mk_fmt(2, D_S_0TO7, D_S_1245, NO_DIGIT);  // 7-bit weights
  localparam elp_bsd_fmt_t FMT_C = mk_fmt(2, D_S_0TO7, D_S_15,   NO_DIGIT);  // 6-bit weights
  localparam elp_bsd_fmt_t FMT_D = mk_fmt(2, D_S_0257, D_S_1245, NO_DIGIT);  // 6-bit weights

  // The two worked examples of the format figure.
  localparam elp_bsd_fmt_t FMT_EX_SIGNED   = mk_fmt(2, mk_digit(1'b1, 4, 0, 1, 2, 3, 0, 0, 0, 0),
                                                    mk_digit(1'b1, 2, 0, 1, 0, 0, 0, 0, 0, 0), NO_DIGIT);
  localparam elp_bsd_fmt_t FMT_EX_UNSIGNED = mk_fmt(2, mk_digit(1'b0, 4, 0, 1, 2, 3, 0, 0, 0, 0),
                                                    mk_digit(1'b1, 2, 0, 1, 0, 0, 0, 0, 0, 0), NO_DIGIT);

  // Default format of this design: two digits, the PE of the processing-element figure.
  localparam elp_bsd_fmt_t FMT_DEFAULT = FMT_B;

  // ceil(log2(n)): bits of the shift-count index (0 when a digit has one shift count).
  function automatic int unsigned idx_bits(input digit_spec_t d);
    return (d.n <= 1) ? 0 : $clog2(int'(d.n));
  endfunction

  // Bits taken by digit i of format f (0 for digits beyond num_digits).
  function automatic int unsigned digit_width(input elp_bsd_fmt_t f, input int unsigned i);
    if (i >= int'(f.num_digits)) return 0;
    return int'(f.digit[i].is_signed) + idx_bits(f.digit[i]);
  endfunction

  // Bits of a whole weight.
  function automatic int unsigned weight_width(input elp_bsd_fmt_t f);
    int unsigned w = 0;
    for (int unsigned i = 0; i < MAX_DIGITS; i++) w += digit_width(f, i);
    return w;
  endfunction

  // Position of the least significant bit of digit i (digit 0 is the most significant).
  function automatic int unsigned digit_lsb(input elp_bsd_fmt_t f, input int unsigned i);
    int unsigned l = 0;
    for (int unsigned j = i + 1; j < MAX_DIGITS; j++) l += digit_width(f, j);
    return l;
  endfunction

  // Largest shift count any digit of f can select.
  function automatic int unsigned max_shift(input elp_bsd_fmt_t f);
    int unsigned m = 0;
    for (int unsigned i = 0; i < MAX_DIGITS; i++)
      if (i < int'(f.num_digits))
        for (int unsigned k = 0; k < MAX_SHIFTS; k++)
          if (k < int'(f.digit[i].n) && int'(f.digit[i].shift[k]) > m) m = int'(f.digit[i].shift[k]);
    return m;
  endfunction

  // Integer value (without SF) of an encoded weight; used by testbenches and
  // by anyone converting weights in SystemVerilog.
  function automatic int decode(input elp_bsd_fmt_t f, input logic [31:0] w);
    int v = 0;
    for (int unsigned i = 0; i < MAX_DIGITS; i++) begin
      if (i < int'(f.num_digits)) begin
        int unsigned lsb = digit_lsb(f, i);
        int unsigned ib  = idx_bits(f.digit[i]);
        int unsigned idx = 0;
        int unsigned sh;
        logic        neg;
        for (int unsigned b = 0; b < ib; b++) idx[b] = w[lsb + b];
        sh  = (idx < int'(f.digit[i].n)) ? int'(f.digit[i].shift[idx]) : 0;
        neg = f.digit[i].is_signed ? w[lsb + ib] : 1'b0;
        v   = neg ? v - (1 << sh) : v + (1 << sh);
      end
    end
    return v;
  endfunction

endpackage
