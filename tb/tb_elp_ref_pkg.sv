// tb_elp_ref_pkg -- reference model of ELP_BSD weight values for the testbenches.
//
// Independent of the RTL package: each format's bit fields and shift-count
// lists are written out by hand here, from the format definitions:
//   FMT_A  {x,[1,0..7]}                     4 bits: s1 i1[2:0]
//   FMT_B  {x,[1,0..7],[1,1,2,4,5]}         7 bits: s1 i1[2:0] s2 i2[1:0]
//   FMT_C  {x,[1,0..7],[1,1,5]}             6 bits: s1 i1[2:0] s2 i2
//   FMT_D  {x,[1,0,2,5,7],[1,1,2,4,5]}      6 bits: s1 i1[1:0] s2 i2[1:0]
//   EX_U   {x,[0,0,1,2,3],[1,0,1]}          4 bits: i1[1:0] s2 i2
// A set sign bit makes the digit negative.
package tb_elp_ref_pkg;

  typedef enum int {REF_A, REF_B, REF_C, REF_D, REF_EX_U} ref_fmt_e;

  function automatic int pow2s(input bit neg, input int sh);
    return neg ? -(1 << sh) : (1 << sh);
  endfunction

  function automatic int ref_width(input ref_fmt_e f);
    case (f)
      REF_A:    return 4;
      REF_B:    return 7;
      REF_C:    return 6;
      REF_D:    return 6;
      default:  return 4;
    endcase
  endfunction

  function automatic int ref_value(input ref_fmt_e f, input int code);
    int l1245 [4] = '{1, 2, 4, 5};
    int l0257 [4] = '{0, 2, 5, 7};
    int l15   [2] = '{1, 5};
    case (f)
      REF_A:  return pow2s(code[3], code[2:0]);
      REF_B:  return pow2s(code[6], code[5:3]) + pow2s(code[2], l1245[code[1:0]]);
      REF_C:  return pow2s(code[5], code[4:2]) + pow2s(code[1], l15[code[0]]);
      REF_D:  return pow2s(code[5], l0257[code[4:3]]) + pow2s(code[2], l1245[code[1:0]]);
      default: return (1 << code[3:2]) + pow2s(code[1], code[0]);
    endcase
  endfunction

endpackage
