// mx_pkg: types and width rules shared by the MX arithmetic blocks.
//
// An MX block is K elements that share one E8M0 scale (a biased power-of-two
// exponent, 0xFF meaning NaN). Elements are either minifloats ExMy or signed
// integers INTb. The width rules below are those of the Dot circuit:
//   b_i   = 1+E+M                 (FP)   or B      (INT)
//   b_int = 2(1 + 2^E + (M-1))    (FP)   or 2B     (INT)
//   b_o   = b_int + log2(K)
// The special-value behaviour of an FP element follows the four OCP FP8 cases
// (E5M2-like or E4M3-like encodings, overflow or saturating mode) or can be
// switched off. The fixed-point meaning given to an integer element
// (value = int * 2^(2-B)) and the 3-bit special flag struct are this
// design's own choices.
package mx_pkg;

  // Special-value encodings an FP element may carry.
  //   SPEC_NONE: no specials, every code is a finite number (FP6, FP4).
  //   SPEC_IEEE: E5M2-like, exponent all ones is Inf (mantissa 0) or NaN.
  //   SPEC_FN  : E4M3-like, only S.1..1.1..1 is NaN, no Inf.
  typedef enum logic [1:0] {SPEC_NONE = 2'd0, SPEC_IEEE = 2'd1, SPEC_FN = 2'd2} spec_mode_e;

  // Conversion overflow behaviour (OCP FP8): OFL gives Inf (or NaN if no Inf),
  // SAT clamps to the largest finite value.
  typedef enum logic {OVF_OFL = 1'b0, OVF_SAT = 1'b1} ovf_mode_e;

  // Flags produced by the Specials logic and carried through DotGeneral.
  typedef struct packed {
    logic nan;
    logic inf;
    logic neg;   // sign of the infinity when inf is set
  } mx_flags_t;

  localparam logic [7:0] SCALE_NAN = 8'hFF;

  function automatic int clog2i(input int n);
    int r = 0;
    while ((1 << r) < n) r++;
    return r;
  endfunction

  // Width of one element.
  function automatic int elem_bits(input bit is_fp, input int e, input int m, input int b);
    return is_fp ? 1 + e + m : b;
  endfunction

  // Signed fixed-point width of one element on the multiplier input (b_int/2).
  function automatic int elem_int_bits(input bit is_fp, input int e, input int m, input int b);
    return is_fp ? 1 + (1 << e) + (m - 1) : b;
  endfunction

  // b_int and b_o of the Dot circuit.
  function automatic int prod_bits(input bit is_fp, input int e, input int m, input int b);
    return 2 * elem_int_bits(is_fp, e, m, b);
  endfunction

  function automatic int dot_bits(input bit is_fp, input int e, input int m, input int b, input int k);
    return prod_bits(is_fp, e, m, b) + clog2i(k);
  endfunction

  // Exponent of the LSB of an element's fixed-point form:
  // FP: 1-bias-M, INT: 2-B.
  function automatic int elem_lsb_exp(input bit is_fp, input int e, input int m, input int b);
    return is_fp ? 1 - ((1 << (e - 1)) - 1) - m : 2 - b;
  endfunction

  // Unbiased exponent of the largest power of two in the element format.
  function automatic int elem_emax(input bit is_fp, input int e, input spec_mode_e sp);
    int bias;
    bias = (1 << (e - 1)) - 1;
    if (!is_fp) return 0;
    return (sp == SPEC_IEEE) ? (1 << e) - 2 - bias : (1 << e) - 1 - bias;
  endfunction

  // Largest finite code of an FP element (sign bit excluded).
  function automatic int fp_max_code(input int e, input int m, input spec_mode_e sp);
    case (sp)
      SPEC_IEEE: return (((1 << e) - 1) << m) - 1;
      SPEC_FN:   return (1 << (e + m)) - 2;
      default:   return (1 << (e + m)) - 1;
    endcase
  endfunction

endpackage
