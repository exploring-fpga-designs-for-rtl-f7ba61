// mx_float_to_elem: one lane of the float-to-MX converter. Divides an FP32 or
// BF16 value by the block scale 2^(scale-127) and rounds it to nearest even
// into the element format.
// FP elements: the element's biased exponent is eb = exp - scale + bias; the
// significand is shifted right by (FM-M) + max(0, 1-eb) with round to nearest
// even, and the code is (max(eb,1)-1)*2^M + rounded significand, so a rounding
// carry moves into the exponent and subnormals come out naturally. Codes above
// the largest finite one overflow: saturating mode, and formats without
// specials, clamp to the largest finite value; overflow mode gives Inf (E5M2-
// like encodings) or NaN (E4M3-like). NaN in gives the NaN code; Inf gives the
// Inf code where there is one and is treated as NaN otherwise, as the paper
// specifies. Where the element has no NaN code, need_nan asks for the block
// scale to be set to NaN.
// INT elements: value * 2^(B-2) rounded to nearest even and clamped to
// +-(2^(B-1)-1) (symmetric clamp is this design's choice).
// FP32/BF16 subnormal inputs are normalised first. Combinational.
module mx_float_to_elem
  import mx_pkg::*;
#(
  parameter int         FM      = 23,
  parameter bit         ELEM_FP = 1'b1,
  parameter int         E       = 4,
  parameter int         M       = 3,
  parameter int         B       = 8,
  parameter spec_mode_e SPEC    = SPEC_FN,
  parameter ovf_mode_e  OVF     = OVF_SAT,
  localparam int        FW      = 9 + FM,
  localparam int        BI      = elem_bits(ELEM_FP, E, M, B)
) (
  input  logic [FW-1:0] x,
  input  logic [7:0]    scale,
  output logic [BI-1:0] elem,
  output logic          need_nan
);
  localparam int BIAS = ELEM_FP ? (1 << (E - 1)) - 1 : 0;
  localparam int MAXC = ELEM_FP ? fp_max_code(E, M, SPEC) : (1 << (B - 1)) - 1;
  localparam int ALL1 = ELEM_FP ? (1 << (E + M)) - 1 : 0;
  localparam int INFC = ELEM_FP ? ((1 << E) - 1) << M : 0;
  localparam int CM   = ELEM_FP ? E + M : 1;

  logic          sgn;
  logic [7:0]    ef;
  logic [FM-1:0] f;
  logic [FM:0]   sig;
  int            lzc, ex, eb, sh, code;
  logic          is_nan, is_inf;

  // round to nearest even of v / 2^n, n >= 1
  function automatic int rne(input logic [FM:0] v, input int n);
    logic [FM+2:0] w, q;
    logic          half, rest;
    if (n > FM + 2) return 0;
    w    = (FM+3)'(v);
    q    = w >> n;
    half = w[n-1];
    rest = |(w & (((FM+3)'(1) << (n - 1)) - 1'b1));
    if (half && (rest || q[0])) q = q + 1'b1;
    return int'(q);
  endfunction

  always_comb begin
    sgn    = x[FW-1];
    ef     = x[FW-2:FM];
    f      = x[FM-1:0];
    is_nan = (ef == 8'hFF) && (f != '0);
    is_inf = (ef == 8'hFF) && (f == '0);
    // normalise the significand
    sig = {(ef != 8'd0), f};
    lzc = 0;
    if (ef == 8'd0) begin
      for (int i = FM; i >= 0; i--) begin
        if (sig[i]) break;
        lzc++;
      end
      sig = sig << lzc;
    end
    ex       = (ef == 8'd0) ? 1 - lzc : int'(ef);
    need_nan = 1'b0;
    elem     = '0;
    eb       = 0;
    sh       = 0;
    code     = 0;
    if (ELEM_FP) begin
      eb   = ex - int'(scale) + BIAS;
      sh   = (FM - M) + ((eb < 1) ? 1 - eb : 0);
      code = (sig == '0) ? 0 : ((eb > 1) ? (eb - 1) << M : 0) + rne(sig, sh);
      if (code > MAXC) begin
        if (OVF == OVF_SAT || SPEC == SPEC_NONE) code = MAXC;
        else if (SPEC == SPEC_IEEE)              code = INFC;
        else                                     code = ALL1;
      end
      if (is_nan || (is_inf && SPEC != SPEC_IEEE)) begin
        code     = ALL1;
        need_nan = (SPEC == SPEC_NONE);
      end else if (is_inf) begin
        code = INFC;
      end
      if (need_nan) code = 0;
      elem = {sgn, CM'(code)};
    end else begin
      // magnitude = sig * 2^(ex - scale - FM + B - 2)
      sh   = FM - (ex - int'(scale)) - (B - 2);
      code = (sig == '0) ? 0 : (sh <= 0) ? MAXC + 1 : rne(sig, sh);
      if (code > MAXC) code = MAXC;
      if (is_nan || is_inf) begin
        code     = 0;
        need_nan = 1'b1;
      end
      elem = sgn ? BI'(-code) : BI'(code);
    end
  end
endmodule
