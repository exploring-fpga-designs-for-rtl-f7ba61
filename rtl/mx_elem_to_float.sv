// mx_elem_to_float: one lane of the MX-to-float converter. The element is
// decoded to its signed fixed-point integer T (LSB weight 2^LE, see
// mx_elem_decode) and scaled by 2^(scale-127); the result is normalised by
// the position p of T's leading one and rounded to nearest even into FP32
// (FM = 23) or BF16 (FM = 7). With fe = p + LE + scale the float's biased
// exponent, T is shifted right by p-FM (normal) or 1-FM-LE-scale (subnormal)
// and the code is (max(fe,1)-1)*2^FM + rounded significand, so rounding
// carries and subnormals need no special case. fe >= 255 gives Inf. A NaN
// element or a NaN scale gives a quiet NaN; an Inf element gives Inf.
// The same lane converts a DotGeneral result to float when used with
// ELEM_FP = 0 and B = b_o. Combinational.
module mx_elem_to_float
  import mx_pkg::*;
#(
  parameter int         FM      = 23,
  parameter bit         ELEM_FP = 1'b1,
  parameter int         E       = 4,
  parameter int         M       = 3,
  parameter int         B       = 8,
  parameter spec_mode_e SPEC    = SPEC_FN,
  localparam int        FW      = 9 + FM,
  localparam int        BI      = elem_bits(ELEM_FP, E, M, B),
  localparam int        IW      = elem_int_bits(ELEM_FP, E, M, B)
) (
  input  logic [BI-1:0] elem,
  input  logic [7:0]    scale,
  output logic [FW-1:0] f
);
  localparam int LE = elem_lsb_exp(ELEM_FP, E, M, B);
  localparam int RW = IW + FM + 2;

  logic signed [IW-1:0] v;
  logic                 en, ei, ez, sgn;
  logic [RW-1:0]        t, q;
  int                   p, fe, n, code;
  logic                 half, rest;

  mx_elem_decode #(.ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC)) u_dec (
    .elem, .value(v), .is_nan(en), .is_inf(ei), .is_zero(ez), .sign(sgn));

  always_comb begin
    t = sgn ? RW'(-$signed({v[IW-1], v})) : RW'(v);
    p = 0;
    for (int i = 0; i < IW; i++) if (t[i]) p = i;
    fe   = p + LE + int'(scale);
    n    = (fe >= 1) ? p - FM : 1 - FM - LE - int'(scale);
    half = 1'b0;
    rest = 1'b0;
    if (n > 0) begin
      if (n >= RW) begin
        q = '0;
      end else begin
        q    = t >> n;
        half = t[n-1];
        rest = (n > 1) && |(t & ((RW'(1) << (n - 1)) - 1'b1));
        if (half && (rest || q[0])) q = q + 1'b1;
      end
    end else begin
      q = t << (-n);
    end
    code = ((fe > 1) ? (fe - 1) << FM : 0) + int'(q[FM+1:0]);
    if (fe >= 255 || code >= (255 << FM)) code = 255 << FM;
    if (t == '0) code = 0;
    f = {sgn, (FW-1)'(code)};
    if (ei)                          f = {sgn, 8'hFF, FM'(0)};
    if (en || scale == SCALE_NAN)    f = {1'b0, 8'hFF, 1'b1, (FM-1)'(0)};
  end
endmodule
