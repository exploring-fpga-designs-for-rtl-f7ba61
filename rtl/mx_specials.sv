// mx_specials: the Specials block of the Dot circuit. For formats with special
// encodings it scans the K element pairs: a NaN operand, or Inf times zero,
// makes the product NaN; an Inf operand otherwise makes it Inf with the sign
// of the product. The block result is NaN if any product is NaN or if Infs of
// both signs occur, else Inf (with its sign) if any product is Inf. Flags are
// constant zero for formats without specials. Combinational; the Dot delays
// the flags to line up with its pipeline. Reporting the sign of the Inf is
// this design's addition to the paper's NaN and Inf flags.
module mx_specials
  import mx_pkg::*;
#(
  parameter bit         ELEM_FP = 1'b1,
  parameter int         E       = 4,
  parameter int         M       = 3,
  parameter int         B       = 8,
  parameter spec_mode_e SPEC    = SPEC_FN,
  parameter int         K       = 32,
  localparam int        BI      = elem_bits(ELEM_FP, E, M, B),
  localparam int        IW      = elem_int_bits(ELEM_FP, E, M, B)
) (
  input  logic [K-1:0][BI-1:0] a,
  input  logic [K-1:0][BI-1:0] b,
  output mx_flags_t            flags
);
  logic [K-1:0] pn, pp, pm;   // product NaN, +Inf, -Inf

  for (genvar i = 0; i < K; i++) begin : g_lane
    logic signed [IW-1:0] av, bv;
    logic an, ai, az, as_, bn, bi_, bz, bs;
    mx_elem_decode #(.ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC)) u_da (
      .elem(a[i]), .value(av), .is_nan(an), .is_inf(ai), .is_zero(az), .sign(as_));
    mx_elem_decode #(.ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC)) u_db (
      .elem(b[i]), .value(bv), .is_nan(bn), .is_inf(bi_), .is_zero(bz), .sign(bs));
    always_comb begin
      pn[i] = an | bn | (ai & bz) | (bi_ & az);
      pp[i] = !pn[i] && (ai | bi_) && !(as_ ^ bs);
      pm[i] = !pn[i] && (ai | bi_) &&  (as_ ^ bs);
    end
  end

  always_comb begin
    flags.nan = (|pn) | ((|pp) & (|pm));
    flags.inf = !flags.nan && ((|pp) | (|pm));
    flags.neg = flags.inf && (|pm);
  end
endmodule
