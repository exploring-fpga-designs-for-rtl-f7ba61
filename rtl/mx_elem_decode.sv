// mx_elem_decode: turns one MX element into the signed fixed-point integer the
// multipliers work on, and reports whether it is a special value.
//
// FP element S.E.M (bias 2^(E-1)-1): magnitude = {e!=0, m} << (max(e,1)-1),
// a (2^E+M-1)-bit integer whose LSB weighs 2^(1-bias-M); the sign is then
// applied, giving IW = 1+2^E+(M-1) bits, half of b_int in the paper's width
// table. An INT element is passed through (IW = B). Special codes (NaN, Inf)
// are flagged and decode to 0. Purely combinational.
module mx_elem_decode
  import mx_pkg::*;
#(
  parameter bit         ELEM_FP = 1'b1,
  parameter int         E       = 4,
  parameter int         M       = 3,
  parameter int         B       = 8,
  parameter spec_mode_e SPEC    = SPEC_FN,
  localparam int        BI      = elem_bits(ELEM_FP, E, M, B),
  localparam int        IW      = elem_int_bits(ELEM_FP, E, M, B)
) (
  input  logic [BI-1:0]        elem,
  output logic signed [IW-1:0] value,
  output logic                 is_nan,
  output logic                 is_inf,
  output logic                 is_zero,
  output logic                 sign
);
  generate
    if (ELEM_FP) begin : g_fp
      logic [E-1:0]    ef;
      logic [M-1:0]    mf;
      logic [IW-1:0]   mag;
      logic [IW-1:0]   sig;
      always_comb begin
        ef   = elem[E+M-1:M];
        mf   = elem[M-1:0];
        sign = elem[E+M];
        is_nan = 1'b0;
        is_inf = 1'b0;
        if (SPEC == SPEC_IEEE && &ef) begin
          is_nan = |mf;
          is_inf = ~|mf;
        end else if (SPEC == SPEC_FN && &ef && &mf) begin
          is_nan = 1'b1;
        end
        sig = IW'({(ef != '0), mf});
        mag = (ef == '0) ? sig : sig << (ef - 1'b1);
        if (is_nan || is_inf) mag = '0;
        is_zero = (mag == '0) && !is_nan && !is_inf;
        value   = sign ? -$signed(mag) : $signed(mag);
      end
    end else begin : g_int
      always_comb begin
        value   = $signed(elem);
        sign    = elem[BI-1];
        is_nan  = 1'b0;
        is_inf  = 1'b0;
        is_zero = (elem == '0);
      end
    end
  endgenerate
endmodule
