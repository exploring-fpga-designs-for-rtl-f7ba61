// mx_ref_pkg: reference arithmetic for the MX testbenches, written with real
// numbers and exhaustive code search so that it shares nothing with the RTL.
//   fp_val      - value of an unsigned FP element code, straight from the
//                 definition (subnormal when the exponent field is 0);
//   quant_fp    - nearest element code to a real value, ties to the even code,
//                 with the overflow rules of the OCP FP8 modes;
//   quant_int   - round to nearest even of v*2^(B-2), symmetric clamp;
//   f32_to_real - value of an FP32 bit pattern (finite inputs).
package mx_ref_pkg;

  function automatic real p2(input int n);
    return 2.0 ** n;
  endfunction

  function automatic real fp_val(input int code, input int e, input int m);
    int ef, mf, bias;
    bias = (1 << (e - 1)) - 1;
    ef = code >> m;
    mf = code & ((1 << m) - 1);
    if (ef == 0) return real'(mf) * p2(1 - bias - m);
    return real'((1 << m) + mf) * p2(ef - bias - m);
  endfunction

  // spec: 0 none, 1 IEEE-like (E5M2), 2 E4M3-like
  function automatic int max_code(input int e, input int m, input int spec);
    if (spec == 1) return (((1 << e) - 1) << m) - 1;
    if (spec == 2) return (1 << (e + m)) - 2;
    return (1 << (e + m)) - 1;
  endfunction

  function automatic real elem_real(input int code, input bit is_fp, input int e, input int m, input int b);
    int c;
    if (is_fp) begin
      c = code & ((1 << (e + m)) - 1);
      return ((code >> (e + m)) & 1) ? -fp_val(c, e, m) : fp_val(c, e, m);
    end
    c = (code >= (1 << (b - 1))) ? code - (1 << b) : code;
    return real'(c) * p2(2 - b);
  endfunction

  // ovf_sat: 1 saturating, 0 overflow mode
  function automatic int quant_fp(input real v, input int e, input int m, input int spec, input bit ovf_sat,
                                  output bit overflowed);
    real a, d, bd;
    int  best, mc, s;
    s  = (v < 0.0);
    a  = s ? -v : v;
    mc = max_code(e, m, spec);
    best = 0;
    bd = a;
    for (int c = 1; c <= mc + 1; c++) begin
      d = fp_val(c, e, m) - a;
      if (d < 0.0) d = -d;
      if (d < bd || (d == bd && (c % 2) == 0)) begin
        bd = d;
        best = c;
      end
    end
    overflowed = (best == mc + 1);
    if (overflowed) begin
      if (ovf_sat || spec == 0) best = mc;
      else if (spec == 1)       best = ((1 << e) - 1) << m;
      else                      best = (1 << (e + m)) - 1;
    end
    return (s << (e + m)) | best;
  endfunction

  function automatic real rne_real(input real x);
    real fl, d;
    fl = $floor(x);
    d  = x - fl;
    if (d > 0.5) return fl + 1.0;
    if (d < 0.5) return fl;
    if ($rtoi(fl - 2.0 * $floor(fl / 2.0)) != 0) return fl + 1.0;
    return fl;
  endfunction

  function automatic int quant_int(input real v, input int b, output bit overflowed);
    real r;
    int  q, lim;
    lim = (1 << (b - 1)) - 1;
    r   = rne_real(v * p2(b - 2));
    overflowed = 1'b0;
    if (r > real'(lim))  begin r = real'(lim);  overflowed = 1'b1; end
    if (r < real'(-lim)) begin r = real'(-lim); overflowed = 1'b1; end
    q = $rtoi(r);
    return q & ((1 << b) - 1);
  endfunction

  function automatic real f32_to_real(input logic [31:0] x);
    real r;
    if (x[30:23] == 8'd0) r = real'(x[22:0]) * p2(-149);
    else                  r = real'({1'b1, x[22:0]}) * p2(int'(x[30:23]) - 150);
    return x[31] ? -r : r;
  endfunction

  // random finite FP32 with exponent field in [elo, ehi]
  function automatic logic [31:0] rand_f32(input int elo, input int ehi);
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(elo + int'($urandom % (ehi - elo + 1)));
    return r;
  endfunction

endpackage
