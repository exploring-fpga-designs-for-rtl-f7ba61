// mx_add_nrm: adder with normalisation, the building block of DotGeneral. It
// adds two numbers of the form value = op * 2^(2-W) * 2^(scale-127), where op
// is a W-bit two's-complement fraction and scale an E8M0 exponent, the way a
// floating-point adder does (after the paper's add-with-normalise figure):
//   Sort     - the operand with the larger scale becomes (scale1, op1);
//   Shift    - op0 is shifted right by scale1-scale0 into W+3 bits, the
//              three extra bits being guard, round and sticky;
//   Sign ext - op1 is extended to the same W+3 bits;
//   Add      - a W+4-bit sum;
//   Round + Overflow - round to nearest even back to W bits; if the rounded
//              sum does not fit, it is shifted one more place and the scale
//              incremented.
// A NaN scale (0xFF) on either input, or a scale that overflows past 254,
// gives scale_out = 0xFF. The result is not shifted left after cancellation
// (the paper's figure shows no such step), so it may be unnormalised; it is
// still exact to within half an output ULP.
// Timing: combinational datapath with one output register, latency 1 cycle,
// one addition per cycle.
module mx_add_nrm
  import mx_pkg::*;
#(
  parameter int W = 43
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [7:0]          scale0,
  input  logic signed [W-1:0] op0,
  input  logic [7:0]          scale1,
  input  logic signed [W-1:0] op1,
  output logic                out_valid,
  output logic [7:0]          scale_out,
  output logic signed [W-1:0] out
);
  localparam int XW = W + 3;

  logic [7:0]              s_sm, s_bg;
  logic signed [W-1:0]     o_sm, o_bg;
  logic [8:0]              d;
  logic signed [2*XW-1:0]  wide;
  logic signed [XW-1:0]    sh;
  logic                    sticky;
  logic signed [XW:0]      sum;
  logic signed [W:0]       r0;
  logic signed [W-1:0]     r1, res;
  logic [8:0]              sres;

  // round-to-nearest-even of v / 2^n (floor-based two's complement)
  function automatic logic signed [XW:0] rne_shift(input logic signed [XW:0] v, input int n);
    logic signed [XW:0] q;
    logic               half, rest;
    q    = v >>> n;
    half = v[n-1];
    rest = (n > 1) ? |(v & ((XW+1)'(1) << (n - 1)) - 1'b1) : 1'b0;
    if (half && (rest || q[0])) q = q + 1'b1;
    return q;
  endfunction

  always_comb begin
    // Sort
    if (scale0 > scale1) begin
      s_sm = scale1; o_sm = op1; s_bg = scale0; o_bg = op0;
    end else begin
      s_sm = scale0; o_sm = op0; s_bg = scale1; o_bg = op1;
    end
    // Shift with guard, round and sticky
    d      = {1'b0, s_bg} - {1'b0, s_sm};
    if (d > 9'(XW)) d = 9'(XW);
    wide   = $signed({o_sm, 3'b000, {XW{1'b0}}}) >>> d;
    sticky = |wide[XW-1:0];
    sh     = wide[2*XW-1:XW] | XW'(sticky);
    // Sign extend and add
    sum    = (XW+1)'($signed({o_bg, 3'b000})) + (XW+1)'(sh);
    // Round + Overflow
    r0     = (W+1)'(rne_shift(sum, 3));
    r1     = W'(rne_shift(sum, 4));
    if (r0[W] == r0[W-1]) begin
      res  = r0[W-1:0];
      sres = {1'b0, s_bg};
    end else begin
      res  = r1;
      sres = {1'b0, s_bg} + 9'd1;
    end
    if (scale0 == SCALE_NAN || scale1 == SCALE_NAN || sres > 9'd254) begin
      sres = {1'b0, SCALE_NAN};
      res  = '0;
    end
  end

  always_ff @(posedge clk) begin
    scale_out <= sres[7:0];
    out       <= res;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
endmodule
