// mx_dot_normalise: the Normalise block of the Dot circuit together with the
// scale multiplier that follows it.
//
// Input: the exact Kulisch sum `dot` (BO bits, LSB weight 2^LSB2) and the
// product of the two block scales as a biased exponent st = s + t - 127
// (st_nan set when either scale was NaN). Output: the same value written as
//   value = dot_n * 2^(2-BO) * 2^(scale-127)
// i.e. dot_n is a BO-bit fraction with one integer bit, shifted left until its
// two top bits differ, and the shift is folded into the 8-bit E8M0 scale.
// If the scale would fall below 0 the shift is reduced (the result is then not
// fully normalised, and bits shifted out to the right are truncated); a scale
// above 254 or a NaN input scale gives scale 0xFF (NaN). A zero sum gives
// dot_n = 0, scale = 0. These rules, the output format and the one-cycle
// register are this design's choices: the paper names the block only.
module mx_dot_normalise
  import mx_pkg::*;
#(
  parameter int BO   = 43,
  parameter int LSB2 = -18,   // exponent of the LSB of `dot`
  localparam int SW  = 12
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [BO-1:0]  dot,
  input  logic signed [SW-1:0]  st,
  input  logic                  st_nan,
  output logic                  out_valid,
  output logic signed [BO-1:0]  dot_n,
  output logic [7:0]            scale
);
  // dot * 2^LSB2 = dot * 2^(2-BO) * 2^(KC), KC = LSB2 + BO - 2
  localparam int KC = LSB2 + BO - 2;

  logic [$clog2(BO+1)-1:0] lz;
  logic signed [SW+1:0]    sc;
  logic signed [BO-1:0]    dn;
  logic [7:0]              so;
  logic signed [SW+1:0]    sh;

  // number of redundant sign bits
  always_comb begin
    lz = '0;
    for (int i = BO - 2; i >= 0; i--) begin
      if (dot[i] != dot[BO-1]) break;
      lz = lz + 1'b1;
    end
  end

  always_comb begin
    sc = (SW+2)'(st) + (SW+2)'(KC) - (SW+2)'(lz);
    dn = dot <<< lz;
    sh = '0;
    so = sc[7:0];
    if (dot == '0) begin
      dn = '0;
      so = 8'd0;
    end else if (sc < 0) begin
      // stop at scale 0: shift by lz + sc (may be a right shift)
      sh = $signed((SW+2)'(lz)) + sc;
      if (sh >= 0) dn = dot <<< sh;
      else         dn = dot >>> (-sh);
      so = 8'd0;
    end else if (sc > 254) begin
      so = SCALE_NAN;
    end
    if (st_nan) so = SCALE_NAN;
  end

  always_ff @(posedge clk) begin
    dot_n <= dn;
    scale <= so;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
endmodule
