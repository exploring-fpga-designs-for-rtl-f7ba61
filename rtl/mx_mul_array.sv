// mx_mul_array: the multiplier array of the Dot circuit. K element pairs of
// two MX blocks are decoded to signed fixed-point integers (mx_elem_decode)
// and multiplied exactly, so every product is an integer of b_int bits whose
// LSB weighs 2^(2*(1-bias-M)) for FP elements or 2^(2*(2-B)) for INT
// elements. Inputs may be FP or INT, outputs are always INT, as in the paper.
// Special codes give a product of 0 here; mx_specials flags them.
// Timing: one register stage, products appear one cycle after the inputs;
// out_valid follows in_valid.
module mx_mul_array
  import mx_pkg::*;
#(
  parameter bit         ELEM_FP = 1'b1,
  parameter int         E       = 4,
  parameter int         M       = 3,
  parameter int         B       = 8,
  parameter spec_mode_e SPEC    = SPEC_FN,
  parameter int         K       = 32,
  localparam int        BI      = elem_bits(ELEM_FP, E, M, B),
  localparam int        IW      = elem_int_bits(ELEM_FP, E, M, B),
  localparam int        PW      = 2 * IW
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [K-1:0][BI-1:0] a,
  input  logic [K-1:0][BI-1:0] b,
  output logic                out_valid,
  output logic [K-1:0][PW-1:0] prod
);
  logic signed [IW-1:0] av [K];
  logic signed [IW-1:0] bv [K];

  for (genvar i = 0; i < K; i++) begin : g_lane
    logic an, ai, az, as_, bn, bi_, bz, bs;
    mx_elem_decode #(.ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC)) u_da (
      .elem(a[i]), .value(av[i]), .is_nan(an), .is_inf(ai), .is_zero(az), .sign(as_));
    mx_elem_decode #(.ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC)) u_db (
      .elem(b[i]), .value(bv[i]), .is_nan(bn), .is_inf(bi_), .is_zero(bz), .sign(bs));
    always_ff @(posedge clk) begin
      prod[i] <= PW'(av[i] * bv[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
