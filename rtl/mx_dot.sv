// mx_dot: the MX "Dot" operation, Dot(A,B,s,t) = (s*t) * sum_p A_p*B_p, for one
// pair of K-element blocks with E8M0 scales s and t.
//
// Structure (after the paper's Dot figure): a multiplier array turns FP or INT
// element pairs into exact integer products (b_int bits), a pairwise adder
// tree sums them without error into b_o = b_int + log2(K) bits, the two
// scales are multiplied (exponents added), and a normaliser shifts the sum
// and folds the shift into the output scale. For formats with special
// encodings a Specials block raises NaN / Inf flags.
// Output value: dot * 2^(2-b_o) * 2^(scale-127); scale 0xFF means NaN.
// Timing: fully pipelined, one block pair per cycle, latency
// LAT = 1 (multipliers) + ceil(log2(K)/2) (adder tree) + 1 (normalise) cycles
// (5 for K = 32). The register placement is this design's choice.
module mx_dot
  import mx_pkg::*;
#(
  parameter bit         ELEM_FP = 1'b1,
  parameter int         E       = 4,
  parameter int         M       = 3,
  parameter int         B       = 8,
  parameter spec_mode_e SPEC    = SPEC_FN,
  parameter int         K       = 32,
  localparam int        BI      = elem_bits(ELEM_FP, E, M, B),
  localparam int        PW      = prod_bits(ELEM_FP, E, M, B),
  localparam int        BO      = dot_bits(ELEM_FP, E, M, B, K),
  localparam int        TL      = ($clog2(K) + 1) / 2,
  localparam int        LAT     = TL + 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [K-1:0][BI-1:0] a,
  input  logic [K-1:0][BI-1:0] b,
  input  logic [7:0]           s,
  input  logic [7:0]           t,
  output logic                 out_valid,
  output logic signed [BO-1:0] dot,
  output logic [7:0]           scale,
  output mx_flags_t            flags
);
  logic [K-1:0][PW-1:0] prod;
  logic                 pv, tv;
  logic signed [BO-1:0] sum;
  mx_flags_t            fl_c;

  mx_mul_array #(.ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC), .K(K)) u_mul (
    .clk, .rst_n, .in_valid, .a, .b, .out_valid(pv), .prod);

  mx_specials #(.ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC), .K(K)) u_spec (
    .a, .b, .flags(fl_c));

  mx_adder_tree #(.N(K), .W_IN(PW), .REG_EVERY(2)) u_tree (
    .clk, .rst_n, .in_valid(pv), .in_vec(prod), .out_valid(tv), .sum);

  // s (x) t: E8M0 multiply is an exponent add; delayed to meet the sum.
  logic signed [11:0] st_d [LAT];
  logic               sn_d [LAT];
  mx_flags_t          fl_d [LAT];
  always_ff @(posedge clk) begin
    st_d[0] <= 12'(s) + 12'(t) - 12'sd127;
    sn_d[0] <= (s == SCALE_NAN) || (t == SCALE_NAN);
    fl_d[0] <= fl_c;
    for (int i = 1; i < LAT; i++) begin
      st_d[i] <= st_d[i-1];
      sn_d[i] <= sn_d[i-1];
      fl_d[i] <= fl_d[i-1];
    end
  end

  mx_dot_normalise #(.BO(BO), .LSB2(2 * elem_lsb_exp(ELEM_FP, E, M, B))) u_nrm (
    .clk, .rst_n, .in_valid(tv), .dot(sum), .st(st_d[LAT-2]), .st_nan(sn_d[LAT-2]),
    .out_valid, .dot_n(dot), .scale);

  assign flags = fl_d[LAT-1];
endmodule
