// mx_to_float: converts an MX block (K elements plus E8M0 scale) back to K
// FP32 or BF16 values, each element times 2^(scale-127), rounded to nearest
// even where the float cannot hold it exactly (subnormal range), Inf beyond
// its range, NaN for NaN elements or a NaN scale. Each lane is an
// mx_elem_to_float. Timing: one block per cycle, latency 1.
module mx_to_float
  import mx_pkg::*;
#(
  parameter int         K       = 32,
  parameter int         FM      = 23,
  parameter bit         ELEM_FP = 1'b1,
  parameter int         E       = 4,
  parameter int         M       = 3,
  parameter int         B       = 8,
  parameter spec_mode_e SPEC    = SPEC_FN,
  localparam int        FW      = 9 + FM,
  localparam int        BI      = elem_bits(ELEM_FP, E, M, B)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [K-1:0][BI-1:0] elem,
  input  logic [7:0]           scale,
  output logic                 out_valid,
  output logic [K-1:0][FW-1:0] f
);
  logic [K-1:0][FW-1:0] fc;
  for (genvar i = 0; i < K; i++) begin : g_lane
    mx_elem_to_float #(.FM(FM), .ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC))
      u_cvt (.elem(elem[i]), .scale, .f(fc[i]));
  end
  always_ff @(posedge clk) f <= fc;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
endmodule
