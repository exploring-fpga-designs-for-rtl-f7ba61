// mx_from_float: converts a block of K FP32 or BF16 values, together with
// their pre-computed E8M0 scale, into an MX block (K elements plus scale),
// rounding to nearest even. Each lane is an mx_float_to_elem. The output
// scale is the input scale, or NaN (0xFF) when the input scale is NaN or a
// lane holds a NaN/Inf that the element format cannot encode, so that NaNs
// always propagate as the paper requires.
// Timing: one block per cycle, one register stage (latency 1).
module mx_from_float
  import mx_pkg::*;
#(
  parameter int         K       = 32,
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
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [K-1:0][FW-1:0] x,
  input  logic [7:0]           scale_in,
  output logic                 out_valid,
  output logic [K-1:0][BI-1:0] elem,
  output logic [7:0]           scale
);
  logic [K-1:0][BI-1:0] ec;
  logic [K-1:0]         nn;

  for (genvar i = 0; i < K; i++) begin : g_lane
    mx_float_to_elem #(.FM(FM), .ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC), .OVF(OVF))
      u_cvt (.x(x[i]), .scale(scale_in), .elem(ec[i]), .need_nan(nn[i]));
  end

  always_ff @(posedge clk) begin
    elem  <= ec;
    scale <= (scale_in == SCALE_NAN || |nn) ? SCALE_NAN : scale_in;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
endmodule
