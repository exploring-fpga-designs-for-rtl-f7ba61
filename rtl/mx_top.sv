// mx_top: an MX dot-product engine built from the library blocks: it takes two
// float vectors of NBLK*K values, puts both into MX form on the fly and returns
// their dot product as a float.
//   1. mx_scale_calc  - one per block and operand: shared E8M0 scale computed
//                       at inference time from the block's largest exponent;
//   2. mx_from_float  - the floats (delayed to meet their scales) are divided
//                       by the scale and rounded to the element format;
//   3. mx_dot_general - exact in-block dot products (mx_dot), then a tree of
//                       normalising adders across blocks (mx_add_nrm);
//   4. mx_elem_to_float - the (scale, fraction) result is rounded to float;
//   5. mx_to_float    - the quantized operands are also turned back into
//                       floats (scale times element), the dequantized
//                       vectors the engine actually multiplied.
// Outputs: the float result, the raw DotGeneral result (out, scale: value =
// out * 2^(2-b_o) * 2^(scale-127)), the NaN/Inf flags and the quantized MX
// operands and scales with their dequantized FP32 values (dqx, dqy, one
// cycle after q_valid), which show what the engine actually multiplied.
// The element format defaults to MXFP8 E4M3 (OCP E4M3 specials, saturating
// conversion) with the standard's block size K = 32; inputs are FP32. The
// vector length NBLK*K = 128 and the way the stages are chained are this
// design's choices; the paper describes the blocks, not this engine.
// Timing: one vector pair per cycle, latency LAT = LSC + 1 + LDG + 1
// (4 + 1 + 7 + 1 = 13 cycles at the defaults).
module mx_top
  import mx_pkg::*;
#(
  parameter bit         ELEM_FP = 1'b1,
  parameter int         E       = 4,
  parameter int         M       = 3,
  parameter int         B       = 8,
  parameter spec_mode_e SPEC    = SPEC_FN,
  parameter ovf_mode_e  OVF     = OVF_SAT,
  parameter int         K       = 32,
  parameter int         NBLK    = 4,
  parameter int         FM      = 23,
  localparam int        FW      = 9 + FM,
  localparam int        BI      = elem_bits(ELEM_FP, E, M, B),
  localparam int        BO      = dot_bits(ELEM_FP, E, M, B, K),
  localparam int        LSC     = ($clog2(K) + 1) / 2 + 1,
  localparam int        LDG     = ($clog2(K) + 1) / 2 + 2 + $clog2(NBLK),
  localparam int        LAT     = LSC + LDG + 2
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic [NBLK-1:0][K-1:0][FW-1:0] xf,
  input  logic [NBLK-1:0][K-1:0][FW-1:0] yf,
  output logic                           out_valid,
  output logic [FW-1:0]                  result,
  output logic signed [BO-1:0]           raw_out,
  output logic [7:0]                     raw_scale,
  output mx_flags_t                      flags,
  output logic [NBLK-1:0][K-1:0][BI-1:0] qx,
  output logic [NBLK-1:0][K-1:0][BI-1:0] qy,
  output logic [NBLK-1:0][7:0]           qsx,
  output logic [NBLK-1:0][7:0]           qsy,
  output logic                           q_valid,
  output logic [NBLK-1:0][K-1:0][FW-1:0] dqx,
  output logic [NBLK-1:0][K-1:0][FW-1:0] dqy,
  output logic                           dq_valid
);
  logic [NBLK-1:0][7:0] sx, sy;
  logic [NBLK-1:0]      scv, scw, qv, qw, dqv, dqw;

  // floats wait for their scales
  logic [NBLK-1:0][K-1:0][FW-1:0] xd [LSC];
  logic [NBLK-1:0][K-1:0][FW-1:0] yd [LSC];
  always_ff @(posedge clk) begin
    xd[0] <= xf;
    yd[0] <= yf;
    for (int i = 1; i < LSC; i++) begin
      xd[i] <= xd[i-1];
      yd[i] <= yd[i-1];
    end
  end

  for (genvar c = 0; c < NBLK; c++) begin : g_blk
    mx_scale_calc #(.K(K), .FM(FM), .ELEM_FP(ELEM_FP), .E(E), .SPEC(SPEC)) u_scx (
      .clk, .rst_n, .in_valid, .x(xf[c]), .out_valid(scv[c]), .scale(sx[c]));
    mx_scale_calc #(.K(K), .FM(FM), .ELEM_FP(ELEM_FP), .E(E), .SPEC(SPEC)) u_scy (
      .clk, .rst_n, .in_valid, .x(yf[c]), .out_valid(scw[c]), .scale(sy[c]));
    mx_from_float #(.K(K), .FM(FM), .ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC), .OVF(OVF)) u_qx (
      .clk, .rst_n, .in_valid(scv[c]), .x(xd[LSC-1][c]), .scale_in(sx[c]),
      .out_valid(qv[c]), .elem(qx[c]), .scale(qsx[c]));
    mx_from_float #(.K(K), .FM(FM), .ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC), .OVF(OVF)) u_qy (
      .clk, .rst_n, .in_valid(scw[c]), .x(yd[LSC-1][c]), .scale_in(sy[c]),
      .out_valid(qw[c]), .elem(qy[c]), .scale(qsy[c]));
    mx_to_float #(.K(K), .FM(FM), .ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC)) u_dqx (
      .clk, .rst_n, .in_valid(qv[c]), .elem(qx[c]), .scale(qsx[c]), .out_valid(dqv[c]), .f(dqx[c]));
    mx_to_float #(.K(K), .FM(FM), .ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC)) u_dqy (
      .clk, .rst_n, .in_valid(qw[c]), .elem(qy[c]), .scale(qsy[c]), .out_valid(dqw[c]), .f(dqy[c]));
  end
  assign q_valid  = qv[0];
  assign dq_valid = dqv[0];

  logic            dgv;
  logic signed [BO-1:0] dgo;
  logic [7:0]      dgs;
  mx_flags_t       dgf;
  mx_dot_general #(.ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC), .K(K), .NBLK(NBLK)) u_dg (
    .clk, .rst_n, .in_valid(qv[0]), .x(qx), .y(qy), .sx(qsx), .sy(qsy),
    .out_valid(dgv), .out(dgo), .scale(dgs), .flags(dgf));

  logic [FW-1:0] rf;
  mx_elem_to_float #(.FM(FM), .ELEM_FP(1'b0), .B(BO)) u_res (
    .elem(dgo), .scale(dgs), .f(rf));

  always_ff @(posedge clk) begin
    raw_out   <= dgo;
    raw_scale <= dgs;
    flags     <= dgf;
    if (dgf.nan)      result <= {1'b0, 8'hFF, 1'b1, (FM-1)'(0)};
    else if (dgf.inf) result <= {dgf.neg, 8'hFF, FM'(0)};
    else              result <= rf;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= dgv;
endmodule
