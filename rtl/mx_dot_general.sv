// mx_dot_general: the MX "DotGeneral" operation over NBLK blocks,
//   DotGeneral(X,Y,S,T) = sum_c Dot(X_c, Y_c, S_c, T_c).
// One mx_dot per block computes the in-block products exactly; their results,
// each a (scale, fraction) pair, are summed across block boundaries by a binary
// tree of mx_add_nrm adders that align, add and round to nearest even. The
// NaN / Inf flags of the blocks are merged alongside: NaN wins, Infs of both
// signs give NaN. Output value: out * 2^(2-b_o) * 2^(scale-127), scale 0xFF is
// NaN. NBLK must be a power of two; its default of 4 (a 128-element vector at
// K = 32) is this design's choice, the paper fixes no vector length.
// Timing: one vector pair per cycle, latency LAT = LAT_DOT + log2(NBLK)
// (7 cycles at the defaults).
module mx_dot_general
  import mx_pkg::*;
#(
  parameter bit         ELEM_FP = 1'b1,
  parameter int         E       = 4,
  parameter int         M       = 3,
  parameter int         B       = 8,
  parameter spec_mode_e SPEC    = SPEC_FN,
  parameter int         K       = 32,
  parameter int         NBLK    = 4,
  localparam int        BI      = elem_bits(ELEM_FP, E, M, B),
  localparam int        BO      = dot_bits(ELEM_FP, E, M, B, K),
  localparam int        LN      = $clog2(NBLK),
  localparam int        LAT     = ($clog2(K) + 1) / 2 + 2 + LN
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic [NBLK-1:0][K-1:0][BI-1:0] x,
  input  logic [NBLK-1:0][K-1:0][BI-1:0] y,
  input  logic [NBLK-1:0][7:0]           sx,
  input  logic [NBLK-1:0][7:0]           sy,
  output logic                           out_valid,
  output logic signed [BO-1:0]           out,
  output logic [7:0]                     scale,
  output mx_flags_t                      flags
);
  logic [NBLK-1:0]            dv;
  logic signed [BO-1:0]       dd [NBLK];
  logic [7:0]                 ds [NBLK];
  mx_flags_t                  df [NBLK];

  for (genvar c = 0; c < NBLK; c++) begin : g_dot
    mx_dot #(.ELEM_FP(ELEM_FP), .E(E), .M(M), .B(B), .SPEC(SPEC), .K(K)) u_dot (
      .clk, .rst_n, .in_valid, .a(x[c]), .b(y[c]), .s(sx[c]), .t(sy[c]),
      .out_valid(dv[c]), .dot(dd[c]), .scale(ds[c]), .flags(df[c]));
  end

  function automatic mx_flags_t merge(input mx_flags_t f0, input mx_flags_t f1);
    mx_flags_t r;
    logic pinf, ninf;
    pinf  = (f0.inf && !f0.neg) || (f1.inf && !f1.neg);
    ninf  = (f0.inf &&  f0.neg) || (f1.inf &&  f1.neg);
    r.nan = f0.nan || f1.nan || (pinf && ninf);
    r.inf = !r.nan && (pinf || ninf);
    r.neg = r.inf && ninf;
    return r;
  endfunction

  if (LN == 0) begin : g_single
    assign out       = dd[0];
    assign scale     = ds[0];
    assign flags     = df[0];
    assign out_valid = dv[0];
  end else begin : g_tree
    for (genvar l = 0; l < LN; l++) begin : g_lvl
      localparam int CNT = NBLK >> (l + 1);
      logic signed [BO-1:0] po [2*CNT];
      logic [7:0]           ps [2*CNT];
      mx_flags_t            pf [2*CNT];
      logic                 pv;
      logic signed [BO-1:0] no [CNT];
      logic [7:0]           ns [CNT];
      mx_flags_t            nf [CNT];
      logic [CNT-1:0]       nv;
      if (l == 0) begin : g_src
        for (genvar i = 0; i < NBLK; i++) begin : g_in
          assign po[i] = dd[i];
          assign ps[i] = ds[i];
          assign pf[i] = df[i];
        end
        assign pv = dv[0];
      end else begin : g_src
        for (genvar i = 0; i < 2*CNT; i++) begin : g_in
          assign po[i] = g_lvl[l-1].no[i];
          assign ps[i] = g_lvl[l-1].ns[i];
          assign pf[i] = g_lvl[l-1].nf[i];
        end
        assign pv = g_lvl[l-1].nv[0];
      end
      for (genvar i = 0; i < CNT; i++) begin : g_add
        mx_add_nrm #(.W(BO)) u_add (
          .clk, .rst_n, .in_valid(pv),
          .scale0(ps[2*i]), .op0(po[2*i]), .scale1(ps[2*i+1]), .op1(po[2*i+1]),
          .out_valid(nv[i]), .scale_out(ns[i]), .out(no[i]));
        always_ff @(posedge clk) nf[i] <= merge(pf[2*i], pf[2*i+1]);
      end
    end
    assign out       = g_lvl[LN-1].no[0];
    assign scale     = g_lvl[LN-1].ns[0];
    assign flags     = g_lvl[LN-1].nf[0];
    assign out_valid = g_lvl[LN-1].nv[0];
  end
endmodule
