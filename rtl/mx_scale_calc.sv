// mx_scale_calc: computes the shared E8M0 scale of one block of K FP32 or
// BF16 values, as the MX standard recommends: the largest power of two in the
// block divided by the largest power of two of the element format,
//   scale = max_i(exponent field of x_i) - emax_elem, clamped to [0, 254].
// The maximum is found by a binary tree of log2(K) comparator levels, with a
// register after every two levels so the critical path stays two comparators
// long whatever K is (as the paper describes); a last stage subtracts emax and
// clamps. Inf and NaN inputs (exponent field 255) are left out of the maximum
// and are dealt with by the converter. Ignoring the mantissa (the power of two
// of x is its exponent field) follows the standard's rule; the handling of
// specials and of the final stage are this design's choices.
// Timing: one block per cycle, latency LAT = ceil(log2(K)/2) + 1 cycles.
module mx_scale_calc
  import mx_pkg::*;
#(
  parameter int         K       = 32,
  parameter int         FM      = 23,      // float mantissa bits: 23 FP32, 7 BF16
  parameter bit         ELEM_FP = 1'b1,
  parameter int         E       = 4,
  parameter spec_mode_e SPEC    = SPEC_FN,
  localparam int        FW      = 9 + FM,
  localparam int        L       = $clog2(K),
  localparam int        LAT     = (L + 1) / 2 + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [K-1:0][FW-1:0] x,
  output logic                 out_valid,
  output logic [7:0]           scale
);
  localparam int EMAX = elem_emax(ELEM_FP, E, SPEC);

  for (genvar l = 0; l < L; l++) begin : g_lvl
    localparam int CNT = K >> (l + 1);
    localparam bit REG = ((l + 1) % 2 == 0) || (l + 1 == L);
    logic [7:0] prv [2*CNT];
    logic [7:0] nxt [CNT];
    logic       pv, nv;
    if (l == 0) begin : g_src
      for (genvar i = 0; i < K; i++) begin : g_in
        assign prv[i] = (x[i][FW-2:FM] == 8'hFF) ? 8'd0 : x[i][FW-2:FM];
      end
      assign pv = in_valid;
    end else begin : g_src
      for (genvar i = 0; i < 2*CNT; i++) begin : g_in
        assign prv[i] = g_lvl[l-1].nxt[i];
      end
      assign pv = g_lvl[l-1].nv;
    end
    for (genvar i = 0; i < CNT; i++) begin : g_cmp
      if (REG) begin : g_r
        always_ff @(posedge clk) nxt[i] <= (prv[2*i] > prv[2*i+1]) ? prv[2*i] : prv[2*i+1];
      end else begin : g_c
        assign nxt[i] = (prv[2*i] > prv[2*i+1]) ? prv[2*i] : prv[2*i+1];
      end
    end
    if (REG) begin : g_vr
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) nv <= 1'b0;
        else        nv <= pv;
    end else begin : g_vc
      assign nv = pv;
    end
  end

  // divide by 2^emax and clamp to the E8M0 range
  logic signed [9:0] sc;
  assign sc = $signed({2'b00, g_lvl[L-1].nxt[0]}) - 10'(EMAX);
  always_ff @(posedge clk) begin
    if (sc < 0)        scale <= 8'd0;
    else if (sc > 254) scale <= 8'd254;
    else               scale <= sc[7:0];
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= g_lvl[L-1].nv;
endmodule
