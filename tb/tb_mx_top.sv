// tb_mx_top: end-to-end test of the MX dot-product engine at its default
// parameters (MXFP8 E4M3, K = 32, 4 blocks, FP32 in and out). Random FP32
// vector pairs enter back to back, one per cycle. The testbench computes each
// block scale from the largest exponent, quantizes every value by exhaustive
// nearest-code search and forms the exact dot product; it checks the
// quantized operands and scales the engine exposes, the FP32 result (within
// one FP32 ULP of the exact value), the dequantized operands (scale times
// element, exactly) and the latency of 13 cycles.
// Mechanisms that must each happen at least once: element saturation in the
// converter, scale clamped at 0, NaN and Inf inputs turned into a NaN result,
// an overflow shift in the cross-block adders and back-to-back operation.
module tb_mx_top;
  import mx_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int K = 32, NB = 4, LAT = 13, EMAX = 8;

  logic [NB-1:0][K-1:0][31:0] xf, yf;
  logic in_valid = 0, out_valid, q_valid;
  logic [31:0] result;
  logic signed [42:0] raw_out;
  logic [7:0] raw_scale;
  mx_flags_t flags;
  logic [NB-1:0][K-1:0][7:0] qx, qy;
  logic [NB-1:0][7:0] qsx, qsy;
  logic [NB-1:0][K-1:0][31:0] dqx, dqy;
  logic dq_valid;
  mx_top dut (.clk, .rst_n, .in_valid, .xf, .yf, .out_valid, .result, .raw_out, .raw_scale, .flags,
              .qx, .qy, .qsx, .qsy, .q_valid, .dqx, .dqy, .dq_valid);

  typedef struct {
    logic [NB-1:0][K-1:0][7:0] qx, qy;
    logic [NB-1:0][7:0] sx, sy;
    real v;
    bit  nan;
    int  cyc;
  } exp_t;
  exp_t q[$], qq[$], qd[$];
  int cyc = 0;
  int n_sat = 0, n_clamp = 0, n_nan = 0, n_inf = 0, n_addovf = 0, n_b2b = 0, n_res = 0;
  always @(negedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference quantization of one block
  task automatic quant_block(input logic [K-1:0][31:0] f, output logic [K-1:0][7:0] code,
                             output logic [7:0] scale, inout bit nan);
    int mx, s;
    bit ovf;
    mx = 0;
    for (int i = 0; i < K; i++)
      if (f[i][30:23] != 8'hFF && int'(f[i][30:23]) > mx) mx = int'(f[i][30:23]);
    s = mx - EMAX;
    if (s < 0) begin s = 0; n_clamp++; end
    scale = 8'(s);
    for (int i = 0; i < K; i++) begin
      if (f[i][30:23] == 8'hFF) begin
        code[i] = {f[i][31], 7'h7F};
        nan = 1;
        if (f[i][22:0] == 0) n_inf++; else n_nan++;
      end else begin
        code[i] = 8'(quant_fp(f32_to_real(f[i]) / p2(s - 127), 4, 3, 2, 1, ovf));
        n_sat += ovf;
      end
    end
  endtask

  always @(posedge clk) if (rst_n && in_valid) begin
    exp_t e;
    e.nan = 0;
    e.v = 0.0;
    for (int c = 0; c < NB; c++) begin
      quant_block(xf[c], e.qx[c], e.sx[c], e.nan);
      quant_block(yf[c], e.qy[c], e.sy[c], e.nan);
      for (int i = 0; i < K; i++)
        e.v += elem_real(e.qx[c][i], 1, 4, 3, 8) * elem_real(e.qy[c][i], 1, 4, 3, 8)
               * p2(int'(e.sx[c]) - 127) * p2(int'(e.sy[c]) - 127);
    end
    e.cyc = cyc;
    q.push_back(e);
    qq.push_back(e);
    qd.push_back(e);
  end

  // the quantized operands, visible LSC + 1 = 5 cycles in
  always @(negedge clk) if (rst_n && q_valid) begin
    exp_t e;
    e = qq.pop_front();
    checks++;
    if (e.qx != qx || e.qy != qy || e.sx != qsx || e.sy != qsy) begin
      failures++;
      if (failures < 10) $display("quantized operands differ");
    end
  end

  // dequantized operands, one cycle after the quantized ones: scale * element
  always @(negedge clk) if (rst_n && dq_valid) begin
    exp_t e;
    int bad;
    e = qd.pop_front();
    bad = 0;
    for (int c = 0; c < NB; c++)
      for (int i = 0; i < K; i++) begin
        if (e.qx[c][i][6:0] != 7'h7F &&
            f32_to_real(dqx[c][i]) != elem_real(e.qx[c][i], 1, 4, 3, 8) * p2(int'(e.sx[c]) - 127)) bad++;
        if (e.qy[c][i][6:0] != 7'h7F &&
            f32_to_real(dqy[c][i]) != elem_real(e.qy[c][i], 1, 4, 3, 8) * p2(int'(e.sy[c]) - 127)) bad++;
      end
    checks++;
    if (bad != 0) begin failures++; if (failures < 10) $display("%0d dequantized values differ", bad); end
  end

  // cross-block adder taking its overflow path (final adder of the tree)
  always @(negedge clk) if (rst_n && dut.u_dg.g_tree.g_lvl[1].nv[0] &&
                            dut.u_dg.g_tree.g_lvl[1].ns[0] != 8'hFF &&
                            dut.u_dg.g_tree.g_lvl[1].ns[0] > dut.u_dg.g_tree.g_lvl[0].ns[0] &&
                            dut.u_dg.g_tree.g_lvl[1].ns[0] > dut.u_dg.g_tree.g_lvl[0].ns[1])
    n_addovf++;

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    real got, err, a;
    e = q.pop_front();
    n_res++;
    checks += 2;
    if (cyc - e.cyc != LAT - 1) begin failures++; $display("latency %0d", cyc - e.cyc + 1); end
    if (e.nan) begin
      if (!(result[30:23] == 8'hFF && result[22:0] != 0 && flags.nan)) begin
        failures++; $display("NaN result expected, got %h", result);
      end
    end else begin
      got = f32_to_real(result);
      a   = (e.v < 0.0) ? -e.v : e.v;
      err = got - e.v;
      if (err < 0.0) err = -err;
      if (result[30:23] == 8'hFF || err > a * p2(-23)) begin
        failures++;
        if (failures < 10) $display("result %h = %e, exact %e", result, got, e.v);
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      if (in_valid) n_b2b++;
      for (int c = 0; c < NB; c++) begin
        int bx, by;
        bx = 100 + $urandom % 50;
        by = 100 + $urandom % 50;
        for (int i = 0; i < K; i++) begin
          xf[c][i] = rand_f32(bx - 12, bx);
          yf[c][i] = rand_f32(by - 12, by);
        end
        if (it % 9 == 4) for (int i = 0; i < K; i++) xf[c][i] = rand_f32(1, 7);
      end
      if (it % 13 == 6) xf[$urandom % NB][$urandom % K] = 32'hFFC00000;
      if (it % 17 == 8) yf[$urandom % NB][$urandom % K] = 32'h7F800000;
      in_valid = 1;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("results %0d: saturations %0d, scale clamps %0d, NaN inputs %0d, Inf inputs %0d, adder overflow shifts %0d, back-to-back %0d",
             n_res, n_sat, n_clamp, n_nan, n_inf, n_addovf, n_b2b);
    checks += 6;
    if (n_sat == 0)    begin failures++; $display("saturation never happened"); end
    if (n_clamp == 0)  begin failures++; $display("scale clamp never happened"); end
    if (n_nan == 0)    begin failures++; $display("NaN input never happened"); end
    if (n_inf == 0)    begin failures++; $display("Inf input never happened"); end
    if (n_addovf == 0) begin failures++; $display("adder overflow never happened"); end
    if (n_b2b == 0)    begin failures++; $display("back-to-back never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
