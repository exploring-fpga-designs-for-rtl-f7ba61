// tb_mx_scale_calc: one random block of 32 FP32 values per cycle, with
// exponents spread over a range, an occasional Inf/NaN (to be ignored) and
// blocks of tiny values whose scale must clamp to 0. For the default MXFP8
// E4M3 element (emax = 8) the scale must be max(exponent field) - 8, clamped
// to [0, 254], and appear LAT = ceil(5/2) + 1 = 4 cycles after the block.
module tb_mx_scale_calc;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int K = 32, LAT = 4, EMAX = 8;
  logic [K-1:0][31:0] x;
  logic in_valid = 0, out_valid;
  logic [7:0] scale;
  mx_scale_calc dut (.clk, .rst_n, .in_valid, .x, .out_valid, .scale);

  typedef struct { int s; int cyc; } exp_t;
  exp_t q[$];
  int cyc = 0, nclamp = 0;
  always @(negedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && in_valid) begin
    exp_t e;
    int mx;
    mx = 0;
    for (int i = 0; i < K; i++)
      if (x[i][30:23] != 8'hFF && int'(x[i][30:23]) > mx) mx = int'(x[i][30:23]);
    e.s = mx - EMAX;
    if (e.s < 0) begin e.s = 0; nclamp++; end
    e.cyc = cyc;
    q.push_back(e);
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    e = q.pop_front();
    checks += 2;
    if (cyc - e.cyc != LAT - 1) begin failures++; $display("latency %0d", cyc - e.cyc + 1); end
    if (int'(scale) != e.s) begin failures++; $display("scale %0d expected %0d", scale, e.s); end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 1000; it++) begin
      @(negedge clk);
      for (int i = 0; i < K; i++) begin
        x[i] = (it % 10 == 0) ? rand_f32(0, 7) : rand_f32(80, 200);
        if ($urandom % 64 == 0) x[i][30:23] = 8'hFF;
      end
      in_valid = 1;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (q.size() != 0 || nclamp == 0) begin failures++; $display("missing %0d / clamp %0d", q.size(), nclamp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
