// tb_mx_dot_general: one random vector pair of 4 MXFP8 E4M3 blocks (K = 32)
// per cycle. Block scales are spread so that the cross-block adders must
// align, round and sometimes overflow. The result must lie within two output
// ULPs of the exact DotGeneral value (three round-to-nearest-even additions),
// must appear LAT = 7 cycles after its input, a NaN element in any block
// must raise the NaN flag and a NaN scale must give scale 0xFF.
module tb_mx_dot_general;
  import mx_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int K = 32, NB = 4, LAT = 7, BO = 43;

  logic [NB-1:0][K-1:0][7:0] x, y;
  logic [NB-1:0][7:0] sx, sy;
  logic in_valid = 0, out_valid;
  logic signed [BO-1:0] out;
  logic [7:0] scale;
  mx_flags_t flags;
  mx_dot_general dut (.clk, .rst_n, .in_valid, .x, .y, .sx, .sy, .out_valid, .out, .scale, .flags);

  typedef struct { real v; bit nan_el; bit nan_sc; int cyc; } exp_t;
  exp_t q[$];
  int cyc = 0;
  always @(negedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && in_valid) begin
    exp_t e;
    real sm;
    e.v = 0.0; e.nan_el = 0; e.nan_sc = 0;
    for (int c = 0; c < NB; c++) begin
      sm = 0.0;
      for (int i = 0; i < K; i++) begin
        sm += elem_real(x[c][i], 1, 4, 3, 8) * elem_real(y[c][i], 1, 4, 3, 8);
        if (x[c][i][6:0] == 7'h7F) e.nan_el = 1;
      end
      e.v += sm * p2(int'(sx[c]) - 127) * p2(int'(sy[c]) - 127);
      if (sx[c] == 8'hFF) e.nan_sc = 1;
    end
    e.cyc = cyc;
    q.push_back(e);
  end

  // first register stage loads at the sampling edge: LAT-1 falling edges on
  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    real got, ulp, err;
    e = q.pop_front();
    checks += 2;
    if (cyc - e.cyc != LAT - 1) begin failures++; $display("latency %0d", cyc - e.cyc + 1); end
    if (e.nan_sc) begin
      if (scale != 8'hFF) begin failures++; $display("NaN scale lost"); end
    end else if (e.nan_el) begin
      if (!flags.nan) begin failures++; $display("NaN flag lost"); end
    end else begin
      got = real'(out) * p2(2 - BO + int'(scale) - 127);
      ulp = p2(2 - BO + int'(scale) - 127);
      err = got - e.v;
      if (err < 0.0) err = -err;
      if (err > 2.0 * ulp || flags != 3'b000) begin
        failures++;
        if (failures < 10) $display("got %e expected %e (%e ulp)", got, e.v, err / ulp);
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      for (int c = 0; c < NB; c++) begin
        for (int i = 0; i < K; i++) begin
          x[c][i] = 8'($urandom); y[c][i] = 8'($urandom);
          if (x[c][i][6:0] == 7'h7F) x[c][i] = 8'h00;
          if (y[c][i][6:0] == 7'h7F) y[c][i] = 8'h00;
        end
        sx[c] = 8'(100 + $urandom % ((it % 4 == 0) ? 4 : 40));
        sy[c] = 8'(100 + $urandom % ((it % 4 == 0) ? 4 : 40));
      end
      if (it % 11 == 3) x[$urandom % NB][$urandom % K] = 8'h7F;
      if (it % 19 == 7) sx[$urandom % NB] = 8'hFF;
      in_valid = 1;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
