// tb_mx_dot: streams one random block pair per cycle through an MXFP8 E4M3
// Dot and an MXINT8 Dot (K = 32 both). The output (dot, scale) must equal,
// exactly, (s t) * sum A_p B_p computed from the element definitions, and
// must come out LAT = 5 cycles after its input. Some blocks carry a NaN
// element (flag expected) or a NaN scale (scale 0xFF expected).
module tb_mx_dot;
  import mx_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int K = 32, LAT = 5;
  localparam int BOF = 43, BOI = 21;

  logic [K-1:0][7:0] fa, fb, ia, ib;
  logic [7:0] s, t;
  logic in_valid = 0, fv, iv;
  logic signed [BOF-1:0] fd;
  logic signed [BOI-1:0] id;
  logic [7:0] fs, is_;
  mx_flags_t ff, ifl;
  mx_dot dut_fp (.clk, .rst_n, .in_valid, .a(fa), .b(fb), .s, .t, .out_valid(fv), .dot(fd), .scale(fs), .flags(ff));
  mx_dot #(.ELEM_FP(1'b0), .B(8)) dut_int (.clk, .rst_n, .in_valid, .a(ia), .b(ib), .s, .t,
    .out_valid(iv), .dot(id), .scale(is_), .flags(ifl));

  typedef struct { real fv; real iv; bit nan_el; bit nan_sc; int cyc; } exp_t;
  exp_t q[$];
  int cyc = 0;
  always @(negedge clk) cyc <= cyc + 1;   // counted on falling edges: no race with the samplers

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // e.cyc is read at the edge that loads the first of the LAT register
  // stages; the last stage loads LAT-1 edges later and is checked at the
  // falling edge after it, where cyc has advanced by LAT-1
  always @(negedge clk) if (rst_n && fv) begin
    exp_t e;
    real gf, gi;
    e = q.pop_front();
    checks += 3;
    if (cyc - e.cyc != LAT - 1) begin failures++; $display("latency %0d", cyc - e.cyc); end
    if (!iv) begin failures++; $display("INT valid missing"); end
    if (e.nan_sc) begin
      if (fs != 8'hFF || is_ != 8'hFF) begin failures++; $display("NaN scale not propagated"); end
    end else if (e.nan_el) begin
      if (!ff.nan) begin failures++; $display("NaN flag missing"); end
    end else begin
      gf = real'(fd) * p2(2 - BOF + int'(fs) - 127);
      gi = real'(id) * p2(2 - BOI + int'(is_) - 127);
      if (gf != e.fv || ff != 3'b000) begin failures++; $display("FP dot %e expected %e", gf, e.fv); end
      if (gi != e.iv) begin failures++; $display("INT dot %e expected %e", gi, e.iv); end
    end
  end

  // the expected result is computed from exactly what the DUT samples
  always @(posedge clk) if (rst_n && in_valid) begin
    exp_t e;
    real sf, si;
    sf = 0.0; si = 0.0;
    for (int i = 0; i < K; i++) begin
      sf += elem_real(fa[i], 1, 4, 3, 8) * elem_real(fb[i], 1, 4, 3, 8);
      si += elem_real(ia[i], 0, 0, 0, 8) * elem_real(ib[i], 0, 0, 0, 8);
      e.nan_el = (i == 0) ? 1'b0 : e.nan_el;
      if (fa[i] == 8'hFF) e.nan_el = 1'b1;
    end
    e.nan_sc = (s == 8'hFF);
    e.fv  = sf * p2(int'(s) - 127) * p2(int'(t) - 127);
    e.iv  = si * p2(int'(s) - 127) * p2(int'(t) - 127);
    e.cyc = cyc;
    q.push_back(e);
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      for (int i = 0; i < K; i++) begin
        logic [7:0] x, y;
        x = 8'($urandom); y = 8'($urandom);
        if (x[6:0] == 7'h7F) x = 8'h00;
        if (y[6:0] == 7'h7F) y = 8'h00;
        if (it % 8 == 3) y = 8'($urandom % 16);      // small values, heavy cancellation
        fa[i] = x; fb[i] = y;
        ia[i] = 8'($urandom); ib[i] = 8'($urandom);
      end
      if (it % 13 == 5) fa[$urandom % K] = 8'hFF;
      s = 8'(90 + $urandom % 70);
      t = 8'(90 + $urandom % 70);
      if (it % 17 == 4) s = 8'hFF;
      in_valid = 1;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (12) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
