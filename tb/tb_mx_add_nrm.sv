// tb_mx_add_nrm: random pairs of (scale, 43-bit fraction) operands, with
// scale differences from 0 to beyond the fraction width, operands of both
// signs and sizes, and pairs of large same-sign operands that overflow the
// fraction. Each result, one cycle later, must lie within half an output ULP
// (the rounding bound of round-to-nearest-even) of the exact sum, and carry
// the larger input scale, or that plus one when the sum overflowed. NaN
// scales must give 0xFF. The overflow and large-shift paths are counted and
// must both occur.
module tb_mx_add_nrm;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int W = 43;
  logic [7:0] s0, s1, so;
  logic signed [W-1:0] o0, o1, out;
  logic in_valid = 0, out_valid;
  mx_add_nrm dut (.clk, .rst_n, .in_valid, .scale0(s0), .op0(o0), .scale1(s1), .op1(o1),
                  .out_valid, .scale_out(so), .out);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int novf = 0, nfar = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      real v0, v1, ex, got, ulp, err;
      int  smax;
      @(negedge clk);
      o0 = W'(signed'({$urandom, $urandom})) >>> ($urandom % 4);
      o1 = W'(signed'({$urandom, $urandom})) >>> ($urandom % 4);
      s0 = 8'(60 + $urandom % 100);
      s1 = (it % 3 == 0) ? s0 : 8'(int'(s0) + int'($urandom % 121) - 60);
      if (it % 7 == 0) begin
        o0 = (W'(1) <<< (W - 2)) + W'($urandom);
        o1 = o0 + W'($urandom);
        if (it % 2 == 0) begin o0 = -o0; o1 = -o1; end
      end
      if (it % 211 == 0) s1 = 8'hFF;
      in_valid = 1;
      @(posedge clk); #1;
      checks += 2;
      if (!out_valid) begin failures++; $display("valid"); end
      v0 = real'(o0) * p2(2 - W + int'(s0) - 127);
      v1 = real'(o1) * p2(2 - W + int'(s1) - 127);
      if (s1 == 8'hFF) begin
        if (so != 8'hFF) begin failures++; $display("NaN scale lost"); end
        continue;
      end
      ex   = v0 + v1;
      smax = (s0 > s1) ? int'(s0) : int'(s1);
      if ((s0 > s1 ? s0 - s1 : s1 - s0) > W) nfar++;
      got  = real'(out) * p2(2 - W + int'(so) - 127);
      ulp  = p2(2 - W + int'(so) - 127);
      err  = got - ex;
      if (err < 0.0) err = -err;
      if (int'(so) == smax + 1) novf++;
      if ((int'(so) != smax && int'(so) != smax + 1) || err > ulp * (0.5 + p2(-9))) begin
        failures++;
        if (failures < 10) $display("s0=%0d o0=%0d s1=%0d o1=%0d -> so=%0d out=%0d err=%e ulp", s0, o0, s1, o1, so, out, err / ulp);
      end
      // the larger-scale result is used whenever the sum fits in it
      if (int'(so) == smax + 1 && (ex < p2(1 + smax - 127) - ulp / 4.0) && (ex > -p2(1 + smax - 127) + ulp / 4.0)) begin
        failures++;
        $display("needless overflow shift");
      end
    end
    checks++;
    if (novf == 0 || nfar == 0) begin failures++; $display("overflow %0d far %0d", novf, nfar); end
    $display("overflow path %0d, far shifts %0d", novf, nfar);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
