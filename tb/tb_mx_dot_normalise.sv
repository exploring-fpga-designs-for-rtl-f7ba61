// tb_mx_dot_normalise: random Kulisch sums of every magnitude (43-bit, LSB
// weight 2^-18, the MXFP8 E4M3 K = 32 configuration) with random scale
// products, including ones that push the scale below 0 or above 254 and NaN
// scales. Checks, one cycle after the input: the value is kept exactly, the
// fraction is normalised (two top bits differ) with the scale the testbench
// derives from the value's binade, clamping at scale 0 loses less than one
// LSB, overflow and NaN give scale 0xFF, zero gives (0, 0).
module tb_mx_dot_normalise;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int BO = 43, LSB2 = -18;
  logic signed [BO-1:0] dot, dot_n;
  logic signed [11:0]   st;
  logic                 st_nan, in_valid = 0, out_valid;
  logic [7:0]           scale;
  mx_dot_normalise dut (.clk, .rst_n, .in_valid, .dot, .st, .st_nan, .out_valid, .dot_n, .scale);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string s);
    failures++;
    if (failures < 10) $display("%s: dot=%0d st=%0d -> dot_n=%0d scale=%0d", s, dot, st, dot_n, scale);
  endtask

  initial begin
    int nclamp = 0, novf = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      real v, got, a;
      int  k, es;
      dot = BO'(signed'({$urandom, $urandom})) >>> ($urandom % BO);
      if (it % 50 == 0) dot = '0;
      if (it % 50 == 1) dot = -(BO'(1) <<< ($urandom % (BO - 1)));
      st = 12'(int'($urandom % 330) - 40);
      st_nan = (it % 37 == 0);
      in_valid = 1;
      @(posedge clk); #1;
      checks++;
      if (!out_valid) fail("valid");
      v = real'(dot) * p2(LSB2 + int'(st) - 127);
      got = real'(dot_n) * p2(2 - BO + int'(scale) - 127);
      checks++;
      if (st_nan) begin
        if (scale != 8'hFF) fail("NaN scale");
      end else if (dot == 0) begin
        if (dot_n != 0 || scale != 0) fail("zero");
      end else begin
        // binade: 2^k <= |v| < 2^(k+1); -2^k is written as -2 * 2^(k-1)
        a = (v < 0.0) ? -v : v;
        k = int'(st) + LSB2 - 127 + BO;
        while (p2(k) > a) k--;
        while (p2(k + 1) <= a) k++;
        es = k + 127;
        if (v < 0.0 && a == p2(k)) es--;
        if (es > 254) begin
          novf++;
          if (scale != 8'hFF) fail("overflow");
        end else if (es < 0) begin
          nclamp++;
          if (scale != 0 || (got - v) > 0.0 || (v - got) >= p2(2 - BO - 127)) fail("clamp at 0");
        end else begin
          if (int'(scale) != es || got != v || dot_n[BO-1] == dot_n[BO-2]) fail("normalise");
        end
      end
    end
    checks++;
    if (nclamp == 0 || novf == 0) fail("clamp or overflow never exercised");
    $display("clamped %0d overflowed %0d", nclamp, novf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
