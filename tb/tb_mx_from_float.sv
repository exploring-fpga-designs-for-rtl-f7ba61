// tb_mx_from_float: random FP32 blocks with random scales are converted by
// four converters: MXFP8 E4M3 (saturating), MXFP8 E5M2 (overflow mode),
// MXFP4 E2M1 (no specials) and MXINT8. Every element, one cycle later, must
// equal the nearest code found by exhaustive search (ties to even code),
// with the OCP overflow rules. Directed lanes put NaN, Inf and overflowing
// values in; the block scale must become 0xFF where the element has no NaN.
module tb_mx_from_float;
  import mx_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int K = 32;
  logic [K-1:0][31:0] x;
  logic [7:0] sin;
  logic in_valid = 0;
  logic v1, v2, v3, v4;
  logic [K-1:0][7:0] e43, e52, ei8;
  logic [K-1:0][3:0] e21;
  logic [7:0] s43, s52, s21, si8;
  mx_from_float dut_e4m3 (.clk, .rst_n, .in_valid, .x, .scale_in(sin), .out_valid(v1), .elem(e43), .scale(s43));
  mx_from_float #(.E(5), .M(2), .SPEC(SPEC_IEEE), .OVF(OVF_OFL)) dut_e5m2 (.clk, .rst_n, .in_valid, .x, .scale_in(sin),
    .out_valid(v2), .elem(e52), .scale(s52));
  mx_from_float #(.E(2), .M(1), .SPEC(SPEC_NONE)) dut_e2m1 (.clk, .rst_n, .in_valid, .x, .scale_in(sin),
    .out_valid(v3), .elem(e21), .scale(s21));
  mx_from_float #(.ELEM_FP(1'b0), .B(8)) dut_int8 (.clk, .rst_n, .in_valid, .x, .scale_in(sin),
    .out_valid(v4), .elem(ei8), .scale(si8));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(input int got, input int exp_c, input string what, input int lane);
    checks++;
    if (got != exp_c) begin
      failures++;
      if (failures < 12) $display("%s lane %0d: x=%h scale=%0d got %h expected %h", what, lane, x[lane], sin, got, exp_c);
    end
  endtask

  initial begin
    int nov = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      bit anyn, ovf;
      @(negedge clk);
      sin = 8'(100 + $urandom % 50);
      for (int i = 0; i < K; i++) x[i] = rand_f32(int'(sin) - 20, int'(sin) + 18);
      anyn = 0;
      if (it % 5 == 1) begin x[3] = 32'h7FC00001; anyn = 1; end          // NaN
      if (it % 5 == 2) begin x[7] = {1'($urandom), 31'h7F800000}; anyn = 1; end  // Inf
      if (it % 7 == 3) x[9] = rand_f32(int'(sin) + 20, int'(sin) + 60);  // overflow
      if (it % 23 == 0) x[11] = 32'h0000_0000;
      in_valid = 1;
      @(posedge clk); #1;
      checks++;
      if (!(v1 && v2 && v3 && v4)) begin failures++; $display("valid"); end
      for (int i = 0; i < K; i++) begin
        real v;
        bit nan_in, inf_in;
        nan_in = (x[i][30:23] == 8'hFF) && (x[i][22:0] != 0);
        inf_in = (x[i][30:23] == 8'hFF) && (x[i][22:0] == 0);
        v = (nan_in || inf_in) ? 0.0 : f32_to_real(x[i]) / p2(int'(sin) - 127);
        // E4M3, saturating: NaN and Inf both become NaN (S.1111.111)
        if (nan_in || inf_in) cmp(int'(e43[i][6:0]), 'h7F, "e4m3 special", i);
        else begin
          cmp(int'(e43[i]), quant_fp(v, 4, 3, 2, 1, ovf), "e4m3", i);
          nov += ovf;
        end
        // E5M2, overflow mode: Inf stays Inf, NaN is NaN
        if (nan_in)      cmp(int'(e52[i][6:0]), 'h7F, "e5m2 NaN", i);
        else if (inf_in) cmp(int'(e52[i]), {x[i][31], 7'h7C}, "e5m2 Inf", i);
        else             cmp(int'(e52[i]), quant_fp(v, 5, 2, 1, 0, ovf), "e5m2", i);
        // E2M1 and INT8: the scale carries NaN
        if (!(nan_in || inf_in)) begin
          cmp(int'(e21[i]), quant_fp(v, 2, 1, 0, 1, ovf), "e2m1", i);
          cmp(int'(ei8[i]), quant_int(v, 8, ovf), "int8", i);
        end
      end
      cmp(int'(s43), int'(sin), "e4m3 scale", 0);
      cmp(int'(s52), int'(sin), "e5m2 scale", 0);
      cmp(int'(s21), anyn ? 'hFF : int'(sin), "e2m1 scale", 0);
      cmp(int'(si8), anyn ? 'hFF : int'(sin), "int8 scale", 0);
    end
    checks++;
    if (nov == 0) begin failures++; $display("overflow never exercised"); end
    $display("e4m3 overflows %0d", nov);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
