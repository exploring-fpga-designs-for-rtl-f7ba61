// tb_mx_to_float: random MX blocks with scales over the whole E8M0 range are
// converted to FP32 (MXFP8 E4M3 and MXINT8) and to BF16 (MXFP4 E2M1). These
// values are exact in the float format unless they overflow it, so every
// output, one cycle later, must equal element value * 2^(scale-127) computed
// from the definitions, or Inf beyond the float's range; NaN elements and the
// NaN scale must give NaN.
module tb_mx_to_float;
  import mx_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int K = 32;
  logic [K-1:0][7:0] e43, ei8;
  logic [K-1:0][3:0] e21;
  logic [7:0] sc;
  logic in_valid = 0, v1, v2, v3;
  logic [K-1:0][31:0] f43, fi8;
  logic [K-1:0][15:0] f21;
  mx_to_float dut_e4m3 (.clk, .rst_n, .in_valid, .elem(e43), .scale(sc), .out_valid(v1), .f(f43));
  mx_to_float #(.ELEM_FP(1'b0), .B(8)) dut_int8 (.clk, .rst_n, .in_valid, .elem(ei8), .scale(sc), .out_valid(v2), .f(fi8));
  mx_to_float #(.FM(7), .E(2), .M(1), .SPEC(SPEC_NONE)) dut_bf16 (.clk, .rst_n, .in_valid, .elem(e21), .scale(sc),
    .out_valid(v3), .f(f21));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(input logic [31:0] f, input real v, input bit nan_exp, input string what);
    bit is_nan, is_inf;
    checks++;
    is_nan = (f[30:23] == 8'hFF) && (f[22:0] != 0);
    is_inf = (f[30:23] == 8'hFF) && (f[22:0] == 0);
    if (nan_exp) begin
      if (!is_nan) begin failures++; $display("%s: NaN expected, got %h", what, f); end
    end else if (v >= p2(128) || v <= -p2(128)) begin
      if (!is_inf || f[31] != (v < 0.0)) begin failures++; $display("%s: Inf expected, got %h", what, f); end
    end else if (is_nan || is_inf || f32_to_real(f) != v) begin
      failures++;
      if (failures < 10) $display("%s: got %h (%e) expected %e scale %0d", what, f, f32_to_real(f), v, sc);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      sc = 8'($urandom % 255);
      if (it % 4 == 0) sc = 8'(110 + $urandom % 30);
      if (it % 97 == 0) sc = 8'hFF;
      for (int i = 0; i < K; i++) begin
        e43[i] = 8'($urandom); ei8[i] = 8'($urandom); e21[i] = 4'($urandom);
      end
      in_valid = 1;
      @(posedge clk); #1;
      checks++;
      if (!(v1 && v2 && v3)) begin failures++; $display("valid"); end
      for (int i = 0; i < K; i++) begin
        real s;
        s = p2(int'(sc) - 127);
        cmp(f43[i], elem_real(e43[i], 1, 4, 3, 8) * s, sc == 8'hFF || e43[i][6:0] == 7'h7F, "e4m3");
        cmp(fi8[i], elem_real(ei8[i], 0, 0, 0, 8) * s, sc == 8'hFF, "int8");
        cmp({f21[i], 16'h0}, elem_real(e21[i], 1, 2, 1, 4) * s, sc == 8'hFF, "e2m1->bf16");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
