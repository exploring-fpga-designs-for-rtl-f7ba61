// tb_mx_mul_array: random element pairs for an MXFP8 E4M3 array (K = 32) and
// an MXINT8 array (K = 4). Every product, read one cycle after the inputs and
// weighted by its LSB exponent, must equal the product of the element values
// computed from their definitions. Special codes must give 0.
module tb_mx_mul_array;
  import mx_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0][7:0] fa, fb;
  logic [31:0][37:0] fp;
  logic fv_o, fv_i = 0;
  mx_mul_array dut_fp (.clk, .rst_n, .in_valid(fv_i), .a(fa), .b(fb), .out_valid(fv_o), .prod(fp));

  logic [3:0][7:0] ia, ib;
  logic [3:0][15:0] ip;
  logic iv_o;
  mx_mul_array #(.ELEM_FP(1'b0), .B(8), .K(4)) dut_int (.clk, .rst_n, .in_valid(fv_i), .a(ia), .b(ib), .out_valid(iv_o), .prod(ip));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_v, got;
    bit   sp;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      for (int i = 0; i < 32; i++) begin fa[i] = 8'($urandom); fb[i] = 8'($urandom); end
      for (int i = 0; i < 4; i++)  begin ia[i] = 8'($urandom); ib[i] = 8'($urandom); end
      fv_i = 1;
      @(posedge clk); #1;
      checks++;
      if (!fv_o) begin failures++; $display("valid did not follow after 1 cycle"); end
      for (int i = 0; i < 32; i++) begin
        sp = (fa[i][6:0] == 7'h7F) || (fb[i][6:0] == 7'h7F);
        ref_v = sp ? 0.0 : elem_real(fa[i], 1, 4, 3, 8) * elem_real(fb[i], 1, 4, 3, 8);
        got = real'($signed(fp[i])) * p2(-18);
        checks++;
        if (got != ref_v) begin
          failures++;
          if (failures < 10) $display("FP lane %0d: %h*%h got %f exp %f", i, fa[i], fb[i], got, ref_v);
        end
      end
      for (int i = 0; i < 4; i++) begin
        ref_v = elem_real(ia[i], 0, 0, 0, 8) * elem_real(ib[i], 0, 0, 0, 8);
        got = real'($signed(ip[i])) * p2(-12);
        checks++;
        if (got != ref_v) begin failures++; $display("INT lane %0d mismatch", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
