// tb_mx_specials: directed cases for the NaN / Inf flags. An E4M3-like array
// (NaN only at S.1111.111) and an E5M2-like array (IEEE Inf and NaN) are fed
// blocks holding no special, a NaN, Inf x 0, +Inf, -Inf and Infs of both
// signs; the flags are compared with the expected outcome.
module tb_mx_specials;
  import mx_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0][7:0] a, b;
  mx_flags_t f4, f5;
  mx_specials dut_e4m3 (.a, .b, .flags(f4));
  mx_specials #(.E(5), .M(2), .SPEC(SPEC_IEEE)) dut_e5m2 (.a, .b, .flags(f5));

  task automatic chk(input mx_flags_t got, input logic [2:0] exp_f, input string what);
    checks++;
    if (got !== exp_f) begin
      failures++;
      $display("%s: got nan=%0d inf=%0d neg=%0d, expected %b", what, got.nan, got.inf, got.neg, exp_f);
    end
  endtask

  task automatic fill();
    for (int i = 0; i < 32; i++) begin
      a[i] = 8'h38 + 8'($urandom % 4);   // ordinary finite values
      b[i] = 8'hB8 + 8'($urandom % 4);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 20; it++) begin
      int p;
      p = $urandom % 32;
      fill(); #1;
      chk(f4, 3'b000, "no special e4m3");
      chk(f5, 3'b000, "no special e5m2");
      fill(); a[p] = 8'h7F; #1;
      chk(f4, 3'b100, "NaN e4m3");
      chk(f5, 3'b100, "NaN e5m2 (0x7F)");
      fill(); b[p] = 8'hFE; #1;
      chk(f5, 3'b100, "NaN e5m2 (0xFE)");
      chk(f4, 3'b000, "0xFE finite in e4m3");
      fill(); a[p] = 8'h7C; b[p] = 8'h00; #1;
      chk(f5, 3'b100, "Inf x 0 e5m2");
      fill(); a[p] = 8'h7C; b[p] = 8'h3C; #1;
      chk(f5, 3'b010, "+Inf e5m2");
      fill(); a[p] = 8'h7C; #1;
      chk(f5, 3'b011, "-Inf (Inf x negative) e5m2");
      fill(); a[p] = 8'hFC; b[p] = 8'hBC; a[(p + 1) % 32] = 8'h7C; b[(p + 1) % 32] = 8'h3C; #1;
      chk(f5, 3'b010, "two +Inf e5m2");
      fill(); a[p] = 8'h7C; b[p] = 8'h3C; a[(p + 1) % 32] = 8'hFC; b[(p + 1) % 32] = 8'h3C; #1;
      chk(f5, 3'b100, "+Inf and -Inf e5m2");
      fill(); a[p] = 8'hFF; b[p] = 8'h00; #1;
      chk(f4, 3'b100, "NaN x 0 e4m3");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
