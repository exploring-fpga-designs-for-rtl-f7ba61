// tb_mx_adder_tree: random signed vectors (full-range, and all-maximum to
// exercise the growth bits) are streamed into the default 32 x 38-bit tree,
// one per cycle. Each sum must equal the exact sum computed in the testbench
// and must appear ceil(log2(32)/2) = 3 cycles after its input.
module tb_mx_adder_tree;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int N = 32, W = 38, LAT = 3;
  logic [N-1:0][W-1:0] v;
  logic in_valid = 0, out_valid;
  logic signed [W+4:0] sum;
  mx_adder_tree dut (.clk, .rst_n, .in_valid, .in_vec(v), .out_valid, .sum);

  longint expq[$];
  int     cyc = 0, sent_cyc[$];
  always @(negedge clk) cyc <= cyc + 1;   // counted on falling edges: no race with the samplers

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sent_cyc is taken one edge before the tree samples the vector (the edge
  // that loads its first register stage); the sum is read at the falling edge
  // after its last stage loads, LAT counts later
  always @(negedge clk) if (rst_n && out_valid) begin
    longint e;
    int sc;
    e = expq.pop_front();
    sc = sent_cyc.pop_front();
    checks++;
    if (longint'(sum) != e) begin failures++; $display("sum %0d expected %0d", sum, e); end
    checks++;
    if (cyc - sc != LAT) begin failures++; $display("latency %0d", cyc - sc); end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 300; it++) begin
      longint e;
      e = 0;
      for (int i = 0; i < N; i++) begin
        logic signed [W-1:0] r;
        r = W'({$urandom, $urandom});
        if (it % 10 == 1) r = {1'b0, {(W-1){1'b1}}};
        if (it % 10 == 2) r = {1'b1, {(W-1){1'b0}}};
        v[i] <= r;
        e += longint'(r);
      end
      in_valid <= 1;
      expq.push_back(e);
      sent_cyc.push_back(cyc);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
