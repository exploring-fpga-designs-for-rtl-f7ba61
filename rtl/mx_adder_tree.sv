// mx_adder_tree: the pairwise-summation (Kulisch) tree of the Dot circuit.
// N signed integers of W_IN bits are added in a binary tree of log2(N) levels;
// every level is one bit wider than the one before, so the sum is exact and
// has W_IN+log2(N) bits (b_o when W_IN = b_int). N must be a power of two.
// Timing: a register after every REG_EVERY levels and after the last level,
// latency ceil(log2(N)/REG_EVERY) cycles, one new vector per cycle. Where the
// registers go is this design's choice; the paper only says the cores are
// pipelined.
module mx_adder_tree #(
  parameter int  N         = 32,
  parameter int  W_IN      = 38,
  parameter int  REG_EVERY = 2,
  localparam int L         = $clog2(N),
  localparam int W_OUT     = W_IN + L
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [N-1:0][W_IN-1:0]   in_vec,
  output logic                     out_valid,
  output logic signed [W_OUT-1:0]  sum
);
  for (genvar l = 0; l < L; l++) begin : g_lvl
    localparam int CNT = N >> (l + 1);
    localparam bit REG = ((l + 1) % REG_EVERY == 0) || (l + 1 == L);
    logic signed [W_OUT-1:0] prv [2*CNT];   // inputs of this level
    logic signed [W_OUT-1:0] nxt [CNT];     // outputs of this level
    logic                    pv, nv;
    if (l == 0) begin : g_src
      for (genvar i = 0; i < N; i++) begin : g_in
        assign prv[i] = W_OUT'($signed(in_vec[i]));
      end
      assign pv = in_valid;
    end else begin : g_src
      for (genvar i = 0; i < 2*CNT; i++) begin : g_in
        assign prv[i] = g_lvl[l-1].nxt[i];
      end
      assign pv = g_lvl[l-1].nv;
    end
    for (genvar i = 0; i < CNT; i++) begin : g_add
      if (REG) begin : g_r
        always_ff @(posedge clk) nxt[i] <= prv[2*i] + prv[2*i+1];
      end else begin : g_c
        assign nxt[i] = prv[2*i] + prv[2*i+1];
      end
    end
    if (REG) begin : g_vr
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) nv <= 1'b0;
        else        nv <= pv;
    end else begin : g_vc
      assign nv = pv;
    end
  end

  assign sum       = g_lvl[L-1].nxt[0];
  assign out_valid = g_lvl[L-1].nv;
endmodule
