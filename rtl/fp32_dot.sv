// fp32_dot -- N-term single-precision dot product plus bias.
//
// y = bias + sum_i a[i]*b[i]. N fp32_mul units form the products and a
// balanced binary tree of fp32_add units sums them; the bias is added last.
// This is the multiply-accumulate element of both convolution layers: one
// instance computes one output feature of one window (N = K*K*IN_CH).
// Tree order (pairs of neighbours, an odd element passed up unchanged) is
// this design's choice; floating-point sums depend on order, so results may
// differ from a sequential sum in the last bits. Combinational, no latency.
module fp32_dot
  import snl_pkg::*;
#(
  parameter int N = 25
) (
  input  logic [N-1:0][31:0] a,
  input  logic [N-1:0][31:0] b,
  input  fp32_t              bias,
  output fp32_t              y
);
  // Number of nodes on each tree level: level 0 holds the N products.
  function automatic int nodes(int lvl);
    int n = N;
    for (int i = 0; i < lvl; i++) n = (n + 1) / 2;
    return n;
  endfunction
  localparam int LEVELS = $clog2(N);

  logic [N-1:0][31:0] lv [LEVELS+1];

  for (genvar i = 0; i < N; i++) begin : g_mul
    fp32_mul u_mul (.a(a[i]), .b(b[i]), .y(lv[0][i]));
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    localparam int NI = nodes(l);
    localparam int NO = nodes(l + 1);
    for (genvar j = 0; j < NO; j++) begin : g_node
      if (2*j + 1 < NI) begin : g_add
        fp32_add u_add (.a(lv[l][2*j]), .b(lv[l][2*j+1]), .y(lv[l+1][j]));
      end else begin : g_pass
        assign lv[l+1][j] = lv[l][2*j];
      end
    end
    for (genvar j = NO; j < N; j++) begin : g_unused
      assign lv[l+1][j] = '0;
    end
  end

  fp32_add u_bias (.a(lv[LEVELS][0]), .b(bias), .y(y));
endmodule
