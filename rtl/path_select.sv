// path_select: comparison tree of Algorithm 1 step 3 of the paper:
//   l_hat = argmax_l  metric[l],   metric[l] = sum_k |alpha_src,l[k]|
// over the first n_paths entries (n_paths = |S|, a power of two up to S). The tree compares
// pairs level by level; on a tie the lower index wins (the paper does not say how ties are
// broken; this is this design's choice). Combinational.
module path_select #(
  parameter int unsigned S  = 16,
  parameter int unsigned MW = 20,
  parameter int unsigned LOG_S = $clog2(S)
) (
  input  logic [MW-1:0]    metric [S],
  input  logic [LOG_S:0]   n_paths,
  output logic [LOG_S-1:0] best,
  output logic [MW-1:0]    best_metric
);
  logic [MW-1:0]    val [LOG_S+1][S];
  logic [LOG_S-1:0] idx [LOG_S+1][S];
  logic             ok  [LOG_S+1][S];

  always_comb begin
    for (int unsigned t = 0; t <= LOG_S; t++)
      for (int unsigned i = 0; i < S; i++) begin
        val[t][i] = '0; idx[t][i] = '0; ok[t][i] = 1'b0;
      end
    for (int unsigned i = 0; i < S; i++) begin
      val[0][i] = metric[i];
      idx[0][i] = LOG_S'(i);
      ok[0][i]  = (i < n_paths);
    end
    for (int unsigned t = 1; t <= LOG_S; t++)
      for (int unsigned i = 0; i < (S >> t); i++) begin
        logic take_right;
        take_right = ok[t-1][2*i+1] && (!ok[t-1][2*i] || (val[t-1][2*i+1] > val[t-1][2*i]));
        val[t][i] = take_right ? val[t-1][2*i+1] : val[t-1][2*i];
        idx[t][i] = take_right ? idx[t-1][2*i+1] : idx[t-1][2*i];
        ok[t][i]  = ok[t-1][2*i] || ok[t-1][2*i+1];
      end
    best        = idx[LOG_S][0];
    best_metric = val[LOG_S][0];
  end
endmodule
