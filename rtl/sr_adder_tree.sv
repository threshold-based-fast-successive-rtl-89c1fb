// sr_adder_tree: signed adder tree that forms the LLRs of an SR node's source node for one
// repetition sequence (Algorithm 1 step 1, Proposition 1 of the paper):
//   alpha_src[k] = sum_{m=1..B} alpha_j[(k-1)B + m] * (-1)^{s_l[m]},   B = 2^(j-r)
// together with the path metric of step 3, sum_k |alpha_src[k]|.
//
// One call handles one chunk of P consecutive node LLRs. neg[i] = s_l[m] for lane i. The tree
// has LOG_P levels; level t holds sums of 2^t consecutive lanes. With lvl = log2(B):
//   * lvl <= LOG_P: seg_sum[t], t < P >> lvl, are complete source LLRs and abs_sum is the sum
//     of their magnitudes (the chunk's share of the path metric);
//   * lvl >  LOG_P: a source LLR spans several chunks; root_sum is this chunk's part of it and
//     the sequencer accumulates it.
// Lanes at or above n_valid count as 0. Sums are kept at full width (SW bits) and are not
// saturated here. The paper pipelines this tree; here it is combinational (one chunk per
// cycle), which is this design's choice.
module sr_adder_tree #(
  parameter int unsigned P  = 64,
  parameter int unsigned QW = 8,
  parameter int unsigned LOG_P = $clog2(P),
  parameter int unsigned SW = QW + LOG_P + 2
) (
  input  logic signed [QW-1:0] alpha [P],
  input  logic                 neg   [P],
  input  logic [15:0]          n_valid,
  input  logic [4:0]           lvl,
  output logic signed [SW-1:0] seg_sum [P],
  output logic signed [SW-1:0] root_sum,
  output logic [SW-1:0]        abs_sum
);
  logic signed [SW-1:0] node [LOG_P+1][P];

  always_comb begin
    for (int unsigned t = 0; t <= LOG_P; t++)
      for (int unsigned i = 0; i < P; i++) node[t][i] = '0;
    for (int unsigned i = 0; i < P; i++) begin
      if (i < n_valid) node[0][i] = neg[i] ? -SW'(alpha[i]) : SW'(alpha[i]);
    end
    for (int unsigned t = 1; t <= LOG_P; t++)
      for (int unsigned i = 0; i < (P >> t); i++)
        node[t][i] = node[t-1][2*i] + node[t-1][2*i+1];

    root_sum = node[LOG_P][0];
    abs_sum  = '0;
    for (int unsigned i = 0; i < P; i++) seg_sum[i] = '0;
    for (int unsigned t = 0; t <= LOG_P; t++) begin
      if (5'(t) == lvl) begin
        for (int unsigned i = 0; i < (P >> t); i++) begin
          seg_sum[i] = node[t][i];
          abs_sum    = abs_sum + (node[t][i] < 0 ? SW'(-node[t][i]) : SW'(node[t][i]));
        end
      end
    end
  end
endmodule
