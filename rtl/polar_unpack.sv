// polar_unpack: turns the decoder's root hard decisions into the estimate of u.
//
// A fast SC decoder ends with beta at the root, the estimate of the codeword x, not the
// estimate of u that plain SC collects at the leaves. Inverting the paper's hard-decision
// propagation (beta_j[2k-1] = betaL[k] xor betaR[k], beta_j[2k] =
// betaR[k]) node by node recovers the leaf values:
//   betaL[k] = beta_j[2k-1] xor beta_j[2k],   betaR[k] = beta_j[2k],
// applied from the root (one block of N) down to blocks of 2, each block replaced by
// [betaL, betaR]. The leaves in order are u_hat[1..N] (index 0 here is u[1]).
// Combinational, written as generate loops of continuous assignments: LOG_N levels of N/2
// XOR gates. The inversion itself is this design's
// addition; the paper only states that u_hat holds the result.
module polar_unpack #(
  parameter int unsigned LOG_N = 10,
  parameter int unsigned N = 1 << LOG_N
) (
  input  logic [N-1:0] beta_root,
  output logic [N-1:0] u_hat
);
  logic [N-1:0] stage [LOG_N+1];

  assign stage[0] = beta_root;
  for (genvar s = 0; s < LOG_N; s++) begin : g_stage
    localparam int unsigned M = N >> s;   // block size at this stage
    for (genvar o = 0; o < N; o += M) begin : g_blk
      for (genvar k = 0; k < M / 2; k++) begin : g_pair
        assign stage[s+1][o + k]         = stage[s][o + 2*k] ^ stage[s][o + 2*k + 1];
        assign stage[s+1][o + M / 2 + k] = stage[s][o + 2*k + 1];
      end
    end
  end
  assign u_hat = stage[LOG_N];
endmodule
