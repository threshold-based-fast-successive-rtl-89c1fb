// cs_tree: segmented compare-and-select (CS) tree for the Wagner decoders of EG-PC nodes
// (paper Sec. III-B and Sec. V-B).
//
// A Wagner decoder takes hard decisions h(alpha) on an SPC block and, when the block's parity
// differs from the required parity z, flips the least reliable bit. For one chunk of P lanes
// this tree gives, for every block of 2^lvl consecutive lanes, the parity of the hard decisions,
// the smallest |alpha| and the lane holding it (ties: the lower lane). When lvl > LOG_P a block
// spans several chunks and the root values (whole chunk) are combined by the sequencer.
// Lanes at or above n_valid take magnitude all-ones and parity 0 so they never win.
// The same per-block (parity, min) pair also gives the check-node value of the block,
// alpha_k = (-1)^parity * min, used to estimate z when the leftmost node is a REP node.
// Combinational; the paper pipelines this tree, this design does not.
module cs_tree #(
  parameter int unsigned P  = 64,
  parameter int unsigned QW = 8,
  parameter int unsigned LOG_P = $clog2(P)
) (
  input  logic signed [QW-1:0] alpha [P],
  input  logic [15:0]          n_valid,
  input  logic [4:0]           lvl,
  output logic                 seg_par [P],
  output logic [QW-1:0]        seg_min [P],
  output logic [LOG_P-1:0]     seg_idx [P],
  output logic                 root_par,
  output logic [QW-1:0]        root_min,
  output logic [LOG_P-1:0]     root_idx
);
  logic             par [LOG_P+1][P];
  logic [QW-1:0]    mn  [LOG_P+1][P];
  logic [LOG_P-1:0] ix  [LOG_P+1][P];

  always_comb begin
    for (int unsigned t = 0; t <= LOG_P; t++)
      for (int unsigned i = 0; i < P; i++) begin
        par[t][i] = 1'b0; mn[t][i] = '1; ix[t][i] = '0;
      end
    for (int unsigned i = 0; i < P; i++) begin
      ix[0][i] = LOG_P'(i);
      if (i < n_valid) begin
        par[0][i] = alpha[i][QW-1];
        mn[0][i]  = alpha[i][QW-1] ? QW'(-alpha[i]) : QW'(alpha[i]);
      end
    end
    for (int unsigned t = 1; t <= LOG_P; t++)
      for (int unsigned i = 0; i < (P >> t); i++) begin
        par[t][i] = par[t-1][2*i] ^ par[t-1][2*i+1];
        if (mn[t-1][2*i+1] < mn[t-1][2*i]) begin
          mn[t][i] = mn[t-1][2*i+1]; ix[t][i] = ix[t-1][2*i+1];
        end else begin
          mn[t][i] = mn[t-1][2*i];   ix[t][i] = ix[t-1][2*i];
        end
      end
    for (int unsigned i = 0; i < P; i++) begin
      seg_par[i] = 1'b0; seg_min[i] = '1; seg_idx[i] = '0;
    end
    for (int unsigned t = 0; t <= LOG_P; t++) begin
      if (5'(t) == lvl) begin
        for (int unsigned i = 0; i < (P >> t); i++) begin
          seg_par[i] = par[t][i]; seg_min[i] = mn[t][i]; seg_idx[i] = ix[t][i];
        end
      end
    end
    root_par = par[LOG_P][0];
    root_min = mn[LOG_P][0];
    root_idx = ix[LOG_P][0];
  end
endmodule
