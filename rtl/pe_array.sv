// pe_array: the P processing elements of the semi-parallel decoder, with the threshold
// comparators of the hard-decision-aided (TA) scheme.
//
// Each lane k takes the LLR pair (a[k], b[k]) = (alpha_j[2k], alpha_j[2k+1]) of the node being
// processed (0-based) and the left child's hard decision u[k], and returns
//   mode_g = 0:  f(a,b) = sign(a) sign(b) min(|a|,|b|)          (min-sum f of the paper)
//   mode_g = 1:  g(a,b,u) = (-1)^u a + b, saturated to QW bits  (g of the paper)
// In the same pass it compares every valid input with the TA threshold T: ta_pass is 1 when
// |x| > T for all valid inputs, which is the condition of the paper's hard decision HB (both
// branches of the hard-decision rule hold strictly). hard_a/hard_b are h(a), h(b), the values the
// node takes if the hard decision is accepted. The paper performs this comparison "in parallel
// with the calculation of the LLR values of its left child", which is why it sits in the PEs.
// Lanes at or above n_valid (when the node has fewer than 2P LLRs) are ignored by ta_pass.
// Purely combinational; the sequencer registers the results. hard_a/hard_b are the input sign
// bits, plain wires with no logic; they are outputs so that the TA hard decisions come from
// the same lanes that are compared.
module pe_array #(
  parameter int unsigned P  = 64,
  parameter int unsigned QW = 8
) (
  input  logic                 mode_g,
  input  logic signed [QW-1:0] a      [P],
  input  logic signed [QW-1:0] b      [P],
  input  logic                 u      [P],
  input  logic [15:0]          n_valid,   // number of valid lanes (1..P)
  input  logic [QW-1:0]        thr,       // TA threshold, unsigned
  output logic signed [QW-1:0] y      [P],
  output logic                 hard_a [P],
  output logic                 hard_b [P],
  output logic                 ta_pass
);
  localparam logic signed [QW:0] MAXV = (QW+1)'((1 << (QW-1)) - 1);

  function automatic logic [QW-1:0] mag(input logic signed [QW-1:0] x);
    return x[QW-1] ? QW'(-x) : QW'(x);
  endfunction

  always_comb begin
    ta_pass = 1'b1;
    for (int unsigned k = 0; k < P; k++) begin
      logic signed [QW:0] s;
      logic [QW-1:0] ma, mb, m;
      s  = '0;
      ma = mag(a[k]);
      mb = mag(b[k]);
      m  = (ma < mb) ? ma : mb;
      if (!mode_g) begin
        y[k] = (a[k][QW-1] ^ b[k][QW-1]) ? QW'(-$signed({1'b0, m})) : QW'($signed({1'b0, m}));
      end else begin
        s = u[k] ? ($signed({b[k][QW-1], b[k]}) - $signed({a[k][QW-1], a[k]}))
                 : ($signed({b[k][QW-1], b[k]}) + $signed({a[k][QW-1], a[k]}));
        if (s > MAXV)       y[k] = QW'(MAXV);
        else if (s < -MAXV) y[k] = QW'(-MAXV);
        else                y[k] = s[QW-1:0];
      end
      hard_a[k] = a[k][QW-1];
      hard_b[k] = b[k][QW-1];
      if (k < n_valid) begin
        if (!(ma > thr) || !(mb > thr)) ta_pass = 1'b0;
      end
    end
  end
endmodule
