// tb_cs_tree: random chunks; per segment parity of hard decisions, minimum magnitude and its
// first position, and the whole-chunk values, against direct computation.
// Combinational block. Parity and least-reliable position are what the paper's Wagner decoder
// needs; the first-position tie-break and the segmented tree are this design's.
module tb_cs_tree;
  localparam int P = 16, QW = 8, LOG_P = 4;
  logic signed [QW-1:0] alpha [P];
  logic [15:0]          n_valid;
  logic [4:0]           lvl;
  logic                 sp [P];
  logic [QW-1:0]        sm [P];
  logic [LOG_P-1:0]     si [P];
  logic                 rp;
  logic [QW-1:0]        rm;
  logic [LOG_P-1:0]     ri;
  int checks = 0, failures = 0;

  cs_tree #(.P(P), .QW(QW)) dut (.alpha, .n_valid, .lvl, .seg_par(sp), .seg_min(sm),
                                 .seg_idx(si), .root_par(rp), .root_min(rm), .root_idx(ri));

  function automatic void ref_seg(int lo, int len, output bit par, output int mn, output int ix);
    par = 0; mn = 255; ix = lo;
    for (int i = lo; i < lo + len; i++) if (i < n_valid) begin
      int m = alpha[i] < 0 ? -int'(alpha[i]) : int'(alpha[i]);
      par ^= alpha[i] < 0;
      if (m < mn) begin mn = m; ix = i; end
    end
    if (mn == 255) ix = (lo < n_valid) ? ix : 0;
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      bit p; int m, x;
      lvl = 5'($urandom % (LOG_P + 1));
      n_valid = (it % 4 == 0) ? 16'(1 << ($urandom % (LOG_P + 1))) : 16'(P);
      for (int i = 0; i < P; i++)
        alpha[i] = QW'((it % 2) ? int'($urandom % 9) - 4 : int'($urandom % 255) - 127);
      #1;
      for (int t = 0; t < (P >> lvl); t++) begin
        if ((t << lvl) < n_valid) begin
          ref_seg(t << lvl, 1 << lvl, p, m, x);
          checks++;
          if (sp[t] != p || int'(sm[t]) != m || int'(si[t]) != x) begin
            failures++; $display("seg %0d lvl %0d: %0d %0d %0d exp %0d %0d %0d", t, lvl, sp[t], sm[t], si[t], p, m, x);
          end
        end
      end
      ref_seg(0, P, p, m, x);
      checks++;
      if (rp != p || int'(rm) != m || int'(ri) != x) begin failures++; $display("root mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
