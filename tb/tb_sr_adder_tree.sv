// tb_sr_adder_tree: random chunks and sign patterns; the segment sums, the metric share and
// the root sum are compared with direct sums for every block size 2^lvl.
// Combinational block, checked 1 time unit after the inputs change. The folding rule is the
// paper's; the chunked organisation and the full-width sums are this design's.
module tb_sr_adder_tree;
  localparam int P = 16, QW = 8, LOG_P = 4, SW = QW + LOG_P + 2;
  logic signed [QW-1:0] alpha [P];
  logic                 neg [P];
  logic [15:0]          n_valid;
  logic [4:0]           lvl;
  logic signed [SW-1:0] seg [P];
  logic signed [SW-1:0] root;
  logic [SW-1:0]        abs_sum;
  int checks = 0, failures = 0;

  sr_adder_tree #(.P(P), .QW(QW)) dut (.alpha, .neg, .n_valid, .lvl, .seg_sum(seg),
                                       .root_sum(root), .abs_sum);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      automatic int v [P];
      automatic int e_root = 0, e_abs = 0;
      lvl = 5'($urandom % (LOG_P + 2));
      n_valid = (it % 4 == 0) ? 16'(1 + $urandom % P) : 16'(P);
      for (int i = 0; i < P; i++) begin
        alpha[i] = QW'(int'($urandom % 255) - 127);
        neg[i] = $urandom & 1;
        v[i] = (i < n_valid) ? (neg[i] ? -int'(alpha[i]) : int'(alpha[i])) : 0;
        e_root += v[i];
      end
      #1;
      checks++;
      if (int'(root) != e_root) begin failures++; $display("root %0d exp %0d", root, e_root); end
      if (lvl <= LOG_P) begin
        automatic int bs = 1 << lvl;
        for (int t = 0; t < P / bs; t++) begin
          automatic int s = 0;
          for (int m = 0; m < bs; m++) s += v[t * bs + m];
          e_abs += s < 0 ? -s : s;
          checks++;
          if (int'(seg[t]) != s) begin failures++; $display("seg %0d lvl %0d: %0d exp %0d", t, lvl, seg[t], s); end
        end
      end
      checks++;
      if (int'(abs_sum) != e_abs) begin failures++; $display("abs %0d exp %0d", abs_sum, e_abs); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
