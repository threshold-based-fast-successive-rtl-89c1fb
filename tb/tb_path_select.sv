// tb_path_select: random metrics (with forced ties) and path counts; the selected index must
// be the first index of the largest metric among the first n_paths entries.
// Combinational block. The argmax is the paper's rule; the lower-index tie-break is this design's.
module tb_path_select;
  localparam int S = 16, MW = 20;
  logic [MW-1:0] metric [S];
  logic [4:0]    n_paths;
  logic [3:0]    best;
  logic [MW-1:0] best_metric;
  int checks = 0, failures = 0;

  path_select #(.S(S), .MW(MW)) dut (.metric, .n_paths, .best, .best_metric);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      automatic int eb = 0;
      n_paths = 5'(1 << ($urandom % 5));
      for (int l = 0; l < S; l++)
        metric[l] = (it % 3 == 0) ? MW'($urandom % 4) : MW'($urandom);
      for (int l = 1; l < n_paths; l++) if (metric[l] > metric[eb]) eb = l;
      #1;
      checks++;
      if (int'(best) != eb || best_metric != metric[eb]) begin
        failures++; $display("best %0d exp %0d (n=%0d)", best, eb, n_paths);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
