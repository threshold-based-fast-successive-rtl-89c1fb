// tb_polar_unpack: random u vectors are encoded by the testbench's own polar transform
// (x = u G_N, written with the bit-reversal folded into the pairing) and unpack(x) must
// return u. A recursive encoder is used here, independent of the module's iterative form.
// Combinational block. The transform is the standard polar transform; having a separate
// output stage is this design's choice.
module tb_polar_unpack;
  localparam int LOG_N = 7, N = 1 << LOG_N;
  logic [N-1:0] beta, u_hat;
  int checks = 0, failures = 0;

  polar_unpack #(.LOG_N(LOG_N)) dut (.beta_root(beta), .u_hat);

  // x = encode(u): x[2k] = encL[k] ^ encR[k], x[2k+1] = encR[k]
  function automatic void enc(input bit u[], output bit x[]);
    int n = u.size();
    bit ul[], ur[], xl[], xr[];
    x = new[n];
    if (n == 1) begin x[0] = u[0]; return; end
    ul = new[n / 2]; ur = new[n / 2];
    for (int i = 0; i < n / 2; i++) begin ul[i] = u[i]; ur[i] = u[n / 2 + i]; end
    enc(ul, xl); enc(ur, xr);
    for (int k = 0; k < n / 2; k++) begin x[2 * k] = xl[k] ^ xr[k]; x[2 * k + 1] = xr[k]; end
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      bit u[], x[];
      u = new[N];
      foreach (u[i]) u[i] = (it < 8) ? (i == it) : bit'($urandom & 1);
      enc(u, x);
      foreach (x[i]) beta[i] = x[i];
      #1;
      checks++;
      for (int i = 0; i < N; i++) if (u_hat[i] != u[i]) begin
        failures++; $display("it %0d: u[%0d] wrong", it, i); break;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
