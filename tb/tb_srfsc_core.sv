// tb_srfsc_core: checks the SRFSC sequencer against the recursive reference decoder.
//
// N = 64 and P = 4 so that every instruction runs over several chunks and SR / EG-PC blocks
// both shorter and longer than a chunk occur. Codes: Gaussian-approximation constructions at
// several rates, a hand-made pattern with a REP-leftmost EG-PC node, and random frozen sets.
// For every frame the decoder runs once with TA off and once with TA on; beta_root and the
// cycle count must equal the reference exactly. A noiseless frame must return the codeword.
module tb_srfsc_core;
  import srfsc_pkg::*;
  import srfsc_sched_pkg::*;

  localparam int LOG_N = 6, LOG_P = 2, QW = 8;
  localparam int N = 1 << LOG_N, P = 1 << LOG_P;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_we = 0; logic [PCW-1:0] prog_addr = '0; instr_t prog_data = '0;
  logic llr_we = 0; logic [15:0] llr_chunk = '0; logic signed [QW-1:0] llr_data [P];
  logic start = 0, ta_enable = 0;
  logic busy, done, hd_used;
  logic [N-1:0] beta_root;
  logic [31:0] cycles;
  logic [15:0] c_ta, c_tt, c_sr, c_eg, c_fl;

  srfsc_core #(.LOG_N(LOG_N), .LOG_P(LOG_P), .QW(QW)) dut (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_data, .llr_we, .llr_chunk, .llr_data,
    .start, .ta_enable, .busy, .done, .hd_used, .beta_root, .cycles,
    .cnt_ta_taken(c_ta), .cnt_ta_tested(c_tt), .cnt_sr_multi(c_sr), .cnt_egpc_rep(c_eg),
    .cnt_flips(c_fl)
  );

  int checks = 0, failures = 0;
  int ev_ta = 0, ev_sr = 0, ev_eg = 0, ev_fl = 0, ev_tt = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_prog();
    foreach (prog_q[i]) begin
      @(negedge clk); prog_we = 1; prog_addr = PCW'(i); prog_data = prog_q[i];
    end
    @(negedge clk); prog_we = 0;
  endtask

  task automatic load_llr(input int a[]);
    for (int c = 0; c < N / P; c++) begin
      @(negedge clk);
      llr_we = 1; llr_chunk = 16'(c);
      for (int k = 0; k < P; k++) llr_data[k] = QW'(a[c * P + k]);
    end
    @(negedge clk); llr_we = 0;
  endtask

  task automatic run(input bit ta, input int a[], input bit x[], input bit must_match_x);
    bit rb[];
    int to = 0;
    ref_ta = ta; ref_cycles = 0; ref_ta_taken = 0;
    ref_dec(a, 0, LOG_N, rb);
    ref_cycles += 1;   // OP_END
    @(negedge clk); ta_enable = ta; start = 1;
    @(negedge clk); start = 0;
    while (!done && to < 100000) begin @(posedge clk); to++; end
    @(negedge clk);
    checks++;
    begin
      bit bad = 0;
      for (int i = 0; i < N; i++) if (beta_root[i] != rb[i]) bad = 1;
      if (bad) begin failures++; $display("beta mismatch ta=%0d", ta); end
    end
    checks++;
    if (longint'(cycles) != ref_cycles) begin
      failures++; $display("cycles %0d expected %0d", cycles, ref_cycles);
    end
    checks++;
    if (int'(c_ta) != ref_ta_taken || hd_used != (ref_ta_taken > 0)) begin
      failures++; $display("TA count %0d expected %0d", c_ta, ref_ta_taken);
    end
    if (must_match_x) begin
      checks++;
      for (int i = 0; i < N; i++) if (beta_root[i] != x[i]) begin
        failures++; $display("noiseless frame not recovered"); break;
      end
    end
    ev_ta += c_ta; ev_sr += c_sr; ev_eg += c_eg; ev_fl += c_fl; ev_tt += c_tt;
  endtask

  task automatic frames(input int nfr, input real ebn0_db, input real rate);
    real sigma = $sqrt(1.0 / (2.0 * rate * $pow(10.0, ebn0_db / 10.0)));
    for (int f = 0; f < nfr; f++) begin
      bit u[], x[];
      int a[];
      u = new[N]; a = new[N];
      foreach (u[i]) u[i] = dmask[i] ? bit'($urandom & 1) : 1'b0;
      encode(u, x);
      foreach (a[i]) begin
        real y = (x[i] ? -1.0 : 1.0) + ((f == 0) ? 0.0 : sigma * gauss());
        a[i] = qllr(2.0 * y / (sigma * sigma), QW);
      end
      load_llr(a);
      run(1'b0, a, x, f == 0);
      run(1'b1, a, x, 1'b0);
    end
  endtask

  function automatic int popk();
    int k = 0;
    foreach (dmask[i]) k += dmask[i];
    return k;
  endfunction

  initial begin
    ref_p = P; ref_qw = QW; llr_scale = 4.0;
    ta_c = 3.8; ta_mmin = 9.3891;       // epsilon = 0.9
    foreach (llr_data[k]) llr_data[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Gaussian-approximation codes at several rates
    for (int t = 0; t < 3; t++) begin
      int kk = (t + 1) * 16;
      real rate = real'(kk) / N;
      real s2 = 1.0 / (2.0 * rate * $pow(10.0, 0.25));
      build_info_set(LOG_N, kk, s2);
      ga_mean(LOG_N, 1.0 / (2.0 * rate * $pow(10.0, 0.5)));   // TA means at 5 dB
      compile(LOG_N);
      load_prog();
      frames(6, 3.0, rate);
      frames(6, 5.0, rate);
      frames(4, 7.0, rate);
    end
    // hand-made: 16-bit nodes with d = 0001 1111 1111 1111 (EG-PC, REP leftmost at q = 2)
    for (int i = 0; i < N; i++) dmask[i] = ((i % 16) >= 3);
    compile(LOG_N);
    load_prog();
    frames(8, 3.0, 0.75);
    // random frozen sets
    for (int t = 0; t < 6; t++) begin
      for (int i = 0; i < N; i++) dmask[i] = ($urandom % 100) < (20 + 12 * t);
      ga_mean(LOG_N, 0.3);
      compile(LOG_N);
      load_prog();
      frames(4, 4.0, real'(popk() + 1) / N);
    end
    $display("events: ta_taken=%0d ta_tested=%0d sr_multi=%0d egpc_rep=%0d flips=%0d",
             ev_ta, ev_tt, ev_sr, ev_eg, ev_fl);
    checks++; if (ev_ta == 0) begin failures++; $display("no TA hard decision"); end
    checks++; if (ev_tt <= ev_ta) begin failures++; $display("no rejected TA test"); end
    checks++; if (ev_sr == 0) begin failures++; $display("no SR node with |S|>1"); end
    checks++; if (ev_eg == 0) begin failures++; $display("no REP-leftmost EG-PC"); end
    checks++; if (ev_fl == 0) begin failures++; $display("no Wagner flip"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
