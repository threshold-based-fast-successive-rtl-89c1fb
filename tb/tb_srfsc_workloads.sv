// tb_srfsc_workloads: the code configurations the paper evaluates on its N = 1024 hardware,
// run on the decoder at its default parameters (N = 1024, P = 64, CRC16).
//
// For each rate R in {1/4, 1/2, 3/4} a polar code is built by Gaussian approximation (the
// standard's reliability table is not reproduced here, so the frozen sets, and with them the
// node counts and cycle counts, differ from those of the paper's 5G codes). The schedule is
// compiled with the TA thresholds for epsilon in {0.9, 0.99, 0.999}
// (c = 3.8, 4.3, 4.8; m_min = 9.3891, 14.7255, 16.1604) at the operating Eb/N0, and frames
// are decoded with multi-stage decoding and with plain SRFSC. Every frame is checked against
// the reference decoder (u_hat, crc_ok, attempts, cycle bounds). Printed per configuration:
// the schedule's node counts, the SRFSC cycle count of one attempt, and the average cycles
// of multi-stage decoding, which is the latency figure the paper reports relative to SRFSC.
// A failure is also counted if TA never saves cycles on average at the highest Eb/N0.
module tb_srfsc_workloads;
  import srfsc_pkg::*;
  import srfsc_sched_pkg::*;

  localparam int LOG_N = 10, LOG_P = 6, QW = 8, CRCL = 16;
  localparam int unsigned CPOLY = 16'h1021;
  localparam int N = 1 << LOG_N, P = 1 << LOG_P;
  int K = 512;                                  // information bits including the CRC

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_we = 0; logic [PCW-1:0] prog_addr = '0; instr_t prog_data = '0;
  logic llr_we = 0; logic [15:0] llr_chunk = '0; logic signed [QW-1:0] llr_data [P];
  logic [N-1:0] info_mask = '0;
  logic multi_stage = 1, start = 0;
  logic busy, done, crc_ok, hd_first;
  logic [N-1:0] u_hat;
  logic [1:0] attempts;
  logic [31:0] cycles;

  srfsc_decoder  dut (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_data, .llr_we, .llr_chunk, .llr_data,
    .info_mask, .multi_stage, .start, .busy, .done, .u_hat, .crc_ok, .attempts,
    .hd_used_first(hd_first), .cycles
  );

  int checks = 0, failures = 0;
  int ev_ta = 0, ev_sr = 0, ev_fl = 0, ev_retry = 0, ev_crcfail = 0, ev_plain = 0, ev_ok = 0;
  int nframes = 0, nframe_ok = 0;
  longint last_cycles;

  initial begin
    repeat (20000000) @(posedge clk);
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

  // u from a codeword estimate (inverse of encode)
  function automatic void unpack(input bit b[], output bit u[]);
    bit a[];
    a = b;
    for (int m = N; m >= 2; m /= 2) begin
      bit t[];
      t = new[N];
      for (int o = 0; o < N; o += m)
        for (int k = 0; k < m / 2; k++) begin
          t[o + k]         = a[o + 2 * k] ^ a[o + 2 * k + 1];
          t[o + m / 2 + k] = a[o + 2 * k + 1];
        end
      a = t;
    end
    u = a;
  endfunction

  function automatic bit crc_pass(input bit u[]);
    bit msg[];
    int n = 0;
    msg = new[K];
    for (int i = 0; i < N; i++) if (dmask[i]) begin msg[n] = u[i]; n++; end
    return crc_of(msg, K, CRCL, CPOLY) == 0;
  endfunction

  task automatic frame(input real ebn0_db, input bit ms);
    real rate = real'(K) / N;
    real sigma = $sqrt(1.0 / (2.0 * rate * $pow(10.0, ebn0_db / 10.0)));
    bit u[], x[], b1[], b2[], u1[], u2[], ue[];
    bit msg[];
    int a[];
    int n = 0, ta1;
    int unsigned cr;
    longint cyc;
    bit ok1, ok2, ok_e;
    int att_e;
    u = new[N]; a = new[N]; msg = new[K];
    for (int i = 0; i < N; i++) u[i] = 0;
    for (int i = 0; i < N; i++) if (dmask[i] && n < K - CRCL) begin
      u[i] = bit'($urandom & 1); msg[n] = u[i]; n++;
    end
    cr = crc_of(msg, K - CRCL, CRCL, CPOLY);
    for (int i = 0, m = 0; i < N; i++) if (dmask[i]) begin
      if (m >= K - CRCL) u[i] = bit'((cr >> (CRCL - 1 - (m - (K - CRCL)))) & 1);
      m++;
    end
    encode(u, x);
    foreach (a[i]) begin
      real y = (x[i] ? -1.0 : 1.0) + sigma * gauss();
      a[i] = qllr(2.0 * y / (sigma * sigma), QW);
    end
    // expected behaviour
    ref_cycles = 0; ref_ta_taken = 0; ref_ta = ms;
    ref_dec(a, 0, LOG_N, b1);
    ta1 = ref_ta_taken;
    cyc = ref_cycles + 1;
    unpack(b1, u1);
    ok1 = crc_pass(u1);
    ue = u1; ok_e = ok1; att_e = 1;
    if (ms && !ok1 && ta1 > 0) begin
      ref_ta = 0; ref_cycles = 0;
      ref_dec(a, 0, LOG_N, b2);
      cyc += ref_cycles + 1;
      unpack(b2, u2);
      ok2 = crc_pass(u2);
      ue = u2; ok_e = ok2; att_e = 2;
    end
    // run
    load_llr(a);
    multi_stage = ms;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    nframes++;
    checks++;
    if (int'(attempts) != att_e) begin
      failures++; $display("attempts %0d expected %0d", attempts, att_e);
    end
    checks++;
    if (crc_ok != ok_e) begin failures++; $display("crc_ok %0d expected %0d", crc_ok, ok_e); end
    checks++;
    begin
      bit bad = 0;
      for (int i = 0; i < N; i++) if (dmask[i] && u_hat[i] != ue[i]) bad = 1;
      if (bad) begin failures++; $display("u_hat differs from the reference"); end
    end
    checks++;
    if (longint'(cycles) < cyc || longint'(cycles) > cyc + att_e * (N / P + 4)) begin
      failures++; $display("cycles %0d, decoder part %0d", cycles, cyc);
    end
    if (ok_e) begin
      bit good = 1;
      for (int i = 0; i < N; i++) if (dmask[i] && ue[i] != u[i]) good = 0;
      nframe_ok += good;
    end
    last_cycles = cycles;
    ev_ta += ta1; ev_retry += (attempts == 2); ev_crcfail += (ms && !ok1);
    ev_plain += !ms; ev_ok += crc_ok;
    ev_sr += (dut.u_core.cnt_sr_multi != 0);
    ev_fl += (dut.u_core.cnt_flips != 0);
  endtask

  initial begin
    real eps_c [3] = '{3.8, 4.3, 4.8};
    real eps_m [3] = '{9.3891, 14.7255, 16.1604};
    string eps_n [3] = '{"0.9", "0.99", "0.999"};
    int bad_gain = 0;
    ref_p = P; ref_qw = QW; llr_scale = 4.0;
    foreach (llr_data[k]) llr_data[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ri = 1; ri <= 3; ri++) begin
      real rate;
      longint plain_cyc, sum_ms;
      K = ri * N / 4;
      rate = real'(K) / N;
      build_info_set(LOG_N, K, 1.0 / (2.0 * rate * $pow(10.0, 2.5 / 10.0)));
      for (int i = 0; i < N; i++) info_mask[i] = dmask[i];
      for (int e = 0; e < 3; e++) begin
        real ebn0 = 5.0;
        ta_c = eps_c[e]; ta_mmin = eps_m[e]; thr_gain = 1.0;
        ga_mean(LOG_N, 1.0 / (2.0 * rate * $pow(10.0, ebn0 / 10.0)));
        compile(LOG_N);
        load_prog();
        if (e == 0) begin
          frame(ebn0, 1'b0);
          plain_cyc = last_cycles;
          $display("R=%0d/4: %0d instructions, %0d SR nodes (%0d with |S|>1), %0d EG-PC, %0d general; SRFSC frame %0d cycles (decoder + CRC)",
                   ri, prog_q.size(), n_sr, n_sr_multi, n_egpc, n_general, plain_cyc);
        end
        sum_ms = 0;
        for (int f = 0; f < 3; f++) begin frame(ebn0, 1'b1); sum_ms += last_cycles; end
        $display("R=%0d/4 eps=%s Eb/N0=%0.1f dB: %0d TA nodes, multi-stage average %0d cycles (%0d%% of SRFSC)",
                 ri, eps_n[e], ebn0, n_ta_nodes, sum_ms / 3, 100 * sum_ms / (3 * plain_cyc));
        if (e == 0 && sum_ms >= 3 * plain_cyc) bad_gain++;
      end
    end
    $display("frames=%0d delivered_correct=%0d crc_ok=%0d ta_taken=%0d retries=%0d",
             nframes, nframe_ok, ev_ok, ev_ta, ev_retry);
    checks++; if (bad_gain != 0) begin failures++; $display("TA gave no latency reduction"); end
    checks++; if (ev_ta == 0)     begin failures++; $display("no TA hard decision"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
