// tb_srfsc_decoder: end-to-end test of the multi-stage decoder (N = 128, P = 8, CRC6).
//
// Frames of a Gaussian-approximation polar code with a CRC6 are encoded, sent through an
// AWGN channel and decoded. For each frame the expected result is worked out with the
// recursive reference decoder: attempt 1 with TA, the CRC, and attempt 2 without TA when the
// CRC fails after a hard decision. u_hat, crc_ok and the number of attempts must match, and
// the cycle count must lie between the reference's decoder cycles and that plus the CRC
// passes. The mechanisms of the design are counted and each must occur: TA hard decisions,
// SR nodes with |S| > 1, Wagner flips, a second attempt, a failed first CRC, and a frame
// decoded in plain SRFSC mode (multi_stage = 0). One group of frames uses thresholds forced
// to 0 so that the first attempt takes wrong hard decisions and has to be repeated.
// A last group decodes plain SRFSC frames at 1.5 dB, where Wagner flips are frequent.
// Stimulus changes on the falling clock edge; start is a one-cycle pulse and results are read
// after done. The two-attempt rule and the CRC follow the paper; the Gaussian-approximation
// code construction and the x4 LLR scaling are this testbench's own.
module tb_srfsc_decoder;
  import srfsc_pkg::*;
  import srfsc_sched_pkg::*;

  localparam int LOG_N = 7, LOG_P = 3, QW = 8, CRCL = 6;
  localparam int unsigned CPOLY = 6'h21;
  localparam int N = 1 << LOG_N, P = 1 << LOG_P;
  localparam int K = 64;                       // information bits including the CRC

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

  srfsc_decoder #(.LOG_N(LOG_N), .LOG_P(LOG_P), .QW(QW), .CRC_L(CRCL), .CRC_POLY(CRCL'(CPOLY))) dut (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_data, .llr_we, .llr_chunk, .llr_data,
    .info_mask, .multi_stage, .start, .busy, .done, .u_hat, .crc_ok, .attempts,
    .hd_used_first(hd_first), .cycles
  );

  int checks = 0, failures = 0;
  int ev_ta = 0, ev_sr = 0, ev_fl = 0, ev_retry = 0, ev_crcfail = 0, ev_plain = 0, ev_ok = 0;
  int nframes = 0, nframe_ok = 0;

  initial begin
    repeat (2000000) @(posedge clk);
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
    ev_ta += ta1; ev_retry += (attempts == 2); ev_crcfail += (ms && !ok1);
    ev_plain += !ms; ev_ok += crc_ok;
    ev_sr += (dut.u_core.cnt_sr_multi != 0);
    ev_fl += (dut.u_core.cnt_flips != 0);
  endtask

  initial begin
    real rate = real'(K) / N;
    ref_p = P; ref_qw = QW; llr_scale = 4.0;
    ta_c = 3.8; ta_mmin = 9.3891;       // epsilon = 0.9
    foreach (llr_data[k]) llr_data[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    build_info_set(LOG_N, K, 1.0 / (2.0 * rate * $pow(10.0, 2.5 / 10.0)));
    for (int i = 0; i < N; i++) info_mask[i] = dmask[i];
    // thresholds for Eb/N0 = 5.0 dB
    ga_mean(LOG_N, 1.0 / (2.0 * rate * $pow(10.0, 5.0 / 10.0)));
    compile(LOG_N);
    $display("schedule: %0d instructions, %0d SR (%0d with |S|>1), %0d EG-PC, %0d general, %0d TA nodes",
             prog_q.size(), n_sr, n_sr_multi, n_egpc, n_general, n_ta_nodes);
    load_prog();
    for (int f = 0; f < 20; f++) frame(5.0, 1'b1);
    for (int f = 0; f < 4; f++) frame(5.0, 1'b0);
    // thresholds forced to 0 on every general node: wrong hard decisions, second attempt
    thr_gain = 0.0; ta_mmin = 0.0;
    compile(LOG_N);
    load_prog();
    for (int f = 0; f < 6; f++) frame(3.0, 1'b1);
    // plain SRFSC at a low Eb/N0, where EG-PC parities are often wrong (Wagner flips)
    for (int f = 0; f < 2; f++) frame(1.5, 1'b0);
    $display("frames=%0d delivered_correct=%0d crc_ok=%0d ta_taken=%0d retries=%0d first_crc_fail=%0d plain=%0d",
             nframes, nframe_ok, ev_ok, ev_ta, ev_retry, ev_crcfail, ev_plain);
    checks++; if (ev_ta == 0)      begin failures++; $display("no TA hard decision"); end
    checks++; if (ev_retry == 0)   begin failures++; $display("no second attempt"); end
    checks++; if (ev_crcfail == 0) begin failures++; $display("no failed first CRC"); end
    checks++; if (ev_plain == 0)   begin failures++; $display("no plain SRFSC frame"); end
    checks++; if (ev_ok == 0)      begin failures++; $display("no CRC pass"); end
    checks++; if (ev_sr == 0)      begin failures++; $display("no SR node with |S|>1"); end
    checks++; if (ev_fl == 0)      begin failures++; $display("no Wagner flip"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
