// srfsc_core: semi-parallel SR-node fast SC decoder (SRFSC), with the threshold-based
// hard-decision-aided (TA) shortcut, for one polar code of length N = 2^LOG_N.
//
// How it works. The decoding tree is walked by a schedule held in program memory (written
// through prog_*). Each instruction names a node level j and works on that level's LLR array
// alpha_j (2^j words) and on two hard-decision buffers per level, beta[j][0] (the value of a
// left child, kept until its parent combines) and beta[j][1] (a right child). Every instruction
// runs as a loop over chunks of P lanes, one chunk per clock, so an operation on M values takes
// ceil(M/P) cycles (the semi-parallel decoder with P processing elements of the paper):
//   OP_F    f on alpha_j -> alpha_j-1. If ta_en and the attempt allows TA, the PEs also test
//           |alpha_j| > T; h(alpha_j) is written to beta[j][side] during the pass, and when all
//           inputs pass the subtree is skipped (jump to skip) and hd_used is set.
//   OP_G    g on alpha_j with beta[j-1][0] -> alpha_j-1.
//   OP_C    beta[j][side] from beta[j-1][0], beta[j-1][1] (hard-decision propagation).
//   OP_R0 / OP_R1   Rate-0 (zeros) / Rate-1 (h(alpha)) nodes.
//   OP_EGPC EG-PC node: 2^q SPC blocks of 2^(j-q) contiguous bits. Pass 0 writes h(alpha),
//           and the CS tree records per block the parity, the least reliable position and the
//           check-node value; z = 0 (leftmost Rate-0) or h(sum of check-node values) (leftmost
//           REP). The check-node value is the min-sum one, (-1)^parity min|alpha|, where
//           the paper writes the exact tanh rule. Pass 1 runs the Wagner flips, P blocks per
//           cycle.
//   OP_SRS  SR node steps 1 and 3: pass 0 runs the |S| adder trees in parallel and accumulates
//           the metrics sum_k |alpha_src,l[k]|; the comparison tree picks l_hat. Pass 1 writes
//           alpha_src for l_hat into level r. Pass 0 is left out when |S| = 1.
//   OP_SRX  SR node output, beta[j][side] = beta[r][1] xor s_l_hat blockwise.
// The source node between OP_SRS and OP_SRX is decoded by ordinary instructions at level r
// writing beta[r][1] (a Rate-0/Rate-1/EG-PC leaf, or a whole Rate-C subtree). Because the
// path metric needs only step-1 results, the path is chosen before the source is decoded and
// only the chosen path is decoded: the paper's parallel paths give the same result, since
// the selection rule (largest metric) does not look at the source decoding.
//
// Interface. Load the schedule (prog_we) and the channel LLRs (llr_we, one P-word chunk of
// alpha_n per write), then pulse start with ta_enable = 1 for a TA-SRFSC attempt or 0 for plain
// SRFSC. done pulses when OP_END is reached; beta_root then holds the codeword estimate and
// cycles the cycle count of the attempt. The channel LLRs are only read, so a second attempt
// needs no reload. hd_used tells whether a TA hard decision was taken in the attempt.
//
// Paper versus this design: the node types, the SR decoding rule, Wagner decoding, the TA rule
// and P = 64 follow the paper. The instruction set, the memory layout, the QW-bit saturating
// fixed point, the single-cycle (unpipelined) trees and choosing the path before decoding the
// source are this design's choices; the paper's own hardware is described elsewhere.
module srfsc_core
  import srfsc_pkg::*;
#(
  parameter int unsigned LOG_N = LOG_N_DEF,
  parameter int unsigned LOG_P = LOG_P_DEF,
  parameter int unsigned QW    = QW_DEF,
  parameter int unsigned DEPTH = 1 << PCW,
  localparam int unsigned N  = 1 << LOG_N,
  localparam int unsigned P  = 1 << LOG_P,
  localparam int unsigned SW = QW + LOG_P + 2,
  localparam int unsigned MW = QW + LOG_N + 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // schedule memory
  input  logic                 prog_we,
  input  logic [PCW-1:0]       prog_addr,
  input  instr_t               prog_data,
  // channel LLRs, chunk llr_chunk holds alpha_n[llr_chunk*P +: P]
  input  logic                 llr_we,
  input  logic [15:0]          llr_chunk,
  input  logic signed [QW-1:0] llr_data [P],
  // control
  input  logic                 start,
  input  logic                 ta_enable,
  output logic                 busy,
  output logic                 done,
  output logic                 hd_used,
  output logic [N-1:0]         beta_root,
  output logic [31:0]          cycles,
  // event counters of the last attempt
  output logic [15:0]          cnt_ta_taken,    // TA hard decisions taken
  output logic [15:0]          cnt_ta_tested,   // TA threshold tests made
  output logic [15:0]          cnt_sr_multi,    // SR nodes with |S| > 1
  output logic [15:0]          cnt_egpc_rep,    // EG-PC nodes with a REP leftmost node
  output logic [15:0]          cnt_flips        // Wagner bit flips
);
  localparam logic signed [SW-1:0] SMAXV = SW'((1 << (QW-1)) - 1);

  // ---------------------------------------------------------------- storage
  instr_t               prog [DEPTH];
  logic signed [QW-1:0] amem [2*N];          // level j at [2^j, 2^(j+1))
  logic [2*N-1:0]       bmem [2];            // same layout, one per side
  logic [15:0]          eta_sel [LOG_N+1];   // chosen eta vector of the SR node at level j
  logic                 blk_par [N/2];
  logic [LOG_N-1:0]     blk_idx [N/2];

  typedef enum logic [1:0] {S_IDLE, S_EXEC, S_DONE} state_e;
  state_e         state;
  logic [PCW-1:0] pc;
  logic [15:0]    c;          // chunk counter
  logic           pass;
  logic           ta_ok;
  logic           ta_attempt;
  logic           zreg;
  logic signed [MW-1:0] zsum;
  logic [MW-1:0]  metric [SMAX];
  logic signed [MW-1:0] acc [SMAX];
  logic           rpar;
  logic [QW-1:0]  rmin;
  logic [LOG_N-1:0] ridx;

  instr_t ir;
  assign ir = prog[pc];

  always_ff @(posedge clk) begin
    if (prog_we) prog[prog_addr] <= prog_data;
  end

  // ---------------------------------------------------------------- decode of the current chunk
  int unsigned j, r, lvl, nj, base_j, base_c, base_r, cnt, nval, npaths, bsz;
  logic        last;

  function automatic int unsigned popc(input logic [15:0] x);
    int unsigned n = 0;
    for (int unsigned i = 0; i < 16; i++) n += x[i];
    return n;
  endfunction

  always_comb begin
    j      = int'(ir.j);
    r      = int'(ir.r);
    nj     = 1 << j;
    base_j = nj;
    base_c = (j > 0) ? (nj >> 1) : 0;
    base_r = 1 << r;
    lvl    = (j >= r) ? (j - r) : 0;
    bsz    = 1 << lvl;
    npaths = 1 << popc(ir.eta_free);
    case (ir.op)
      OP_F, OP_G, OP_C: cnt = nj >> 1;
      OP_EGPC:          cnt = pass ? (1 << r) : nj;
      default:          cnt = nj;
    endcase
    nval = ((cnt - c * P) < P) ? (cnt - c * P) : P;
    last = ((32'(c) + 1) * P >= cnt);
  end

  // ---------------------------------------------------------------- processing elements
  logic signed [QW-1:0] pe_a [P], pe_b [P], pe_y [P];
  logic                 pe_u [P], pe_ha [P], pe_hb [P];
  logic                 pe_pass;

  always_comb begin
    for (int unsigned k = 0; k < P; k++) begin
      int unsigned o;
      o = 32'(c) * P + k;
      pe_a[k] = '0; pe_b[k] = '0; pe_u[k] = 1'b0;
      if (o < cnt) begin
        pe_a[k] = amem[base_j + 2*o];
        pe_b[k] = amem[base_j + 2*o + 1];
        pe_u[k] = bmem[0][base_c + o];
      end
    end
  end

  pe_array #(.P(P), .QW(QW)) u_pe (
    .mode_g (ir.op == OP_G),
    .a      (pe_a),
    .b      (pe_b),
    .u      (pe_u),
    .n_valid(16'(nval)),
    .thr    (QW'(ir.thr)),
    .y      (pe_y),
    .hard_a (pe_ha),
    .hard_b (pe_hb),
    .ta_pass(pe_pass)
  );

  // ---------------------------------------------------------------- chunk of alpha_j (SR, EG-PC, R1)
  logic signed [QW-1:0] lin [P];
  always_comb begin
    for (int unsigned k = 0; k < P; k++) begin
      int unsigned o;
      o = 32'(c) * P + k;
      lin[k] = (o < nj) ? amem[base_j + o] : '0;
    end
  end

  // ---------------------------------------------------------------- SR adder trees
  logic                 neg    [SMAX][P];
  logic signed [SW-1:0] t_seg  [SMAX][P];
  logic signed [SW-1:0] t_root [SMAX];
  logic [SW-1:0]        t_abs  [SMAX];
  logic [15:0]          eta_l  [SMAX];

  always_comb begin
    for (int unsigned l = 0; l < SMAX; l++) begin
      eta_l[l] = (pass && l == 0) ? eta_sel[j] : eta_of_path(ir.eta_free, l);
      for (int unsigned k = 0; k < P; k++)
        neg[l][k] = rep_seq_bit(eta_l[l], j, r, (32'(c) * P + k) & (bsz - 1));
    end
  end

  for (genvar l = 0; l < SMAX; l++) begin : g_tree
    sr_adder_tree #(.P(P), .QW(QW), .LOG_P(LOG_P), .SW(SW)) u_tree (
      .alpha  (lin),
      .neg    (neg[l]),
      .n_valid(16'(nval)),
      .lvl    (5'(lvl)),
      .seg_sum(t_seg[l]),
      .root_sum(t_root[l]),
      .abs_sum(t_abs[l])
    );
  end

  logic [MW-1:0]       metric_nxt [SMAX];
  logic [LOG_SMAX-1:0] best;
  logic                blk_end;

  always_comb begin
    blk_end = (((32'(c) + 1) * P) & (bsz - 1)) == 0;
    for (int unsigned l = 0; l < SMAX; l++) begin
      logic signed [MW-1:0] tot;
      tot = acc[l] + MW'(t_root[l]);
      metric_nxt[l] = metric[l];
      if (lvl <= LOG_P) metric_nxt[l] = metric[l] + MW'(t_abs[l]);
      else if (blk_end) metric_nxt[l] = metric[l] + (tot < 0 ? MW'(-tot) : MW'(tot));
    end
  end

  path_select #(.S(SMAX), .MW(MW)) u_sel (
    .metric     (metric_nxt),
    .n_paths    ((LOG_SMAX+1)'(npaths)),
    .best       (best),
    .best_metric()
  );

  function automatic logic signed [QW-1:0] sat(input logic signed [MW-1:0] x);
    if (x > MW'(SMAXV))  return QW'(SMAXV);
    if (x < -MW'(SMAXV)) return QW'(-SMAXV);
    return x[QW-1:0];
  endfunction

  // ---------------------------------------------------------------- Wagner CS tree
  logic             w_par [P];
  logic [QW-1:0]    w_min [P];
  logic [LOG_P-1:0] w_idx [P];
  logic             w_rpar;
  logic [QW-1:0]    w_rmin;
  logic [LOG_P-1:0] w_ridx;

  cs_tree #(.P(P), .QW(QW), .LOG_P(LOG_P)) u_cs (
    .alpha   (lin),
    .n_valid (16'(nval)),
    .lvl     (5'(lvl)),
    .seg_par (w_par),
    .seg_min (w_min),
    .seg_idx (w_idx),
    .root_par(w_rpar),
    .root_min(w_rmin),
    .root_idx(w_ridx)
  );

  // ---------------------------------------------------------------- sequencer and datapath writes
  assign busy      = (state == S_EXEC);
  assign beta_root = bmem[0][2*N-1 -: N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pc <= '0; c <= '0; pass <= 1'b0; ta_ok <= 1'b1; ta_attempt <= 1'b0;
      done <= 1'b0; hd_used <= 1'b0; cycles <= '0; zreg <= 1'b0; zsum <= '0;
      rpar <= 1'b0; rmin <= '1; ridx <= '0;
      cnt_ta_taken <= '0; cnt_ta_tested <= '0; cnt_sr_multi <= '0; cnt_egpc_rep <= '0;
      cnt_flips <= '0;
      for (int unsigned l = 0; l < SMAX; l++) begin metric[l] <= '0; acc[l] <= '0; end
    end else begin
      done <= 1'b0;
      if (llr_we)
        for (int unsigned k = 0; k < P; k++) amem[N + llr_chunk * P + k] <= llr_data[k];

      case (state)
        S_IDLE, S_DONE: if (start) begin
          state <= S_EXEC; pc <= '0; c <= '0; pass <= 1'b0; ta_ok <= 1'b1;
          ta_attempt <= ta_enable; hd_used <= 1'b0; cycles <= '0;
          cnt_ta_taken <= '0; cnt_ta_tested <= '0; cnt_sr_multi <= '0; cnt_egpc_rep <= '0;
          cnt_flips <= '0; zsum <= '0;
          for (int unsigned l = 0; l < SMAX; l++) begin metric[l] <= '0; acc[l] <= '0; end
        end

        S_EXEC: begin
          logic next_instr;
          next_instr = 1'b0;
          cycles <= cycles + 1;
          c <= c + 1;
          unique case (ir.op)
            // ------------------------------------------------ f with optional TA test
            OP_F: begin
              for (int unsigned k = 0; k < P; k++) begin
                if (k < nval) begin
                  amem[base_c + c * P + k] <= pe_y[k];
                  if (ir.ta_en && ta_attempt) begin
                    bmem[ir.side][base_j + 2*(c * P + k)]     <= pe_ha[k];
                    bmem[ir.side][base_j + 2*(c * P + k) + 1] <= pe_hb[k];
                  end
                end
              end
              ta_ok <= ta_ok & pe_pass;
              if (last) begin
                next_instr = 1'b1;
                ta_ok <= 1'b1;
                if (ir.ta_en && ta_attempt) begin
                  cnt_ta_tested <= cnt_ta_tested + 1;
                  if (ta_ok && pe_pass) begin
                    hd_used      <= 1'b1;
                    cnt_ta_taken <= cnt_ta_taken + 1;
                  end
                end
              end
            end
            // ------------------------------------------------ g
            OP_G: begin
              for (int unsigned k = 0; k < P; k++)
                if (k < nval) amem[base_c + c * P + k] <= pe_y[k];
              if (last) next_instr = 1'b1;
            end
            // ------------------------------------------------ combine children
            OP_C: begin
              for (int unsigned k = 0; k < P; k++) begin
                if (k < nval) begin
                  bmem[ir.side][base_j + 2*(c * P + k)] <=
                    bmem[0][base_c + c * P + k] ^ bmem[1][base_c + c * P + k];
                  bmem[ir.side][base_j + 2*(c * P + k) + 1] <= bmem[1][base_c + c * P + k];
                end
              end
              if (last) next_instr = 1'b1;
            end
            // ------------------------------------------------ Rate-0 / Rate-1
            OP_R0, OP_R1: begin
              for (int unsigned k = 0; k < P; k++)
                if (k < nval)
                  bmem[ir.side][base_j + c * P + k] <= (ir.op == OP_R1) ? lin[k][QW-1] : 1'b0;
              if (last) next_instr = 1'b1;
            end
            // ------------------------------------------------ EG-PC (Wagner)
            OP_EGPC: begin
              if (!pass) begin
                logic signed [MW-1:0] zs;
                zs = zsum;
                for (int unsigned k = 0; k < P; k++)
                  if (k < nval) bmem[ir.side][base_j + c * P + k] <= lin[k][QW-1];
                if (lvl <= LOG_P) begin
                  for (int unsigned t = 0; t < P; t++) begin
                    int unsigned b;
                    b = ((c * P) >> lvl) + t;
                    if (t < (P >> lvl) && b < (1 << r)) begin
                      blk_par[b] <= w_par[t];
                      blk_idx[b] <= LOG_N'(c * P + w_idx[t]);
                      zs = w_par[t] ? zs - MW'(w_min[t]) : zs + MW'(w_min[t]);
                    end
                  end
                end else begin
                  logic          np;
                  logic [QW-1:0] nm;
                  logic [LOG_N-1:0] ni;
                  np = rpar ^ w_rpar;
                  if (w_rmin < rmin) begin nm = w_rmin; ni = LOG_N'(c * P + w_ridx); end
                  else begin nm = rmin; ni = ridx; end
                  if (blk_end) begin
                    blk_par[(c * P) >> lvl] <= np;
                    blk_idx[(c * P) >> lvl] <= ni;
                    zs = np ? zs - MW'(nm) : zs + MW'(nm);
                    rpar <= 1'b0; rmin <= '1; ridx <= '0;
                  end else begin
                    rpar <= np; rmin <= nm; ridx <= ni;
                  end
                end
                zsum <= zs;
                if (last) begin
                  pass <= 1'b1;
                  c    <= '0;
                  zreg <= ir.rep_left ? zs[MW-1] : 1'b0;
                  if (ir.rep_left) cnt_egpc_rep <= cnt_egpc_rep + 1;
                end
              end else begin
                logic [15:0] nf;
                nf = cnt_flips;
                for (int unsigned t = 0; t < P; t++) begin
                  logic [LOG_N-2:0] b;
                  b = (LOG_N-1)'(32'(c) * P + t);
                  if (t < nval && blk_par[b] != zreg) begin
                    bmem[ir.side][base_j + 32'(blk_idx[b])] <= ~bmem[ir.side][base_j + 32'(blk_idx[b])];
                    nf = nf + 1;
                  end
                end
                cnt_flips <= nf;
                if (last) begin
                  next_instr = 1'b1;
                  zsum <= '0;
                end
              end
            end
            // ------------------------------------------------ SR node soft messages
            OP_SRS: begin
              if (!pass && npaths > 1) begin
                for (int unsigned l = 0; l < SMAX; l++) begin
                  metric[l] <= metric_nxt[l];
                  if (lvl > LOG_P) acc[l] <= blk_end ? '0 : acc[l] + MW'(t_root[l]);
                end
                if (last) begin
                  eta_sel[j] <= eta_of_path(ir.eta_free, 32'(best));
                  pass <= 1'b1;
                  c    <= '0;
                  cnt_sr_multi <= cnt_sr_multi + 1;
                end
              end else begin
                if (!pass) eta_sel[j] <= '0;   // |S| = 1: every eta is 0
                if (lvl <= LOG_P) begin
                  for (int unsigned t = 0; t < P; t++) begin
                    int unsigned k;
                    k = ((c * P) >> lvl) + t;
                    if (t < (P >> lvl) && k < (1 << r))
                      amem[base_r + k] <= sat(MW'(t_seg[0][t]));
                  end
                end else begin
                  acc[0] <= blk_end ? '0 : acc[0] + MW'(t_root[0]);
                  if (blk_end) amem[base_r + ((c * P) >> lvl)] <= sat(acc[0] + MW'(t_root[0]));
                end
                if (last) next_instr = 1'b1;
              end
            end
            // ------------------------------------------------ SR node output
            OP_SRX: begin
              for (int unsigned k = 0; k < P; k++) begin
                int unsigned o;
                o = 32'(c) * P + k;
                if (k < nval)
                  bmem[ir.side][base_j + o] <= bmem[1][base_r + (o >> lvl)] ^
                                               rep_seq_bit(eta_sel[j], j, r, o & (bsz - 1));
              end
              if (last) next_instr = 1'b1;
            end
            default: begin   // OP_END
              state <= S_DONE;
              done  <= 1'b1;
            end
          endcase

          if (next_instr) begin
            c    <= '0;
            pass <= 1'b0;
            for (int unsigned l = 0; l < SMAX; l++) begin metric[l] <= '0; acc[l] <= '0; end
            if (ir.op == OP_F && ir.ta_en && ta_attempt && ta_ok && pe_pass) pc <= ir.skip;
            else pc <= pc + 1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
