// srfsc_decoder: multi-stage SRFSC polar decoder (top level).
//
// A frame is decoded in at most two attempts (paper Sec. IV-B). The first is TA-SRFSC: the
// SRFSC schedule with the threshold-based hard decisions enabled. The codeword estimate is
// turned into u_hat, and the CRC over the information bits (positions with info_mask = 1,
// message then CRC) is checked. When the CRC fails and a hard decision was taken in the first
// attempt, the frame is decoded again from the first bit with plain SRFSC (TA off), and the CRC
// is checked again; its result is crc_ok. With multi_stage = 0 only one SRFSC attempt is made
// (TA off) and the CRC is still reported.
//
// Interface: load the schedule (prog_*) once per code and threshold set, the channel LLRs
// (llr_*) per frame, hold info_mask, and pulse start. done pulses with u_hat, crc_ok,
// attempts (1 or 2) and cycles (all cycles from start to done, CRC passes included) valid
// until the next start. The CRC check reads P bits per cycle, N/P cycles per attempt.
// The second attempt reuses the stored channel LLRs, as the paper's decoder restarts from the
// first bit "to avoid storing intermediate LLRs".
//
// The core's busy flag, cycle count and event counters, and the CRC remainder, are left
// unconnected: the top counts its own cycles, and the counters are for observation only
// (the testbenches read them through the hierarchy). rst_n is both the asynchronous reset of
// the flops and the disable condition of the a_retry assertion; lint reports it as used
// both ways, which is intended.
module srfsc_decoder
  import srfsc_pkg::*;
#(
  parameter int unsigned LOG_N = LOG_N_DEF,
  parameter int unsigned LOG_P = LOG_P_DEF,
  parameter int unsigned QW    = QW_DEF,
  parameter int unsigned CRC_L = 16,
  parameter logic [CRC_L-1:0] CRC_POLY = CRC_L'(16'h1021),
  localparam int unsigned N = 1 << LOG_N,
  localparam int unsigned P = 1 << LOG_P
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 prog_we,
  input  logic [PCW-1:0]       prog_addr,
  input  instr_t               prog_data,
  input  logic                 llr_we,
  input  logic [15:0]          llr_chunk,
  input  logic signed [QW-1:0] llr_data [P],
  input  logic [N-1:0]         info_mask,
  input  logic                 multi_stage,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic [N-1:0]         u_hat,
  output logic                 crc_ok,
  output logic [1:0]           attempts,
  output logic                 hd_used_first,
  output logic [31:0]          cycles
);
  typedef enum logic [2:0] {T_IDLE, T_RUN, T_CRC, T_CHECK, T_DONE} tstate_e;
  tstate_e     st;
  logic        core_start, core_ta, core_done, core_hd;
  logic [N-1:0] beta_root, u_dec;
  logic [15:0] k;
  logic        crc_clear, crc_en, crc_pass;

  srfsc_core #(.LOG_N(LOG_N), .LOG_P(LOG_P), .QW(QW)) u_core (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_data, .llr_we, .llr_chunk, .llr_data,
    .start(core_start), .ta_enable(core_ta), .busy(), .done(core_done),
    .hd_used(core_hd), .beta_root, .cycles(),
    .cnt_ta_taken(), .cnt_ta_tested(), .cnt_sr_multi(), .cnt_egpc_rep(), .cnt_flips()
  );

  polar_unpack #(.LOG_N(LOG_N)) u_unpack (.beta_root(beta_root), .u_hat(u_dec));

  crc_check #(.P(P), .L(CRC_L), .POLY(CRC_POLY)) u_crc (
    .clk, .rst_n, .clear(crc_clear), .en(crc_en),
    .bits(u_dec[k*P +: P]), .take(info_mask[k*P +: P]), .rem(), .ok(crc_pass)
  );

  assign busy      = (st != T_IDLE) && (st != T_DONE);
  assign crc_clear = core_done;
  assign crc_en    = (st == T_CRC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; core_start <= 1'b0; core_ta <= 1'b0; done <= 1'b0; k <= '0;
      u_hat <= '0; crc_ok <= 1'b0; attempts <= '0; hd_used_first <= 1'b0; cycles <= '0;
    end else begin
      core_start <= 1'b0;
      done       <= 1'b0;
      if (busy) cycles <= cycles + 1;
      case (st)
        T_IDLE, T_DONE: if (start) begin
          st <= T_RUN; core_start <= 1'b1; core_ta <= multi_stage;
          attempts <= 2'd1; cycles <= '0; hd_used_first <= 1'b0;
        end
        T_RUN: if (core_done) begin
          st <= T_CRC; k <= '0;
          if (attempts == 2'd1) hd_used_first <= core_hd;
        end
        T_CRC: begin
          k <= k + 1;
          if (32'(k) == N / P - 1) st <= T_CHECK;
        end
        T_CHECK: begin
          if (!crc_pass && attempts == 2'd1 && core_ta && hd_used_first) begin
            st <= T_RUN; core_start <= 1'b1; core_ta <= 1'b0; attempts <= 2'd2;
          end else begin
            st <= T_DONE; done <= 1'b1; u_hat <= u_dec; crc_ok <= crc_pass;
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  // a second attempt only follows a TA attempt that used a hard decision and failed the CRC
  property p_retry_reason;
    @(posedge clk) disable iff (!rst_n)
      (st == T_CHECK && !(crc_pass || attempts != 2'd1 || !core_ta || !hd_used_first))
        |=> (st == T_RUN && attempts == 2'd2 && !core_ta);
  endproperty
  a_retry: assert property (p_retry_reason);
endmodule
