// srfsc_pkg: types, sizes and arithmetic shared by the SR-node fast successive-cancellation
// (SRFSC) polar decoder.
//
// The decoder executes a schedule: a list of instructions, one per tree operation, that an
// off-line tool derives from the frozen-bit pattern (the paper notes that SR node locations and
// thresholds are fixed for a given code and can be found off-line). The instruction set, its
// field widths and the fixed-point format are this design's own choices:
//   * LLRs are QW-bit two's complement numbers, saturated to +-(2^(QW-1)-1).
//   * Hard decision h(x) = 1 when x < 0, as for the paper's Rate-1 nodes.
//   * f is the min-sum approximation, g(x,y,u) = (-1)^u x + y, as in the paper.
package srfsc_pkg;

  // Default sizes. N = 1024 and P = 64 are the paper's hardware configuration; QW is assumed.
  localparam int unsigned LOG_N_DEF = 10;
  localparam int unsigned LOG_P_DEF = 6;
  localparam int unsigned QW_DEF    = 8;
  localparam int unsigned LOG_SMAX  = 4;      // |S| up to 16 (Table 4 of the paper)
  localparam int unsigned SMAX      = 1 << LOG_SMAX;
  localparam int unsigned LVLW      = 4;      // width of a tree-level field (levels 0..15)
  localparam int unsigned PCW       = 11;     // schedule address width (2048 instructions)

  typedef enum logic [3:0] {
    OP_F    = 4'd0,   // f on node at level j -> left child LLRs; optional TA test on node j
    OP_G    = 4'd1,   // g on node at level j -> right child LLRs (uses left child's betas)
    OP_C    = 4'd2,   // combine children betas of level j into beta[j][side]
    OP_R0   = 4'd3,   // Rate-0 node at level j: beta = 0
    OP_R1   = 4'd4,   // Rate-1 node at level j: beta = h(alpha)
    OP_EGPC = 4'd5,   // EG-PC node at level j, leftmost node at level q (Rate-0 or REP)
    OP_SRS  = 4'd6,   // SR node step 1 + 3: source LLRs at level r for the chosen sequence
    OP_SRX  = 4'd7,   // SR node output: beta[j][side] = beta_src xor s_l
    OP_END  = 4'd15   // end of schedule
  } op_e;

  // One schedule entry. For OP_SRS/OP_SRX, eta_free[k] = 1 when eta_k is free (v[k+1] = 1).
  typedef struct packed {
    op_e             op;
    logic [LVLW-1:0] j;         // level of the node the instruction works on
    logic [LVLW-1:0] r;         // SR: source level; EG-PC: level q of leftmost node
    logic            rep_left;  // EG-PC: leftmost node is REP (odd/even parity z estimated)
    logic            side;      // destination beta buffer: 0 = left child slot, 1 = right
    logic            ta_en;     // OP_F: node may take a TA hard decision
    logic [15:0]     eta_free;  // SR: free eta positions, indexed by absolute level
    logic [7:0]      thr;       // OP_F: TA threshold T in LLR units (unsigned)
    logic [PCW-1:0]  skip;      // OP_F: where to continue when the TA hard decision is taken
  } instr_t;

  function automatic int unsigned clog2i(input int unsigned x);
    int unsigned r = 0;
    while ((1 << r) < x) r++;
    return r;
  endfunction

  // Repetition-sequence bit s[p] for a block of 2^(j-r) positions (as defined in the paper):
  // s = (eta_r,0) [+] (eta_r+1,0) [+] ... [+] (eta_j-1,0), where [+] is the Kronecker sum in
  // GF(2). The most significant bit of p pairs with eta_r, the least significant with eta_j-1.
  function automatic logic rep_seq_bit(input logic [15:0] eta, input int unsigned j,
                                       input int unsigned r, input int unsigned p);
    logic s = 1'b0;
    for (int unsigned t = 0; t < 16; t++) begin
      if (t < j - r) begin
        if (eta[r+t] && !p[j-r-1-t]) s ^= 1'b1;
      end
    end
    return s;
  endfunction

  // Map a path index l to the eta vector: the i-th free eta (counted from low levels up) takes
  // bit i of l; the eta values at non-free positions are 0 (Rate-0 left siblings).
  function automatic logic [15:0] eta_of_path(input logic [15:0] eta_free,
                                              input int unsigned l);
    logic [15:0] e = '0;
    int unsigned i = 0;
    for (int unsigned k = 0; k < 16; k++) begin
      if (eta_free[k]) begin
        if (i < 32) e[k] = l[i];
        i++;
      end
    end
    return e;
  endfunction

endpackage
