// crc_check: CRC verification of the decoded information bits, used by the multi-stage decoder
// to decide whether a decoding attempt failed (paper Sec. IV-B).
//
// The generator polynomial is a parameter; the default is the paper's choice for N = 1024,
// CRC16 = D^16 + D^12 + D^5 + 1 (POLY holds the coefficients below D^L). CRC6 = D^6 + D^5 + 1
// is L=6, POLY=6'h21; CRC11 = D^11 + D^10 + D^9 + D^5 + 1 is L=11, POLY=11'h621.
// The information bits, message first and the L CRC bits last, are shifted through a
// Galois-form LFSR that starts at zero; the frame passes when the remainder is zero.
// Each cycle with en = 1 takes up to P bits, in lane order: lane i is used when take[i] = 1,
// so the caller can present the decoded u vector P positions at a time together with the
// information-bit flags d. clear restarts the remainder. ok is combinational on the register.
module crc_check #(
  parameter int unsigned P    = 64,
  parameter int unsigned L    = 16,
  parameter logic [L-1:0] POLY = L'(16'h1021)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  input  logic [P-1:0] bits,
  input  logic [P-1:0] take,
  output logic [L-1:0] rem,
  output logic         ok
);
  logic [L-1:0] nxt;

  always_comb begin
    nxt = rem;
    for (int unsigned i = 0; i < P; i++) begin
      if (take[i])
        nxt = {nxt[L-2:0], 1'b0} ^ ((nxt[L-1] ^ bits[i]) ? POLY : '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rem <= '0;
    else if (clear) rem <= '0;
    else if (en)    rem <= nxt;
  end

  assign ok = (rem == '0);
endmodule
