// tb_crc_check: frames of random length with a CRC16 appended (computed by long division in
// the testbench) pass; the same frames with one bit flipped fail. Bits are presented P at a
// time with random take masks, so the skipping of frozen positions is exercised.
// Clocked block: clear, then one en cycle per chunk, result read after the last chunk. The
// polynomial is the paper's CRC16; the zero initial value and bit order are this design's.
module tb_crc_check;
  localparam int P = 8, L = 16;
  localparam logic [L-1:0] POLY = 16'h1021;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [P-1:0] bits = '0, take = '0;
  logic [L-1:0] rem;
  logic ok;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  crc_check #(.P(P), .L(L), .POLY(POLY)) dut (.clk, .rst_n, .clear, .en, .bits, .take, .rem, .ok);

  function automatic int unsigned lfsr(input bit m[], int len);
    int unsigned r = 0;
    for (int i = 0; i < len; i++) begin
      bit fb = ((r >> (L - 1)) & 1) ^ m[i];
      r = (r << 1) & 16'hffff;
      if (fb) r ^= 32'(POLY);
    end
    return r;
  endfunction

  bit fm [];

  task automatic feed();
    int pos = 0;
    int len = fm.size();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (pos < len) begin
      @(negedge clk);
      en = 1;
      for (int i = 0; i < P; i++) begin
        take[i] = ($urandom % 3) != 0 && pos < len;
        bits[i] = take[i] ? fm[pos] : bit'($urandom & 1);
        if (take[i]) pos++;
      end
    end
    @(negedge clk); en = 0; take = '0;
    @(negedge clk);
  endtask

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      automatic int len = 20 + $urandom % 200;
      automatic bit m[];
      automatic int unsigned c;
      automatic int pos;
      m = new[len + L];
      for (int i = 0; i < len; i++) m[i] = $urandom & 1;
      c = lfsr(m, len);
      for (int i = 0; i < L; i++) m[len + i] = (c >> (L - 1 - i)) & 1;
      fm = m; feed();
      checks++;
      if (!ok) begin failures++; $display("good frame rejected, rem=%h", rem); end
      pos = $urandom % (len + L);
      m[pos] = !m[pos];
      fm = m; feed();
      checks++;
      if (ok) begin failures++; $display("corrupted frame accepted"); end
      checks++;
      if (32'(rem) != lfsr(m, len + L)) begin failures++; $display("remainder mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
