// tb_pe_array: random LLR pairs through the P processing elements, f and g modes, with the
// TA comparison; results are compared with integer reference formulas.
// The block is combinational; inputs are applied and checked 1 time unit later. The f and g
// formulas and the strict threshold test follow the paper; saturation at +/-127 is this design's.
module tb_pe_array;
  localparam int P = 8, QW = 8;
  logic                 mode_g;
  logic signed [QW-1:0] a [P], b [P], y [P];
  logic                 u [P], ha [P], hb [P];
  logic [15:0]          n_valid;
  logic [QW-1:0]        thr;
  logic                 pass;
  int checks = 0, failures = 0;

  pe_array #(.P(P), .QW(QW)) dut (.mode_g, .a, .b, .u, .n_valid, .thr, .y,
                                  .hard_a(ha), .hard_b(hb), .ta_pass(pass));

  function automatic int rnd();
    return int'($urandom % 255) - 127;
  endfunction
  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      automatic int ea, eb, exp_y; automatic bit exp_pass;
      mode_g = it[0];
      n_valid = 16'(1 + ($urandom % P));
      thr = QW'($urandom % ((it % 3 == 0) ? 8 : 128));
      for (int k = 0; k < P; k++) begin
        a[k] = QW'(rnd()); b[k] = QW'(rnd()); u[k] = $urandom & 1;
        if (it % 5 == 0) begin a[k] = QW'(100 + k); b[k] = QW'(-90 - k); end
      end
      #1;
      exp_pass = 1;
      for (int k = 0; k < P; k++) begin
        ea = a[k]; eb = b[k];
        if (!mode_g) begin
          automatic int m = iabs(ea) < iabs(eb) ? iabs(ea) : iabs(eb);
          exp_y = ((ea < 0) != (eb < 0)) ? -m : m;
        end else begin
          exp_y = u[k] ? eb - ea : eb + ea;
          if (exp_y > 127) exp_y = 127;
          if (exp_y < -127) exp_y = -127;
        end
        checks++;
        if (int'(y[k]) != exp_y || ha[k] != (ea < 0) || hb[k] != (eb < 0)) begin
          failures++;
          $display("lane %0d mode %0d a=%0d b=%0d u=%0d y=%0d exp %0d", k, mode_g, ea, eb, u[k], y[k], exp_y);
        end
        if (k < n_valid && !(iabs(ea) > int'(thr) && iabs(eb) > int'(thr))) exp_pass = 0;
      end
      checks++;
      if (pass != exp_pass) begin failures++; $display("ta_pass %0d exp %0d", pass, exp_pass); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
