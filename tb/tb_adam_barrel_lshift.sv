// tb_adam_barrel_lshift: exhaustive test of mantissa extraction.
// For every non-zero 8-bit x with leading-one index k the expected 5-bit
// mantissa is floor((x - 2^k) * 2^5 / 2^k), i.e. the fractional part of
// Mitchell's log2 estimate truncated to 5 bits. The number of operands whose
// low bits are actually lost (k = 6, 7) is counted and must be non-zero.
module tb_adam_barrel_lshift;
  import adam_pkg::*;
  logic [N_BITS-1:0] x;
  logic [K_BITS-1:0] k;
  logic [T_BITS-1:0] m;
  int checks = 0, failures = 0, truncated = 0;

  adam_barrel_lshift dut (.x(x), .k(k), .m(m));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int kk, v, exp_m, frac;
    for (int i = 1; i < (1 << N_BITS); i++) begin
      kk = 0; v = i;
      while (v > 1) begin v = v / 2; kk++; end
      x = N_BITS'(i);
      k = K_BITS'(kk);
      #1;
      frac  = i - (1 << kk);
      exp_m = (frac << T_BITS) >> kk;
      if (((exp_m << kk) >> T_BITS) != frac) truncated++;
      checks++;
      if (int'(m) != exp_m) begin
        failures++;
        $display("x=%0d k=%0d m=%0d exp=%0d", i, kk, m, exp_m);
      end
    end
    checks++;
    if (truncated == 0) begin failures++; $display("no truncation case seen"); end
    $display("truncated operands: %0d", truncated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
