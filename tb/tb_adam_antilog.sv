// tb_adam_antilog: every exponent 0..15, every 5-bit mantissa, zero flag
// on and off. Expected product floor((32 + frac) * 2^ksum / 32), or 0.
module tb_adam_antilog;
  import adam_pkg::*;
  logic [KS_BITS-1:0]  ksum;
  logic [T_BITS-1:0]   frac;
  logic                zero;
  logic [2*N_BITS-1:0] p;
  int checks = 0, failures = 0;

  adam_antilog dut (.ksum(ksum), .frac(frac), .zero(zero), .p(p));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_p;
    for (int e = 0; e < (1 << KS_BITS); e++)
      for (int f = 0; f < (1 << T_BITS); f++)
        for (int z = 0; z < 2; z++) begin
          ksum = KS_BITS'(e); frac = T_BITS'(f); zero = z[0];
          #1;
          exp_p = (z != 0) ? 0 : ((longint'(32 + f) << e) / 32);
          checks++;
          if (longint'(p) != exp_p) begin
            failures++;
            $display("k=%0d f=%0d z=%0d p=%0d exp=%0d", e, f, z, p, exp_p);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
