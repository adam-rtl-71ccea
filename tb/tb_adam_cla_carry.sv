// tb_adam_cla_carry: exhaustive test of the 5-bit lookahead carries.
// Carry c_i must equal bit i of the sum of the low i bits of a and b.
module tb_adam_cla_carry;
  import adam_pkg::*;
  logic [T_BITS-1:0] a, b;
  logic [T_BITS:0]   c;
  int checks = 0, failures = 0;

  adam_cla_carry dut (.a(a), .b(b), .c(c));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lo, exp_c;
    for (int i = 0; i < (1 << T_BITS); i++) begin
      for (int j = 0; j < (1 << T_BITS); j++) begin
        a = T_BITS'(i); b = T_BITS'(j);
        #1;
        for (int q = 0; q <= T_BITS; q++) begin
          lo    = (i % (1 << q)) + (j % (1 << q));
          exp_c = (lo >> q) & 1;
          checks++;
          if (int'(c[q]) != exp_c) begin
            failures++;
            $display("a=%0d b=%0d c%0d=%0b", i, j, q, c[q]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
