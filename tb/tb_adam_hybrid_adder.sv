// tb_adam_hybrid_adder: all 3-bit ka, kb and both carry-in values;
// expected ksum = ka + kb + cin (4 bits, never overflows).
module tb_adam_hybrid_adder;
  import adam_pkg::*;
  logic [K_BITS-1:0] ka, kb;
  logic              cin;
  logic [K_BITS:0]   ksum;
  int checks = 0, failures = 0;

  adam_hybrid_adder dut (.ka(ka), .kb(kb), .cin(cin), .ksum(ksum));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++)
        for (int q = 0; q < 2; q++) begin
          ka = K_BITS'(i); kb = K_BITS'(j); cin = q[0];
          #1;
          checks++;
          if (int'(ksum) != i + j + q) begin
            failures++;
            $display("%0d+%0d+%0d gave %0d", i, j, q, ksum);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
