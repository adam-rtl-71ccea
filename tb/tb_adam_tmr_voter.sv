// tb_adam_tmr_voter: all 4096 combinations of three 4-bit replicas.
// Each output bit must be 1 exactly when at least two replicas have a 1.
module tb_adam_tmr_voter;
  import adam_pkg::*;
  logic [KS_BITS-1:0] x0, x1, x2, y;
  int checks = 0, failures = 0;

  adam_tmr_voter dut (.x0(x0), .x1(x1), .x2(x2), .y(y));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    for (int i = 0; i < (1 << (3 * KS_BITS)); i++) begin
      {x2, x1, x0} = (3 * KS_BITS)'(i);
      #1;
      for (int q = 0; q < KS_BITS; q++) begin
        ones = int'(x0[q]) + int'(x1[q]) + int'(x2[q]);
        checks++;
        if (y[q] != (ones >= 2)) begin
          failures++;
          $display("x=%h %h %h bit %0d y=%0b", x0, x1, x2, q, y[q]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
