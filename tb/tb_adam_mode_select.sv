// tb_adam_mode_select: all 64 pairs of 3-bit leading-one indices.
// Expected: the 2-MSB protection mode when the larger index is 5 or more
// (the mantissa LSB may be non-zero), the 3-MSB mode otherwise.
module tb_adam_mode_select;
  import adam_pkg::*;
  logic [K_BITS-1:0] ka, kb;
  prot_mode_e        mode;
  int checks = 0, failures = 0;

  adam_mode_select dut (.ka(ka), .kb(kb), .mode(mode));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prot_mode_e exp_mode;
    for (int i = 0; i < 8; i++) begin
      for (int j = 0; j < 8; j++) begin
        ka = K_BITS'(i); kb = K_BITS'(j);
        #1;
        exp_mode = (i >= 5 || j >= 5) ? PROT_TOP2 : PROT_TOP3;
        checks++;
        if (mode != exp_mode) begin
          failures++;
          $display("ka=%0d kb=%0d mode=%s", i, j, mode.name());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
