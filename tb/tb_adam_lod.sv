// tb_adam_lod: exhaustive self-checking test of the leading-one detector.
// Every 8-bit value is applied; the expected index is found by repeated
// halving, the zero flag by comparing with 0.
module tb_adam_lod;
  import adam_pkg::*;
  logic [N_BITS-1:0] x;
  logic [K_BITS-1:0] k;
  logic              zero;
  int checks = 0, failures = 0;

  adam_lod dut (.x(x), .k(k), .zero(zero));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_k, v;
    for (int i = 0; i < (1 << N_BITS); i++) begin
      x = N_BITS'(i);
      #1;
      exp_k = 0; v = i;
      while (v > 1) begin v = v / 2; exp_k++; end
      checks++;
      if (zero !== (i == 0)) begin failures++; $display("x=%0d zero=%0b", i, zero); end
      if (i != 0) begin
        checks++;
        if (int'(k) != exp_k) begin failures++; $display("x=%0d k=%0d exp=%0d", i, k, exp_k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
