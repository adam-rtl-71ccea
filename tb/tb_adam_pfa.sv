// tb_adam_pfa: truth table of the partial full adder's sum output,
// expected value (a + b + c) mod 2.
module tb_adam_pfa;
  logic a, b, c, s;
  int checks = 0, failures = 0;

  adam_pfa dut (.a(a), .b(b), .c(c), .s(s));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      {a, b, c} = 3'(i);
      #1;
      checks++;
      if (int'(s) != (int'(a) + int'(b) + int'(c)) % 2) begin
        failures++;
        $display("abc=%03b s=%0b", i[2:0], s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
