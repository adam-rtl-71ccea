// tb_adam_adaptive_adder: exhaustive test of the fault-tolerant mantissa adder.
//
// For every pair of 5-bit mantissas, both protection modes and every fault
// pattern that flips at most one PFA output (8 patterns), the result is
// compared with a model built from integer addition:
//   * no fault: r equals the low 5 bits of a + b (in the 3-MSB mode bit 0 of
//     the sum is 0 by construction, and only operands with a0 = b0 = 0, the
//     ones that mode is chosen for, are checked against the full sum);
//     cout equals bit 5 of a + b;
//   * a flipped copy of a protected bit (bits 4, 3 in both modes, bit 2 in
//     the 3-MSB mode) must read 0;
//   * a flipped unprotected bit (bit 1; bit 2 and bit 0 in the 2-MSB mode)
//     must read inverted;
//   * every other bit must be unaffected.
// The numbers of mitigated (zeroed) and passed-through faults are counted and
// must both be non-zero.
module tb_adam_adaptive_adder;
  import adam_pkg::*;
  logic [T_BITS-1:0]  a, b, r;
  prot_mode_e         mode;
  logic [PFA_NUM-1:0] fi_mask;
  logic               cout;
  int checks = 0, failures = 0;
  int mitigated = 0, passed_through = 0;

  adam_adaptive_adder dut (.a(a), .b(b), .mode(mode), .fi_mask(fi_mask), .r(r), .cout(cout));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Sum bit recomputed by each PFA in each mode and the result bit it feeds,
  // taken from the adder schematic: PFA s6..s3 compute bits 4..1, s2 bit 0
  // (2-MSB mode) or bit 2 (3-MSB mode), s1 bit 3, s0 bit 4.
  function automatic int pfa_bit(int pfa, prot_mode_e md);
    case (pfa)
      6: return 4;
      5: return 3;
      4: return 2;
      3: return 1;
      2: return (md == PROT_TOP3) ? 2 : 0;
      1: return 3;
      default: return 4;
    endcase
  endfunction

  function automatic bit is_protected(int bitpos, prot_mode_e md);
    return (bitpos >= 3) || (bitpos == 2 && md == PROT_TOP3);
  endfunction

  initial begin
    int sum, exp_r, fb, fbit;
    for (int md = 0; md < 2; md++) begin
      mode = prot_mode_e'(md);
      for (int i = 0; i < 32; i++) begin
        for (int j = 0; j < 32; j++) begin
          if (mode == PROT_TOP3 && ((i & 1) != 0 || (j & 1) != 0)) continue;
          for (int f = -1; f < int'(PFA_NUM); f++) begin
            a = T_BITS'(i); b = T_BITS'(j);
            fi_mask = (f < 0) ? '0 : PFA_NUM'(1 << f);
            #1;
            sum   = i + j;
            exp_r = sum & 31;
            if (f >= 0) begin
              fb = pfa_bit(f, mode);
              fbit = (sum >> fb) & 1;
              if (is_protected(fb, mode)) begin
                exp_r = exp_r & ~(1 << fb);
                if (fbit == 1) mitigated++;
              end else begin
                exp_r = exp_r ^ (1 << fb);
                passed_through++;
              end
            end
            checks++;
            if (int'(r) != exp_r) begin
              failures++;
              if (failures < 20)
                $display("mode=%s a=%0d b=%0d fault=s%0d r=%b exp=%b",
                         mode.name(), i, j, f, r, exp_r[4:0]);
            end
            checks++;
            if (int'(cout) != ((sum >> 5) & 1)) begin
              failures++;
              $display("a=%0d b=%0d cout=%0b", i, j, cout);
            end
          end
        end
      end
    end
    checks++;
    if (mitigated == 0 || passed_through == 0) failures++;
    $display("faults zeroed by the AND gates: %0d, unprotected faults passed: %0d",
             mitigated, passed_through);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
