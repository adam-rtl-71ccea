// tb_adam_mult: end-to-end test of the AdAM multiplier at its default size
// (8-bit operands, 5-bit mantissas), no parameter overrides.
//
// The reference model is written from Mitchell's method directly: the
// characteristic k is found by halving, the 5-bit mantissa is
// floor((x - 2^k) * 32 / 2^k), the mantissas are added as integers, a carry
// out of the 5-bit sum adds one to the exponent, and the product is
// floor((32 + frac) * 2^exp / 32), or 0 for a zero operand.
//
// Phase 1: all 65536 operand pairs without faults.
// Phase 2: random operand pairs with one flipped PFA output in the adaptive
//          adder. A flipped copy of a protected sum bit must give 0 in that
//          bit; a flipped unprotected bit passes through inverted.
// Phase 3: random operand pairs with one characteristic-adder replica
//          corrupted by a random non-zero mask; the voter must hide it.
// Each mechanism of the design is counted and must occur at least once:
// both protection modes, mantissa truncation, mantissa carry into the
// exponent, zero operand, fault zeroed by the AND gates, unprotected fault
// passing through, and a replica outvoted by the majority voter.
module tb_adam_mult;
  import adam_pkg::*;

  logic [N_BITS-1:0]   a, b;
  adam_fault_t         fi;
  logic [2*N_BITS-1:0] p;
  int checks = 0, failures = 0;
  int n_top2 = 0, n_top3 = 0, n_trunc = 0, n_carry = 0, n_zero = 0;
  int n_mitigated = 0, n_passed = 0, n_outvoted = 0;

  adam_mult dut (.a(a), .b(b), .fi(fi), .p(p));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lod_ref(int x);
    int k = 0;
    while (x > 1) begin x = x / 2; k++; end
    return k;
  endfunction

  function automatic int mant_ref(int x);
    int k = lod_ref(x);
    return ((x - (1 << k)) << T_BITS) >> k;
  endfunction

  // Sum bit handled by PFA s_f in the given mode (adder schematic), and
  // whether that bit is duplicated.
  function automatic int pfa_bit(int f, bit top3);
    case (f)
      6: return 4;
      5: return 3;
      4: return 2;
      3: return 1;
      2: return top3 ? 2 : 0;
      1: return 3;
      default: return 4;
    endcase
  endfunction

  // Expected product; fpfa = index of the flipped PFA output, -1 for none.
  // Also reports which mechanisms the operation exercised.
  function automatic longint ref_mult(int x, int y, int fpfa,
                                      output bit top3, output bit trunc,
                                      output bit carry, output int fault_kind);
    int kx, ky, mx, my, s, r, e, fb;
    fault_kind = 0;    // 0 none, 1 zeroed a one, 2 zeroed a zero, 3 passed
    top3 = 0; trunc = 0; carry = 0;
    if (x == 0 || y == 0) return 0;
    kx = lod_ref(x); ky = lod_ref(y);
    mx = mant_ref(x); my = mant_ref(y);
    trunc = (((mx << kx) >> T_BITS) != x - (1 << kx)) ||
            (((my << ky) >> T_BITS) != y - (1 << ky));
    top3 = (kx < int'(T_BITS)) && (ky < int'(T_BITS));
    s = mx + my;
    carry = (s >> T_BITS) != 0;
    r = s & ((1 << T_BITS) - 1);
    if (fpfa >= 0) begin
      fb = pfa_bit(fpfa, top3);
      if (fb >= 3 || (fb == 2 && top3)) begin
        fault_kind = ((r >> fb) & 1) ? 1 : 2;
        r = r & ~(1 << fb);
      end else begin
        fault_kind = 3;
        r = r ^ (1 << fb);
      end
    end
    e = kx + ky + (carry ? 1 : 0);
    return (longint'((1 << T_BITS) + r) << e) >> T_BITS;
  endfunction

  task automatic check(int x, int y, longint exp_p, string what);
    checks++;
    if (longint'(p) != exp_p) begin
      failures++;
      if (failures < 20) $display("%s: %0d*%0d p=%0d exp=%0d", what, x, y, p, exp_p);
    end
  endtask

  initial begin
    bit top3, trunc, carry;
    int fk, x, y, f, rep;
    longint exp_p;

    // Phase 1: exhaustive, fault free.
    fi = '0;
    for (int n = 0; n < (1 << (2 * N_BITS)); n++) begin
      x = n >> N_BITS;
      y = n & ((1 << N_BITS) - 1);
      a = N_BITS'(x); b = N_BITS'(y);
      #1;
      exp_p = ref_mult(x, y, -1, top3, trunc, carry, fk);
      check(x, y, exp_p, "fault-free");
      if (x == 0 || y == 0) n_zero++;
      else begin
        if (top3) n_top3++; else n_top2++;
        if (trunc) n_trunc++;
        if (carry) n_carry++;
      end
    end

    // Phase 2: one flipped PFA output.
    for (int n = 0; n < 20000; n++) begin
      x = int'($urandom_range(255, 1)); y = int'($urandom_range(255, 1));
      f = int'($urandom_range(PFA_NUM - 1, 0));
      a = N_BITS'(x); b = N_BITS'(y);
      fi = '0;
      fi.sum = PFA_NUM'(1 << f);
      #1;
      exp_p = ref_mult(x, y, f, top3, trunc, carry, fk);
      check(x, y, exp_p, "PFA fault");
      if (fk == 1) n_mitigated++;
      if (fk == 3) n_passed++;
    end

    // Phase 3: one corrupted characteristic-adder replica.
    for (int n = 0; n < 20000; n++) begin
      x = int'($urandom_range(255, 1)); y = int'($urandom_range(255, 1));
      rep = int'($urandom_range(2, 0));
      a = N_BITS'(x); b = N_BITS'(y);
      fi = '0;
      fi.ksum[rep] = KS_BITS'($urandom_range((1 << KS_BITS) - 1, 1));
      #1;
      exp_p = ref_mult(x, y, -1, top3, trunc, carry, fk);
      check(x, y, exp_p, "replica fault");
      n_outvoted++;
    end
    fi = '0;

    $display("protection mode 2 MSBs: %0d, 3 MSBs: %0d", n_top2, n_top3);
    $display("truncated mantissas: %0d, mantissa carries: %0d, zero operands: %0d",
             n_trunc, n_carry, n_zero);
    $display("faults zeroed: %0d, unprotected faults passed: %0d, replicas outvoted: %0d",
             n_mitigated, n_passed, n_outvoted);
    begin
      int counts[8];
      counts = '{n_top2, n_top3, n_trunc, n_carry, n_zero,
                 n_mitigated, n_passed, n_outvoted};
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (counts[i] == 0) begin
          failures++;
          $display("mechanism %0d never happened", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
