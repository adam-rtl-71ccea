// adam_adaptive_adder: fault-detecting, fault-mitigating mantissa adder.
//
// Adds the two 5-bit truncated mantissas a and b with a carry-lookahead adder
// built from n-1 = 7 partial full adders (PFAs) s0..s6, two more than the
// five a plain adder would need. The spare PFAs recompute high-order sum bits
// and each duplicated pair is ANDed: if the two copies disagree the bit is
// forced to 0 (a fault that sets one copy to 1 is removed; one that clears a
// copy leaves the 0 it produced).
//
//   PFA   inputs                           result bits
//   s6    a4 b4 c4                         r4 = s6 & s0
//   s5    a3 b3 c3                         r3 = s5 & s1
//   s4    a2 b2 c2                         r2 = PROT_TOP3 ? s4 & s2 : s4
//   s3    a1 b1 c1                         r1 = s3
//   s2    PROT_TOP3 ? (a2 b2 c2):(a0 b0 c0) r0 = PROT_TOP3 ? 0 : s2
//   s1    a3 b3 c3   (copy of s5)
//   s0    a4 b4 c4   (copy of s6)
//
// In PROT_TOP2 (larger LOD >= 5) all five bits are added and the two MSBs are
// protected. In PROT_TOP3 (larger LOD <= 4) bit 0 of both mantissas is a
// padded zero, so PFA s2 is moved to recompute bit 2 and r0 is tied to 0.
// The PFA wiring, the AND gates and the two multiplexers follow the paper's
// adder schematic; the select polarity, the shared (not duplicated) lookahead
// carries c1..c5, the carry output and the fault-injection masks are this
// design's choices.
//
// Interface: a, b (5 bits, MSB = bit 4), mode; fi_mask (7 bits, bit i flips
// PFA output s_i; tie to 0 in use). An assertion checks that the 3-MSB
// mode only comes with zero mantissa LSBs. Out: r (5 bits), cout (carry of the
// 5-bit sum, taken from the lookahead unit). Combinational.
module adam_adaptive_adder
  import adam_pkg::*;
#(
  parameter int unsigned T = adam_pkg::T_BITS
) (
  input  logic [T-1:0]        a,
  input  logic [T-1:0]        b,
  input  prot_mode_e          mode,
  input  logic [PFA_NUM-1:0]  fi_mask,
  output logic [T-1:0]        r,
  output logic                cout
);

  // The schematic is drawn for t = 5 and 7 PFAs.
  if (T != 5 || PFA_NUM != 7) begin : g_size_check
    $error("adam_adaptive_adder is drawn for T = 5 and 7 PFAs");
  end

  logic [T:0]         c;       // lookahead carries c0..c5
  logic [PFA_NUM-1:0] s_raw;   // PFA outputs before fault injection
  logic [PFA_NUM-1:0] s;       // PFA outputs as seen by the rest of the adder
  logic               a2m, b2m, c2m;

  adam_cla_carry #(.W(T)) u_cla (.a(a), .b(b), .c(c));

  // Multiplexers in front of PFA s2.
  assign a2m = (mode == PROT_TOP3) ? a[2] : a[0];
  assign b2m = (mode == PROT_TOP3) ? b[2] : b[0];
  assign c2m = (mode == PROT_TOP3) ? c[2] : c[0];

  adam_pfa u_pfa6 (.a(a[4]), .b(b[4]), .c(c[4]), .s(s_raw[6]));
  adam_pfa u_pfa5 (.a(a[3]), .b(b[3]), .c(c[3]), .s(s_raw[5]));
  adam_pfa u_pfa4 (.a(a[2]), .b(b[2]), .c(c[2]), .s(s_raw[4]));
  adam_pfa u_pfa3 (.a(a[1]), .b(b[1]), .c(c[1]), .s(s_raw[3]));
  adam_pfa u_pfa2 (.a(a2m),  .b(b2m),  .c(c2m),  .s(s_raw[2]));
  adam_pfa u_pfa1 (.a(a[3]), .b(b[3]), .c(c[3]), .s(s_raw[1]));
  adam_pfa u_pfa0 (.a(a[4]), .b(b[4]), .c(c[4]), .s(s_raw[0]));

  assign s = s_raw ^ fi_mask;

  // Mitigation: AND of the duplicated pairs, then the output multiplexers.
  always_comb begin
    r[4] = s[6] & s[0];
    r[3] = s[5] & s[1];
    r[2] = (mode == PROT_TOP3) ? (s[4] & s[2]) : s[4];
    r[1] = s[3];
    r[0] = (mode == PROT_TOP3) ? 1'b0 : s[2];
  end

  assign cout = c[T];

  // Mode contract: the 3-MSB mode is only chosen when both mantissa LSBs
  // are padded zeros, because r0 is then tied to 0.
  always_comb begin
    if (mode == PROT_TOP3) begin
      assert (a[0] == 1'b0 && b[0] == 1'b0)
        else $error("PROT_TOP3 selected with a non-zero mantissa LSB");
    end
  end

endmodule
