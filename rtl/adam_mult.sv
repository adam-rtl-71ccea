// adam_mult: AdAM adaptive fault-tolerant approximate multiplier (top).
//
// Computes p ~= a * b for unsigned n-bit operands with Mitchell's logarithmic
// method, hardened against single transient faults:
//   1. Two leading-one detectors give the characteristics ka, kb.
//   2. Two barrel shifters align each operand's leading one to the MSB and
//      keep the next t = 5 bits as mantissa (lower bits truncated).
//   3. The adaptive adder adds the mantissas; depending on max(ka, kb) it
//      recomputes the 2 or 3 most significant sum bits in otherwise idle
//      PFAs and zeroes any bit whose two copies disagree.
//   4. Three copies of the characteristic adder form ka + kb + carry; a
//      bitwise majority voter picks the exponent.
//   5. The antilogarithm stage puts a one at the exponent's position and the
//      mantissa sum below it.
// Everything is combinational; there is no clock and no register. The
// structure follows the paper's block diagram; feeding the mantissa carry to
// the characteristic adders, the zero-operand path and the fault-injection
// input are this design's own.
//
// Interface: a, b (N bits, unsigned); fi (adam_fault_t: XOR masks on the 7
// PFA outputs and on each of the 3 characteristic-adder outputs; tie to '0
// in use); p (2N bits).
module adam_mult
  import adam_pkg::*;
#(
  parameter int unsigned N = adam_pkg::N_BITS,
  parameter int unsigned T = adam_pkg::T_BITS
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  input  adam_fault_t    fi,
  output logic [2*N-1:0] p
);

  localparam int unsigned KW = $clog2(N);

  if (N != N_BITS || T != T_BITS) begin : g_size_check
    $error("adam_mult: N and T must match adam_pkg (the adaptive adder is fixed)");
  end

  logic [KW-1:0]  ka, kb;
  logic           za, zb;
  logic [T-1:0]   ma, mb;
  prot_mode_e     mode;
  logic [T-1:0]   msum;
  logic           mcarry;
  logic [KW:0]    ksum_rep [3];
  logic [KW:0]    ksum;

  adam_lod #(.N(N), .KW(KW)) u_lod_a (.x(a), .k(ka), .zero(za));
  adam_lod #(.N(N), .KW(KW)) u_lod_b (.x(b), .k(kb), .zero(zb));

  adam_barrel_lshift #(.N(N), .KW(KW), .T(T)) u_shift_a (.x(a), .k(ka), .m(ma));
  adam_barrel_lshift #(.N(N), .KW(KW), .T(T)) u_shift_b (.x(b), .k(kb), .m(mb));

  adam_mode_select #(.KW(KW), .T(T)) u_mode (.ka(ka), .kb(kb), .mode(mode));

  adam_adaptive_adder #(.T(T)) u_adder (
    .a(ma), .b(mb), .mode(mode), .fi_mask(fi.sum), .r(msum), .cout(mcarry)
  );

  for (genvar j = 0; j < 3; j++) begin : g_tmr
    logic [KW:0] ks;
    adam_hybrid_adder #(.KW(KW)) u_kadd (.ka(ka), .kb(kb), .cin(mcarry), .ksum(ks));
    assign ksum_rep[j] = ks ^ fi.ksum[j];
  end

  adam_tmr_voter #(.W(KW+1)) u_voter (
    .x0(ksum_rep[0]), .x1(ksum_rep[1]), .x2(ksum_rep[2]), .y(ksum)
  );

  adam_antilog #(.N(N), .KW(KW), .T(T)) u_antilog (
    .ksum(ksum), .frac(msum), .zero(za | zb), .p(p)
  );

endmodule
