// adam_barrel_lshift: mantissa extraction by left shift.
//
// Shifts operand x left by (N-1-k) so that its leading one lands on the MSB,
// then returns the T bits that follow the leading one. Bits that fall off the
// bottom are truncated and missing bits are padded with zeros. With N = 8 and
// T = 5 this is exactly the table of the published bit layout: for k = 7 the
// two lowest operand bits are dropped, for k = 6 one, for k = 5 none, and for
// k <= 4 zeros are padded below the operand's last bit.
//
// Interface: x (N bits) and its leading-one index k (KW bits) in; m (T bits,
// MSB first, m = floor((x - 2^k) * 2^T / 2^k)) out.
// Purely combinational.
module adam_barrel_lshift #(
  parameter int unsigned N  = adam_pkg::N_BITS,
  parameter int unsigned KW = $clog2(N),
  parameter int unsigned T  = adam_pkg::T_BITS
) (
  input  logic [N-1:0]  x,
  input  logic [KW-1:0] k,
  output logic [T-1:0]  m
);

  // After the shift the leading one sits at bit N+T-1 of an N+T bit word
  // (operand followed by T zero pad bits); the T bits below it are the
  // mantissa: shifting right by N-1 brings them to the bottom and the cast
  // drops the leading one, now at bit T.
  always_comb begin
    m = T'(({x, {T{1'b0}}} << (KW'(N - 1) - k)) >> (N - 1));
  end

endmodule
