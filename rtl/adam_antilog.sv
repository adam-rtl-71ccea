// adam_antilog: antilogarithm stage producing the 2n-bit product.
//
// The voted exponent ksum gives the position of the product's leading one;
// the T-bit mantissa sum frac follows right below it:
//     p = ({1, frac} << ksum) >> T
// Mantissa bits that fall below bit 0 (ksum < T) are dropped, i.e. the
// result is truncated, not rounded. With ksum <= 2n-1 the product fits in
// 2n bits. zero forces p = 0 (an operand was zero), a choice of this design.
//
// Interface: ksum (KW+1 bits), frac (T bits), zero in; p (2N bits) out.
// Combinational.
module adam_antilog #(
  parameter int unsigned N  = adam_pkg::N_BITS,
  parameter int unsigned KW = $clog2(N),
  parameter int unsigned T  = adam_pkg::T_BITS
) (
  input  logic [KW:0]    ksum,
  input  logic [T-1:0]   frac,
  input  logic           zero,
  output logic [2*N-1:0] p
);

  // The shift is done 2N+T bits wide so that no mantissa bit is lost
  // before the final right shift by T.
  always_comb begin
    p = zero ? '0 : (2*N)'(((2*N+T)'({1'b1, frac}) << ksum) >> T);
  end

endmodule
