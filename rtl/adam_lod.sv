// adam_lod: leading-one detector.
//
// Returns the index k of the most significant '1' of the operand x. In
// Mitchell's method k is the integer part (characteristic) of log2(x). The
// scan runs from bit 0 upwards so that the highest set bit wins; synthesis
// turns it into a priority encoder. x = 0 has no leading one: 'zero' is then
// raised and k reads 0. The zero flag is this design's addition; the paper
// does not say how a zero operand is handled.
//
// Interface: x (N bits) in; k (KW bits) and zero out. Purely combinational.
module adam_lod #(
  parameter int unsigned N  = adam_pkg::N_BITS,
  parameter int unsigned KW = $clog2(N)
) (
  input  logic [N-1:0]  x,
  output logic [KW-1:0] k,
  output logic          zero
);

  always_comb begin
    k = '0;
    for (int unsigned i = 0; i < N; i++) begin
      if (x[i]) k = KW'(i);
    end
    zero = (x == '0);
  end

endmodule
