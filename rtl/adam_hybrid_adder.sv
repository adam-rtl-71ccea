// adam_hybrid_adder: adder of the two characteristics.
//
// ksum = ka + kb + cin, KW+1 bits wide. cin is the carry out of the mantissa
// sum: when m_a + m_b >= 1 Mitchell's antilogarithm moves the leading one of
// the product one place up, which is the same as adding 1 to the
// characteristic sum. The paper names this block a "hybrid adder" without
// describing it; it is built here as a ripple-carry adder. Three copies of it
// run in parallel, followed by a majority voter (adam_tmr_voter).
//
// Interface: ka, kb (KW bits), cin in; ksum (KW+1 bits) out. Combinational.
module adam_hybrid_adder #(
  parameter int unsigned KW = adam_pkg::K_BITS
) (
  input  logic [KW-1:0] ka,
  input  logic [KW-1:0] kb,
  input  logic          cin,
  output logic [KW:0]   ksum
);

  logic [KW:0] c;

  assign c[0] = cin;

  for (genvar i = 0; i < KW; i++) begin : g_bit
    assign ksum[i] = ka[i] ^ kb[i] ^ c[i];
    assign c[i+1]  = (ka[i] & kb[i]) | (c[i] & (ka[i] ^ kb[i]));
  end

  assign ksum[KW] = c[KW];

endmodule
