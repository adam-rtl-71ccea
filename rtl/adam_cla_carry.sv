// adam_cla_carry: carry-lookahead unit of the mantissa adder.
//
// Forms generate g_i = a_i & b_i and propagate p_i = a_i ^ b_i and from them
// every carry in two-level form, c_{i+1} = OR over j<=i of
// (g_j AND p_{j+1} AND ... AND p_i), with carry-in c_0 = 0. Output c holds
// c_0 .. c_W; c_W is the carry out of the W-bit sum. Combinational.
module adam_cla_carry #(
  parameter int unsigned W = adam_pkg::T_BITS
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W:0]   c
);

  logic [W-1:0] g, p;
  logic         term;

  always_comb begin
    g = a & b;
    p = a ^ b;
    c = '0;
    for (int unsigned i = 0; i < W; i++) begin
      c[i+1] = 1'b0;
      for (int unsigned j = 0; j <= i; j++) begin
        term = g[j];
        for (int unsigned q = j + 1; q <= i; q++) term = term & p[q];
        c[i+1] = c[i+1] | term;
      end
    end
  end

endmodule
