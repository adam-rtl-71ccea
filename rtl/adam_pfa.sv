// adam_pfa: partial full adder, one bit of the carry-lookahead mantissa adder.
//
// s = a ^ b ^ c. In a carry-lookahead adder the generate and propagate terms
// are formed next to the PFA; here they live in adam_cla_carry so that the
// PFA has only the three inputs and one output drawn in the adder schematic.
// Combinational.
module adam_pfa (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic s
);

  assign s = a ^ b ^ c;

endmodule
