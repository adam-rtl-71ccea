// adam_tmr_voter: bitwise 2-out-of-3 majority voter.
//
// y_i = (x0_i & x1_i) | (x0_i & x2_i) | (x1_i & x2_i). Any single faulty
// replica is outvoted. Used on the three hybrid-adder copies. Combinational.
module adam_tmr_voter #(
  parameter int unsigned W = adam_pkg::KS_BITS
) (
  input  logic [W-1:0] x0,
  input  logic [W-1:0] x1,
  input  logic [W-1:0] x2,
  output logic [W-1:0] y
);

  assign y = (x0 & x1) | (x0 & x2) | (x1 & x2);

endmodule
