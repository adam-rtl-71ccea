// adam_mode_select: protection-mode choice of the adaptive adder.
//
// The larger of the two leading-one indices tells how many mantissa bits
// carry information. When max(ka, kb) >= T (5 with the defaults) all T
// mantissa bits may be non-zero, so the adder adds all of them and recomputes
// only the 2 MSBs (PROT_TOP2). When max(ka, kb) < T the mantissa LSB of both
// operands is a padded zero, so the PFA that would add it recomputes the third
// MSB instead (PROT_TOP3). The thresholds follow the paper's five LOD cases;
// the comparator and the select encoding are this design's own.
//
// Interface: ka, kb (KW bits) in; mode (prot_mode_e) out. Combinational.
module adam_mode_select #(
  parameter int unsigned KW = adam_pkg::K_BITS,
  parameter int unsigned T  = adam_pkg::T_BITS
) (
  input  logic [KW-1:0]            ka,
  input  logic [KW-1:0]            kb,
  output adam_pkg::prot_mode_e     mode
);

  logic [KW-1:0] kmax;

  always_comb begin
    kmax = (ka > kb) ? ka : kb;
    mode = (32'(kmax) >= T) ? adam_pkg::PROT_TOP2 : adam_pkg::PROT_TOP3;
  end

endmodule
