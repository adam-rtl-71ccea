// adam_pkg: constants and types shared by the AdAM approximate multiplier.
//
// AdAM multiplies two n-bit unsigned operands with Mitchell's logarithmic
// method. The defaults follow the published configuration: n = 8 bit operands,
// log2(n) = 3 bit characteristics (leading-one indices) and mantissas
// truncated to t = 5 bits. The adaptive adder (7 partial full adders) is
// drawn for exactly t = 5, so T_BITS is not meant to be changed on its own.
package adam_pkg;

  localparam int unsigned N_BITS  = 8;                 // operand width n
  localparam int unsigned K_BITS  = $clog2(N_BITS);    // characteristic width log2(n)
  localparam int unsigned T_BITS  = 5;                 // truncated mantissa width t
  localparam int unsigned PFA_NUM = N_BITS - 1;        // PFAs in the adaptive adder
  localparam int unsigned KS_BITS = K_BITS + 1;        // exponent width log2(n)+1

  // Protection mode of the adaptive adder, chosen from the larger LOD value.
  //   PROT_TOP2: all t mantissa bits are added, the 2 MSBs are computed twice.
  //   PROT_TOP3: the mantissa LSB is a padded zero for both operands, so the
  //              PFA that would add it recomputes the third MSB instead.
  typedef enum logic {
    PROT_TOP2 = 1'b0,
    PROT_TOP3 = 1'b1
  } prot_mode_e;

  // Fault-injection masks (XOR) used to emulate single-event upsets in test.
  // Hardware users tie the whole struct to '0.
  typedef struct packed {
    logic [PFA_NUM-1:0]             sum;   // flips PFA output s_i
    logic [2:0][KS_BITS-1:0]        ksum;  // flips bits of hybrid-adder replica j
  } adam_fault_t;

endpackage
