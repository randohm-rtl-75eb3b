// randohm_pkg: types and constants shared by the moving-target-defence (MTD)
// blocks.
//
// The defence keeps secret-bearing registers from sitting at a fixed, known
// physical place or order while an adversary measures the impedance of the
// power delivery network. Two hardware forms exist: the register sequence
// multiplexer (fine grained, the form used to protect the masked AES key
// shares) and the target slice multiplexer (coarse grained). mtd_mode_e picks
// one of them in the top level.
//
// The LFSR polynomial and width below are this design's own choice; the
// source only says that an LFSR, initialised from a true random number
// generator, provides the randomness.
package randohm_pkg;

  // Which hardware multiplexing scheme protects the target data.
  typedef enum logic [0:0] {
    MTD_REG_SEQUENCE = 1'b0,  // shuffle the order in which registers are loaded
    MTD_TARGET_SLICE = 1'b1   // load one of several replicated shift registers
  } mtd_mode_e;

  // 16-bit maximal-length Fibonacci LFSR, x^16 + x^14 + x^13 + x^11 + 1.
  localparam int unsigned LFSR_W = 16;
  localparam logic [LFSR_W-1:0] LFSR_TAPS = 16'hB400;
  // State used when the seed is all zero (the all-zero state locks an LFSR).
  localparam logic [LFSR_W-1:0] LFSR_ZERO_SUB = 16'hACE1;

endpackage
