// sas_pkg: constants shared by the Strong Anti-SAT (SAS) / Robust SAS (RSAS)
// locking logic and by the locked multiplier that uses it.
//
// The defaults describe the main configuration: a 32-bit multiplier
// (the multiplier of a 32-bit 80386-class processor) whose 32-bit locked
// input X is taken from one operand, with m = 4 critical minterms spread
// over l = 2 locking blocks (the "l = 2 when m >= 2" rule used for the
// effectiveness results). n = 32 follows the area/power/delay evaluation.
// The critical minterm values, the point-function constants X_g and the
// product bits that are flipped are this design's own choices.
package sas_pkg;

  localparam int unsigned OPW_DEF = 32;  // multiplier operand width
  localparam int unsigned N_DEF   = 32;  // locked input bits n (key = 2n per block)
  localparam int unsigned M_DEF   = 4;   // critical minterms m
  localparam int unsigned L_DEF   = 2;   // locking blocks l

  // Critical minterms, index 0 first; block j owns entries j*M/L ..
  // (j+1)*M/L - 1.  Small operand values that a workload multiplies by very
  // often (1, -1 in block 0; 2, -2 in block 1).  The minterms of one block
  // must differ in their top log2(M/L) bits (see sas_h_function).
  localparam logic [M_DEF-1:0][N_DEF-1:0] CRIT_DEF = {
    32'hFFFF_FFFE, 32'h0000_0002, 32'hFFFF_FFFF, 32'h0000_0001
  };

  // On-set point X_g of g() in each block, block 0 first.
  localparam logic [L_DEF-1:0][N_DEF-1:0] XG_DEF = {
    32'hA5C3_0F96, 32'h5A5A_C3C3
  };

  // Product bit that each block's output is XORed into, block 0 first.
  localparam int unsigned WIRE_BIT_DEF [L_DEF] = '{31, 30};

  // True when v is a power of two (v >= 1).
  function automatic bit is_pow2(int unsigned v);
    return (v != 0) && ((v & (v - 1)) == 0);
  endfunction

endpackage
