// genasm_pkg: types and constants shared by the GenASM accelerator.
//
// Bases use the 2-bit code A=00, C=01, G=10, T=11 (the encoding the GenASM
// evaluation uses for the reference genome). Sequences are packed 32 bases to
// a 64-bit word, base j of a word at bits [2j+1:2j]; the packing order is a
// choice of this design. CIGAR operations are emitted as 2-bit codes whose
// order follows the status numbers of the traceback algorithm (match=1,
// substitution=2, insertion=3, deletion=4), minus one.
package genasm_pkg;

  localparam int unsigned WORD_BITS      = 64;   // DC-SRAM / memory word
  localparam int unsigned BASES_PER_WORD = 32;

  typedef enum logic [1:0] {
    BASE_A = 2'd0,
    BASE_C = 2'd1,
    BASE_G = 2'd2,
    BASE_T = 2'd3
  } base_e;

  typedef enum logic [1:0] {
    OP_M = 2'd0,   // match: consumes one text and one query base
    OP_S = 2'd1,   // substitution: consumes one of each, one error
    OP_I = 2'd2,   // insertion: consumes one query base, one error
    OP_D = 2'd3    // deletion: consumes one text base, one error
  } cigar_op_e;

  typedef enum logic [1:0] {
    MODE_ALIGN  = 2'd0,  // DC + TB, CIGAR stream reported
    MODE_EDIT   = 2'd1,  // DC + TB, only the edit distance reported
    MODE_FILTER = 2'd2   // as MODE_EDIT, stop early above a threshold
  } mode_e;

endpackage
