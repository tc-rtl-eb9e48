// tc_pkg: types and constants shared by the fast-SSC polar decoder.
//
// The decoder works on log-likelihood ratios (LLRs) in two's complement.
// Channel LLRs are QC = 4 bits and inner LLRs Q = 5 bits, with no fraction
// bits: the (4,5,0) fixed-point scheme the design is specified with.  The
// code length defaults to N = 1024, the size the decoder was built for.
//
// Inner arithmetic (in the processing units) saturates symmetrically to
// +/-(2**(Q-1)-1), so the most negative code word never appears and every
// value has a Q-1 bit magnitude.  Saturation is this design's own choice;
// the fixed-point scheme only gives the word widths.
package tc_pkg;

  parameter int unsigned N_DEF  = 1024;  // code length
  parameter int unsigned Q_DEF  = 5;     // inner LLR width
  parameter int unsigned QC_DEF = 4;     // channel LLR width

  // Kind of a node of the decoding tree.  NODE_PAIR is any node of two bits,
  // which the stage-0 unit decodes in one cycle whatever its frozen pattern.
  typedef enum logic [2:0] {
    NODE_REG  = 3'd0,  // regular node: f step, then both children
    NODE_N0   = 3'd1,  // all bits frozen
    NODE_N1   = 3'd2,  // no bit frozen
    NODE_REP  = 3'd3,  // repetition: only the last bit is information
    NODE_SPC  = 3'd4,  // single parity check: only the first bit is frozen
    NODE_PAIR = 3'd5   // two-bit node at the bottom of the tree
  } node_kind_t;

endpackage
