// Shared definitions of the posit processing unit.
//
// The operation codes carried down the FPPU pipeline, the two constants of the
// reciprocal approximation used by the divider, and the functions that derive
// the internal widths from the posit configuration <N,ES>.
//
// The constants k1/k2 are the optimised values the design is built around.
// The 3-bit operation encoding and the width rules are this design's choices.
package ppu_pkg;

  // Operations of one FPPU lane.
  typedef enum logic [2:0] {
    OP_ADD   = 3'd0,  // p1 + p2
    OP_SUB   = 3'd1,  // p1 - p2
    OP_MUL   = 3'd2,  // p1 * p2
    OP_DIV   = 3'd3,  // p1 / p2
    OP_FMADD = 3'd4,  // p1 * p2 + p3, one rounding
    OP_INV   = 3'd5,  // 1 / p1
    OP_F2P   = 3'd6,  // binary32 operand 1 -> posit
    OP_P2F   = 3'd7   // posit operand 2 -> binary32
  } ppu_op_e;

  // Reciprocal approximation 1/x = 4*(k2 - x*(k1-x))*(k1-x) on x in [0.5,1).
  localparam real RECIP_K1 = 1.4567844114901045;
  localparam real RECIP_K2 = 1.0009290026616422;

  localparam int unsigned FLOAT_W = 32;

  // Maximum number of fraction bits of a posit<N,ES>: sign and the two
  // shortest regime bits are always present.
  function automatic int frac_width(int n, int es);
    return n - 3 - es;
  endfunction

  // Width of the signed total exponent te = k*2^ES + e. It must also hold the
  // exponents of binary32 operands (-149..127) and of intermediate results.
  function automatic int te_width(int n, int es);
    int w;
    w = $clog2(n) + es + 3;
    return (w < 10) ? 10 : w;
  endfunction

  // Width (hidden bit included) of the significand handed to the
  // normalisation stage: a full product of two significands or a binary32
  // significand, whichever is wider, plus two guard bits.
  function automatic int norm_width(int n, int es);
    int m;
    m = 2 * (frac_width(n, es) + 1);
    if (m < 24) m = 24;
    return m + 2;
  endfunction

endpackage
