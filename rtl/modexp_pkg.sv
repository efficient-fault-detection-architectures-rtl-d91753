// Shared constants and types of the fault-detecting modular exponentiator.
//
// The operand width (2048 bits), the width of the random encoding
// coefficients (50 bits) and the default partial-recomputation length
// (l = 128 exponent bits) are the sizes the design is evaluated at.
// The sequencer state encoding is this design's own choice.
package modexp_pkg;

  // Width of modulus N, base x, exponent y and of phi(N).
  parameter int unsigned OP_W  = 2048;
  // Width of the random coefficients k used by the encoders.
  parameter int unsigned K_W   = 50;
  // Default number of exponent bits recomputed in the second round.
  parameter int unsigned L_DEF = 128;

  // Width of an encoded operand a + k*m with a, m < 2^w and k < 2^kw.
  function automatic int unsigned enc_width(int unsigned w, int unsigned kw);
    return w + kw + 1;
  endfunction

  // Width of a counter that must hold the values 0..w.
  function automatic int unsigned cnt_width(int unsigned w);
    return $clog2(w + 1);
  endfunction

  // Phases of the two-round check (the t1 / t2 switch positions).
  typedef enum logic [2:0] {
    ST_IDLE  = 3'd0,  // waiting for start
    ST_ENC1  = 3'd1,  // t1: encoders build x1, y1
    ST_RUN1  = 3'd2,  // t1: full exponentiation, Q1, Q1partial, HW1
    ST_ENC2  = 3'd3,  // t2: encoders build x2, y2
    ST_RUN2  = 3'd4,  // t2: partial exponentiation, Q2partial, HW2
    ST_CMP   = 3'd5,  // comparator decides, register releases or withholds
    ST_DONE  = 3'd6   // one-cycle completion pulse
  } fd_state_e;

endpackage
