// rsa_pkg: sizes shared by the Vedic RSA datapath.
//
// The reference configuration pairs an 8x8 overlay multiplier with a 16-bit
// by 16-bit straight divider: the 16-bit product of two 8-bit residues is
// reduced modulo an 8-bit modulus that the divider sees zero-extended to 16
// bits. The exponent width is not fixed by the source; 8 bits is this
// design's choice, enough for any exponent below an 8-bit modulus. So is the
// 4-bit digit of the straight divider, the same grouping the overlay
// multiplier uses.
package rsa_pkg;
  localparam int unsigned OPER_W = 8;          // residues, base and modulus
  localparam int unsigned DIV_W  = 2 * OPER_W; // divider width (16)
  localparam int unsigned EXP_W  = 8;          // exponent bits
  localparam int unsigned DIGIT_W = 4;         // straight-division digit

  // States of the square-and-multiply sequencer.
  typedef enum logic [1:0] {
    ST_IDLE,
    ST_SQUARE,
    ST_MULT,
    ST_DONE
  } exp_state_e;
endpackage
