// dsi_pkg: types and constants shared by the digit-stability Jacobi solver.
//
// Numbers are fixed-point fractions |x| < 1 written MSD first in radix-2
// maximally redundant signed digits {-1, 0, +1}. One digit travels on a
// two-bit bus (the bus width printed in the datapath figure); the encoding
// is this design's own choice: two's complement, 2'b01 = +1, 2'b11 = -1,
// 2'b00 = 0, and 2'b10 is never produced.
//
// The online delays (3 for the multiplier, 2 for the adder) and the matrix
// size N = 2 are the paper's numbers. The fixed-point format of the
// stability constants alpha and beta is this design's choice.
package dsi_pkg;

  // one radix-2 signed digit
  typedef logic signed [1:0] digit_t;

  localparam digit_t DIG_ZERO = 2'sb00;
  localparam digit_t DIG_POS  = 2'sb01;
  localparam digit_t DIG_NEG  = 2'sb11;

  // matrix dimension of the prototype (paper: N = 2)
  localparam int unsigned N = 2;

  // online delays of the operators (paper: delta_x = 3, delta_+ = 2)
  localparam int unsigned DELTA_MUL = 3;
  localparam int unsigned DELTA_ADD = 2;
  localparam int unsigned DELTA     = DELTA_MUL + DELTA_ADD;

  // alpha and beta: signed fixed point with AB_FRAC fractional bits
  localparam int unsigned AB_W    = 32;
  localparam int unsigned AB_FRAC = 20;

  // memory banks addressed by the host load / read-back port
  typedef enum logic [2:0] {
    BANK_X0 = 3'd0,   // approximant element 0
    BANK_X1 = 3'd1,   // approximant element 1
    BANK_C0 = 3'd2,   // -a01/a00
    BANK_C1 = 3'd3,   // -a10/a11
    BANK_D0 = 3'd4,   // b0/a00
    BANK_D1 = 3'd5    // b1/a11
  } bank_e;

  // the value of a digit as an integer
  function automatic int digit_val(digit_t d);
    return int'(d);
  endfunction

endpackage
