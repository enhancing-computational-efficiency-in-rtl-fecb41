// sdrns_pkg: types shared by the SD-RNS (signed-digit residue number system)
// arithmetic unit.
//
// A residue channel works modulo one of 2^n-1, 2^n or 2^n+1 (the moduli set
// {2^n-1, 2^n, 2^n+1}); mod_e selects which. Every channel holds its residue
// as n signed digits in {-1,0,1}. A digit is a posibit/negabit pair with
// value p - n, so an n-digit vector travels as two n-bit buses (x_p, x_n).
// The pair encoding is this design's choice; the digit set is the paper's.
package sdrns_pkg;

  // Channel modulus.
  typedef enum logic [1:0] {
    MOD_2N_M1 = 2'd0,   // 2^n - 1 : end-around transfer
    MOD_2N    = 2'd1,   // 2^n     : top transfer dropped
    MOD_2N_P1 = 2'd2    // 2^n + 1 : negated end-around transfer
  } mod_e;

  // Operations of the accumulator unit (sd_rns_unit).
  typedef enum logic [2:0] {
    OP_LOAD = 3'd0,     // acc = a
    OP_ADD  = 3'd1,     // acc = acc + a
    OP_SUB  = 3'd2,     // acc = acc - a
    OP_MUL  = 3'd3,     // acc = acc * a
    OP_MAC  = 3'd4      // acc = acc + a * b
  } op_e;

endpackage
