// ciprng_pkg -- constants shared by the chaotic-iteration random number
// generator (CIPRNG built from one Blum Blum Shub and two 64-bit XORshift
// generators).
//
// The widths (64-bit XORshift, 32-bit BBS, 16-bit state, 12 + 1 two-bit
// blocks per 32-bit word, 4 BBS switch bits) follow the published algorithm.
// The shift triple, the BBS modulus and all seeds are not published; the
// values below are this design's own choices:
//   * XORshift shifts (13, 7, 17): Marsaglia's full-period 64-bit triple.
//   * BBS modulus 65519 * 65479 = 4290118601; both primes are 3 mod 4, so
//     the product is a Blum integer that fits in 32 bits.
//   * Seeds: any non-degenerate constants (XORshift seeds non-zero, BBS seed
//     coprime to the modulus and not 0 or 1).
package ciprng_pkg;

  localparam int unsigned XS_W     = 64;  // XORshift state width
  localparam int unsigned BBS_W    = 32;  // BBS state and modulus width
  localparam int unsigned STATE_W  = 16;  // chaotic-iteration state width
  localparam int unsigned N_BLOCKS = 12;  // two-bit blocks always applied
  localparam int unsigned N_SWITCH = 4;   // BBS bits used as switches

  localparam int unsigned XS_SHIFT_A = 13;
  localparam int unsigned XS_SHIFT_B = 7;
  localparam int unsigned XS_SHIFT_C = 17;

  localparam logic [XS_W-1:0]    XS1_SEED_DEF = 64'd88172645463325252;
  localparam logic [XS_W-1:0]    XS2_SEED_DEF = 64'h2545_F491_4F6C_DD1D;
  localparam logic [BBS_W-1:0]   BBS_SEED_DEF = 32'd74565;
  localparam logic [BBS_W-1:0]   BBS_M_DEF    = 32'hFFB6_03C9;
  localparam logic [STATE_W-1:0] Z_SEED_DEF   = 16'hACE1;

endpackage
