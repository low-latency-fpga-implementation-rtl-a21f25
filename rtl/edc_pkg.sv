// edc_pkg -- field and curve constants shared by the point-multiplication datapath.
//
// Every arithmetic unit works on 256-bit field elements. The reduction unit is the
// fast reduction modulo the NIST prime p256 = 2^256 - 2^224 + 2^192 + 2^96 - 1, so p256
// is the field modulus of the whole datapath. The curve is the twisted Edwards curve
//   a*x^2 + y^2 = 1 + d*x^2*y^2
// with the Edwards25519 coefficients a = -1 and d = -121665/121666, both taken modulo
// p256 here. (Edwards25519 proper lives over 2^255 - 19; its reduction is not the one
// this datapath implements, see the design notes.)
//
// Points are projective triplets (X : Y : Z) with x = X/Z, y = Y/Z.
// Latencies follow from a 256-bit Booth radix-4 multiplier (two bits per clock) plus one
// reduction clock: a modular product takes W/2 + 1 = 129 clocks, a unified point
// operation 5*(W/2 + 1) + 1 = 646 clocks.
package edc_pkg;

  localparam int unsigned W = 256;             // field element width

  typedef logic [W-1:0] fe_t;                  // field element, always < P256 when valid

  typedef struct packed {
    fe_t x;
    fe_t y;
    fe_t z;
  } point_t;                                   // projective point (X : Y : Z)

  // p256 = 2^256 - 2^224 + 2^192 + 2^96 - 1
  localparam fe_t P256 = 256'hffffffff_00000001_00000000_00000000_00000000_ffffffff_ffffffff_ffffffff;

  // a = -1 mod p256
  localparam fe_t CURVE_A = P256 - 256'd1;

  // d = -121665 * 121666^(-1) mod p256
  localparam fe_t CURVE_D = 256'h0bf0ddfe_360d822a_5298e6fb_6458750e_748f552d_e0ec9aad_9b58e62c_8c675f0a;

endpackage
