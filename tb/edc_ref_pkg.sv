// edc_ref_pkg -- reference arithmetic for the testbenches.
//
// Computes field and curve operations directly from their definitions with wide
// integer arithmetic (the % operator on 512-bit values), independently of the hardware
// algorithms (Booth recoding, fast reduction, level schedule). Also supplies a random
// field-element generator built on $urandom and a known point on the curve.
package edc_ref_pkg;

  typedef logic [255:0] u256;
  typedef logic [511:0] u512;

  // p256 = 2^256 - 2^224 + 2^192 + 2^96 - 1, written from its definition
  localparam u512 P_W = (512'd1 << 256) - (512'd1 << 224) + (512'd1 << 192) + (512'd1 << 96) - 512'd1;
  localparam u256 P   = P_W[255:0];
  localparam u256 A_C = P - 256'd1;   // a = -1

  typedef struct packed {
    u256 x;
    u256 y;
    u256 z;
  } rpoint_t;

  // affine point with x = 5 on a*x^2 + y^2 = 1 + d*x^2*y^2 (y from a square root mod p256)
  localparam u256 BASE_X = 256'd5;
  localparam u256 BASE_Y = 256'h0d2a644e_06df8431_d6d924cf_b9385a65_6f38ab84_f598d866_008113a6_c5e7720b;

  function automatic u256 mulm(input u256 a, input u256 b);
    u512 t;
    t = (u512'(a) * u512'(b)) % P_W;
    return t[255:0];
  endfunction

  function automatic u256 addm(input u256 a, input u256 b);
    u512 t;
    t = (u512'(a) + u512'(b)) % P_W;
    return t[255:0];
  endfunction

  function automatic u256 subm(input u256 a, input u256 b);
    u512 t;
    t = (u512'(a) + P_W - u512'(b)) % P_W;
    return t[255:0];
  endfunction

  function automatic u256 rand_wide();
    u256 v;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  function automatic u256 rand_fe();
    u512 t;
    t = u512'(rand_wide()) % P_W;
    return t[255:0];
  endfunction

  // d = -121665/121666 must satisfy 121666*d + 121665 = 0 (mod p)
  function automatic bit d_ok(input u256 d);
    return addm(mulm(d, 256'd121666), 256'd121665) == 256'd0;
  endfunction

  // projective sum from the closed-form expressions
  //   X3 = Z1Z2 (X1Y2 + X2Y1)(Z1^2Z2^2 - dX1X2Y1Y2)
  //   Y3 = Z1Z2 (Y1Y2 - aX1X2)(Z1^2Z2^2 + dX1X2Y1Y2)
  //   Z3 = (Z1^2Z2^2 - dX1X2Y1Y2)(Z1^2Z2^2 + dX1X2Y1Y2)
  function automatic rpoint_t padd(input rpoint_t p1, input rpoint_t p2, input u256 a, input u256 d);
    u256 zz, zz2, dxy, m, pl;
    rpoint_t r;
    zz  = mulm(p1.z, p2.z);
    zz2 = mulm(zz, zz);
    dxy = mulm(d, mulm(mulm(p1.x, p2.x), mulm(p1.y, p2.y)));
    m   = subm(zz2, dxy);
    pl  = addm(zz2, dxy);
    r.x = mulm(mulm(zz, addm(mulm(p1.x, p2.y), mulm(p2.x, p1.y))), m);
    r.y = mulm(mulm(zz, subm(mulm(p1.y, p2.y), mulm(a, mulm(p1.x, p2.x)))), pl);
    r.z = mulm(m, pl);
    return r;
  endfunction

  // (a X^2 + Y^2) Z^2 == Z^4 + d X^2 Y^2
  function automatic bit on_curve(input rpoint_t p, input u256 a, input u256 d);
    u256 x2, y2, z2;
    x2 = mulm(p.x, p.x);
    y2 = mulm(p.y, p.y);
    z2 = mulm(p.z, p.z);
    return (mulm(addm(mulm(a, x2), y2), z2) == addm(mulm(z2, z2), mulm(d, mulm(x2, y2))));
  endfunction

  // same affine point: X1 Z2 == X2 Z1 and Y1 Z2 == Y2 Z1, with nonzero Z
  function automatic bit same_point(input rpoint_t p, input rpoint_t q);
    return (p.z != 0) && (q.z != 0) &&
           (mulm(p.x, q.z) == mulm(q.x, p.z)) && (mulm(p.y, q.z) == mulm(q.y, p.z));
  endfunction

  // base point scaled by a random nonzero Z
  function automatic rpoint_t rand_base();
    rpoint_t r;
    u256 s;
    do s = rand_fe(); while (s == 0);
    r.x = mulm(BASE_X, s);
    r.y = mulm(BASE_Y, s);
    r.z = s;
    return r;
  endfunction

  // k.P by the left-to-right double-and-add algorithm (top key bit assumed 1)
  function automatic rpoint_t pmul(input u256 k, input int nbits, input rpoint_t p, input u256 a, input u256 d);
    rpoint_t t;
    t = p;
    for (int i = nbits - 2; i >= 0; i--) begin
      t = padd(t, t, a, d);
      if (k[i]) t = padd(t, p, a, d);
    end
    return t;
  endfunction

endpackage
