// modred -- combinational fast reduction of a 512-bit integer modulo p256.
//
// p256 = 2^256 - 2^224 + 2^192 + 2^96 - 1. The input is split into sixteen 32-bit words
// x15..x0. Because 2^256 is congruent to a short signed sum of powers of 2^32, the value
// is congruent to
//   Sm = Sm1 + 2*Sm2 + 2*Sm3 + Sm4 + Sm5 - Sm6 - Sm7 - Sm8 - Sm9,
// where each Sm is a 256-bit number built by placing input words (or zeros) in its eight
// word slots (table below, most significant word first). Sm2 and Sm3 are doubled by a
// left shift, Sm6..Sm9 are negated (inversion plus a carry-in), and an adder tree with
// the intermediate sums Sm14, Sm23, Sm1234, Sm56, Sm78, Sm5678, Sm56789 forms Sm.
//
// Sm lies in (-5p, 6p). A bias of 5p makes it positive, then ten candidates
// Sm + 5p - k*p (k = 1..10) are formed in parallel and a chain of multiplexers keeps the
// last candidate that is still non-negative, which is the residue in [0, p).
//
// Timing: purely combinational; the modular multiplier registers the output, which is
// the single reduction clock.
//
// Follows the paper: the nine terms of the fast-reduction algorithm, the shifters,
// inverters and adder tree with its named partial sums, and the selection among
// subtracted multiples of p by a multiplexer chain. This design's choice: the figure
// shows six subtracted multiples (-P .. -6P) and no handling of a negative Sm; since
// Sm can be as low as about -4.x p and as high as about 5.x p, six are not enough, so a
// +5p bias and ten multiples are used.
module modred
  import edc_pkg::*;
(
  input  logic [2*W-1:0] x,
  output fe_t            z
);

  localparam int unsigned SW   = W + 8;   // signed width for Sm and the candidates
  localparam int unsigned NSUB = 10;

  logic [31:0] xw [16];
  fe_t sm1, sm2, sm3, sm4, sm5, sm6, sm7, sm8, sm9;
  logic signed [SW-1:0] sm14, sm23, sm1234, sm56, sm78, sm5678, sm56789, sm;
  logic signed [SW-1:0] biased;
  logic signed [SW-1:0] cand [NSUB+1];
  fe_t sel_val;

  function automatic logic signed [SW-1:0] ext(input fe_t v);
    return $signed({{(SW-W){1'b0}}, v});
  endfunction

  // the pre-defined values: k*p for k = 0..NSUB, and the 5p bias
  typedef logic signed [SW-1:0] kp_t [NSUB+1];
  function automatic kp_t multiples();
    kp_t t;
    t[0] = '0;
    for (int k = 1; k <= NSUB; k++) t[k] = t[k-1] + ext(P256);
    return t;
  endfunction
  localparam kp_t KP = multiples();

  // two's complement negation: inverter plus carry-in
  function automatic logic signed [SW-1:0] neg(input fe_t v);
    return ~ext(v) + SW'(1);
  endfunction

  always_comb begin
    for (int i = 0; i < 16; i++) xw[i] = x[32*i +: 32];

    sm1 = {xw[7],  xw[6],  xw[5],  xw[4],  xw[3],  xw[2],  xw[1],  xw[0]};
    sm2 = {xw[15], xw[14], xw[13], xw[12], xw[11], 32'd0,  32'd0,  32'd0};
    sm3 = {32'd0,  xw[15], xw[14], xw[13], xw[12], 32'd0,  32'd0,  32'd0};
    sm4 = {xw[15], xw[14], 32'd0,  32'd0,  32'd0,  xw[10], xw[9],  xw[8]};
    sm5 = {xw[8],  xw[13], xw[15], xw[14], xw[13], xw[11], xw[10], xw[9]};
    sm6 = {xw[10], xw[8],  32'd0,  32'd0,  32'd0,  xw[13], xw[12], xw[11]};
    sm7 = {xw[11], xw[9],  32'd0,  32'd0,  xw[15], xw[14], xw[13], xw[12]};
    sm8 = {xw[12], 32'd0,  xw[10], xw[9],  xw[8],  xw[15], xw[14], xw[13]};
    sm9 = {xw[13], 32'd0,  xw[11], xw[10], xw[9],  32'd0,  xw[15], xw[14]};

    sm14    = ext(sm1) + ext(sm4);
    sm23    = (ext(sm2) <<< 1) + (ext(sm3) <<< 1);
    sm1234  = sm14 + sm23;
    sm56    = ext(sm5) + neg(sm6);
    sm78    = neg(sm7) + neg(sm8);
    sm5678  = sm56 + sm78;
    sm56789 = sm5678 + neg(sm9);
    sm      = sm1234 + sm56789;

    biased  = sm + KP[5];
    for (int k = 0; k <= NSUB; k++) cand[k] = biased - KP[k];

    // the chosen candidate lies in [0, p), so its upper bits are zero
    sel_val = cand[0][W-1:0];
    for (int k = 1; k <= NSUB; k++)
      if (!cand[k][SW-1]) sel_val = cand[k][W-1:0];

    z = sel_val;
  end

endmodule
