// upo -- unified twisted Edwards point operation in projective coordinates.
//
// Computes (X3 : Y3 : Z3) = (X1 : Y1 : Z1) + (X2 : Y2 : Z2) on a*x^2 + y^2 = 1 + d*x^2*y^2
// with one formula that also doubles (both inputs equal):
//   level 1:  A  = Z1*Z2,  X1*X2,  C2 = X1*Y2,  D1 = Y1*Y2,  D2 = X2*Y1
//   level 2:  B  = A^2,    C1 = a*(X1*X2),  C2*D2
//   level 3:  E  = d*(C2*D2)
//   level 4:  F  = B - E,  G = B + E,  C2 + D2,  D1 - C1   (one clock)
//   level 5:  A*F,  A*G
//   level 6:  X3 = (A*F)*(C2 + D2),  Y3 = (A*G)*(D1 - C1),  Z3 = F*G
// so X3 = A*F*(C2+D2), Y3 = A*G*(D1-C1), Z3 = F*G. Every operation has its own unit:
// thirteen multipliers, one squarer (a multiplier fed twice with A), two adders and two
// subtractors; all units of one level run at once and a level starts when the previous
// one finishes.
//
// Interface and timing: start samples p1, p2 (these need not be held afterwards); a and d
// are read at the start of levels 2 and 3 and must stay stable during the operation
// (they are curve constants). done pulses for one cycle 5*129 + 1 = 646 clocks after
// start; p3 is then held until the next operation's level-6 results arrive. start must
// not be raised while an operation runs, except in the cycle where done is high (the
// next operation may start back to back).
//
// Follows the paper: the six levels and their operations, the unit count (13M + 1S + 4A),
// the registers that carry A into level 5 and C2+D2, D1-C1 into level 6, and the
// 5*(m/2 + 1) + 1 clock latency. This design's choices: a start/done pulse handshake
// between levels; the level-4 adders load their registers on the clock after level 3
// finishes.
module upo
  import edc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  point_t p1,
  input  point_t p2,
  input  fe_t    a,
  input  fe_t    d,
  output logic   done,
  output point_t p3
);

  logic running;

  // level handshakes
  logic l1_done, l2_done, l3_done, l4_done, l5_done, l6_done;
  logic l1_d [5];
  logic l2_d [3];
  logic l5_d [2];
  logic l6_d [3];

  // level results (held in the units' output registers)
  fe_t a_zz, x1x2, c2, d1, d2;       // level 1
  fe_t b_sq, c1, c2d2;               // level 2
  fe_t e;                            // level 3
  fe_t f, g, c2_plus_d2, d1_minus_c1;// level 4
  fe_t af, ag;                       // level 5
  fe_t a_reg, sum_reg, diff_reg;     // carry registers of the level diagram

  // ---------------- level 1: five multipliers ----------------
  modmul u_l1_a  (.clk, .rst_n, .start(start), .a(p1.z), .b(p2.z), .done(l1_d[0]), .z(a_zz));
  modmul u_l1_xx (.clk, .rst_n, .start(start), .a(p1.x), .b(p2.x), .done(l1_d[1]), .z(x1x2));
  modmul u_l1_c2 (.clk, .rst_n, .start(start), .a(p1.x), .b(p2.y), .done(l1_d[2]), .z(c2));
  modmul u_l1_d1 (.clk, .rst_n, .start(start), .a(p1.y), .b(p2.y), .done(l1_d[3]), .z(d1));
  modmul u_l1_d2 (.clk, .rst_n, .start(start), .a(p2.x), .b(p1.y), .done(l1_d[4]), .z(d2));
  assign l1_done = l1_d[0];

  // ---------------- level 2: squarer and two multipliers ----------------
  modmul u_l2_b  (.clk, .rst_n, .start(l1_done), .a(a_zz), .b(a_zz), .done(l2_d[0]), .z(b_sq));
  modmul u_l2_c1 (.clk, .rst_n, .start(l1_done), .a(x1x2), .b(a),    .done(l2_d[1]), .z(c1));
  modmul u_l2_cd (.clk, .rst_n, .start(l1_done), .a(c2),   .b(d2),   .done(l2_d[2]), .z(c2d2));
  assign l2_done = l2_d[0];

  // ---------------- level 3: one multiplier ----------------
  modmul u_l3_e  (.clk, .rst_n, .start(l2_done), .a(c2d2), .b(d), .done(l3_done), .z(e));

  // ---------------- level 4: two subtractors, two adders (one clock) ----------------
  modaddsub #(.W(W)) u_l4_f (.clk, .rst_n, .en(l3_done), .sel(1'b0), .x(b_sq), .y(e),  .p(P256), .z(f));
  modaddsub #(.W(W)) u_l4_g (.clk, .rst_n, .en(l3_done), .sel(1'b1), .x(b_sq), .y(e),  .p(P256), .z(g));
  modaddsub #(.W(W)) u_l4_s (.clk, .rst_n, .en(l3_done), .sel(1'b1), .x(c2),   .y(d2), .p(P256), .z(c2_plus_d2));
  modaddsub #(.W(W)) u_l4_t (.clk, .rst_n, .en(l3_done), .sel(1'b0), .x(d1),   .y(c1), .p(P256), .z(d1_minus_c1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l4_done  <= 1'b0;
      a_reg    <= '0;
      sum_reg  <= '0;
      diff_reg <= '0;
    end else begin
      l4_done <= l3_done;
      if (l3_done) a_reg <= a_zz;             // REG carrying A past level 4
      if (l4_done) begin                      // REGs carrying level-4 sums past level 5
        sum_reg  <= c2_plus_d2;
        diff_reg <= d1_minus_c1;
      end
    end
  end

  // ---------------- level 5: two multipliers ----------------
  modmul u_l5_af (.clk, .rst_n, .start(l4_done), .a(a_reg), .b(f), .done(l5_d[0]), .z(af));
  modmul u_l5_ag (.clk, .rst_n, .start(l4_done), .a(a_reg), .b(g), .done(l5_d[1]), .z(ag));
  assign l5_done = l5_d[0];

  // ---------------- level 6: three multipliers ----------------
  modmul u_l6_x  (.clk, .rst_n, .start(l5_done), .a(af), .b(sum_reg),  .done(l6_d[0]), .z(p3.x));
  modmul u_l6_y  (.clk, .rst_n, .start(l5_done), .a(ag), .b(diff_reg), .done(l6_d[1]), .z(p3.y));
  modmul u_l6_z  (.clk, .rst_n, .start(l5_done), .a(f),  .b(g),        .done(l6_d[2]), .z(p3.z));
  assign l6_done = l6_d[0];
  assign done    = l6_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       running <= 1'b0;
    else if (start)   running <= 1'b1;
    else if (l6_done) running <= 1'b0;
  end

  // the units of one level are identical and started together, so they finish together
  a_level_sync: assert property (@(posedge clk) disable iff (!rst_n)
      (l1_d[0] == l1_d[4]) && (l2_d[0] == l2_d[2]) && (l5_d[0] == l5_d[1]) && (l6_d[0] == l6_d[2]))
    else $error("upo: units of one level out of step");
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) !(start && running && !l6_done))
    else $error("upo: start while an operation runs");

endmodule
