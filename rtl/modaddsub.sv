// modaddsub -- combined modular adder / subtractor over GF(p).
//
// One unit serves both operations, as in the combined add-sub architecture:
//   sel = 1 : z = (x + y) mod p      (Algorithm "addition in GF(p)")
//   sel = 0 : z = (x - y) mod p      (Algorithm "subtraction in GF(p)")
// Operands must lie in [0, p-1]. A single W+1-bit adder takes x and either y or its
// complement (with carry-in 1, so x - y for subtraction). A second adder adds either
// -p (addition) or +p (subtraction) to that sum. Two comparators choose the result:
// for addition, "sum >= p" keeps the reduced sum; for subtraction, "x >= y" keeps the
// plain difference, otherwise the difference plus p is taken.
//
// Timing: combinational from the operands to the output register Z, which loads when
// en is high; z is valid the clock after en (one cycle per operation). Reset clears Z.
//
// Follows the paper: the Y and P operand multiplexers with inverters selected by SEL,
// the adder, the two comparators (X against Y, adder output against P) and the output
// register. This design's choices: SEL = 1 means addition (the figure's "1" input of the
// Y multiplexer is the uninverted path); the carry-ins that turn the inverters into
// two's-complement negation; the operand registers in front of the adder are not
// repeated here, because every user of this unit feeds it from registers already.
module modaddsub #(
  parameter int unsigned W = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,    // load Z this cycle
  input  logic         sel,   // 1: add, 0: subtract
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] p,
  output logic [W-1:0] z
);

  logic [W:0] y_op, p_op;   // operand multiplexers of the figure
  logic [W:0] s;            // x + y  or  x - y  (mod 2^(W+1))
  logic [W-1:0] s_p;        // s - p  or  s + p  (mod 2^W; the result is below p)
  logic       ge_p;         // comparator: x + y >= p
  logic       x_ge_y;       // comparator: x >= y
  logic [W-1:0] z_next;

  always_comb begin
    y_op   = sel ? {1'b0, y} : ~{1'b0, y};
    p_op   = sel ? ~{1'b0, p} : {1'b0, p};
    s      = {1'b0, x} + y_op + {{W{1'b0}}, ~sel};
    s_p    = W'(s + p_op + {{W{1'b0}}, sel});
    ge_p   = (s >= {1'b0, p});
    x_ge_y = (x >= y);
    if (sel) z_next = ge_p   ? s_p : s[W-1:0];
    else     z_next = x_ge_y ? s[W-1:0]   : s_p;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  z <= '0;
    else if (en) z <= z_next;
  end

endmodule
