// modmul -- modular multiplier z = a * b mod p256, 129 clocks.
//
// Two stages in series: the radix-4 Booth multiplier forms the 512-bit product in
// W/2 = 128 clocks, and the fast reduction unit brings it back to 256 bits, registered in
// one more clock. A squarer is this same unit with both operands equal.
//
// Interface and timing: start (while idle) samples a and b. done pulses for one cycle
// W/2 + 1 = 129 clocks after start; z then holds the result until the clock after the
// next done, so a consumer may read it at any time between two operations. Operands
// need not be held after the start clock. a and b must be below p256 for z to be the
// canonical residue of their product (any 256-bit inputs still give a value < p256
// congruent to a*b).
//
// Follows the paper: the multiplier / reduction split and the 128 + 1 clock budget.
module modmul
  import edc_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fe_t  a,       // multiplier
  input  fe_t  b,       // multiplicand
  output logic done,
  output fe_t  z
);

  logic           mul_done;
  logic           mul_busy;
  logic [2*W-1:0] product;
  fe_t            reduced;

  booth_mul #(.W(W)) u_mul (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (start),
    .multiplier   (a),
    .multiplicand (b),
    .busy         (mul_busy),
    .done         (mul_done),
    .product      (product)
  );

  modred u_red (
    .x (product),
    .z (reduced)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z    <= '0;
      done <= 1'b0;
    end else begin
      done <= mul_done;
      if (mul_done) z <= reduced;
    end
  end

  // a new product may only be requested while the multiplier is idle
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) !(start && mul_busy))
    else $error("modmul: start while busy");

endmodule
