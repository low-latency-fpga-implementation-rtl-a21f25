// tb_modred -- self-checking test of the p256 fast reduction.
//
// Applies random 512-bit inputs, products of two residues, and corner cases (zero,
// all-ones, multiples of p, inputs that make the signed term sum most negative or most
// positive) and compares the output with x mod p from wide integer arithmetic.
module tb_modred;
  import edc_ref_pkg::*;

  u512 x;
  u256 z;
  int  checks = 0, failures = 0;

  modred dut (.x, .z);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input u512 v);
    u512 exp;
    exp = v % P_W;
    x = v;
    #1;
    checks++;
    if (u512'(z) !== exp) begin failures++; $display("FAIL x=%h got %h exp %h", v, z, exp); end
  endtask

  initial begin
    u512 w;
    run('0);
    run('1);
    run(P_W);
    run(P_W * 7);
    run(u512'(P - 1) * u512'(P - 1));
    // words feeding only the subtracted terms set, the rest zero: most negative sum
    w = '0;
    for (int i = 8; i < 16; i++) w[32*i +: 32] = '1;
    run(w);
    // only the added words set
    w = '0;
    for (int i = 0; i < 8; i++) w[32*i +: 32] = '1;
    run(w);
    for (int n = 0; n < 2000; n++) run({rand_wide(), rand_wide()});
    for (int n = 0; n < 2000; n++) run(u512'(rand_fe()) * u512'(rand_fe()));
    // random words from {0, all-ones} to reach the extremes of the term sum
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 16; i++) w[32*i +: 32] = ($urandom & 1) ? '1 : '0;
      run(w);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
