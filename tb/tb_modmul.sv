// tb_modmul -- self-checking test of the modular multiplier.
//
// Random residues, squares and corner values are multiplied; the result is compared
// with a*b mod p256 from wide integer arithmetic, and done must arrive exactly 129 clocks
// (128 multiplier clocks plus one reduction clock) after start.
module tb_modmul;
  import edc_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  u256  a = '0, b = '0, z;
  logic done;
  int   checks = 0, failures = 0;
  int   cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  modmul dut (.clk, .rst_n, .start, .a, .b, .done, .z);

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input u256 ma, input u256 mb);
    u256 exp;
    int  t0, lat;
    exp = mulm(ma, mb);
    @(negedge clk); a = ma; b = mb; start = 1; t0 = cycles;
    @(negedge clk); start = 0; a = '0; b = '0;
    while (!done) @(negedge clk);
    lat = cycles - t0;
    checks += 2;
    if (z !== exp)  begin failures++; $display("FAIL %h * %h got %h exp %h", ma, mb, z, exp); end
    if (lat != 129) begin failures++; $display("FAIL latency %0d, expected 129", lat); end
  endtask

  initial begin
    u256 s;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(P - 1, P - 1);
    run(P - 1, 256'd1);
    run(256'd0, P - 1);
    run(256'd2, (P - 1) >> 1);
    for (int n = 0; n < 40; n++) run(rand_fe(), rand_fe());
    for (int n = 0; n < 10; n++) begin s = rand_fe(); run(s, s); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
