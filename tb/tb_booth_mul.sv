// tb_booth_mul -- self-checking test of the radix-4 Booth multiplier.
//
// Multiplies random and corner-case 256-bit operands (including all-ones and operands
// with the top bit set, which exercise the unsigned correction) and compares the 512-bit
// product with the wide-integer product. Checks that done arrives exactly 128 clocks
// after start (two multiplier bits per clock) and that product then holds.
module tb_booth_mul;
  import edc_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  u256  a = '0, b = '0;
  logic busy, done;
  u512  product;
  int   checks = 0, failures = 0;
  int   cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  booth_mul #(.W(256)) dut (.clk, .rst_n, .start, .multiplier(a), .multiplicand(b), .busy, .done, .product);

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input u256 ma, input u256 mb);
    u512 exp;
    int  t0, lat;
    exp = u512'(ma) * u512'(mb);
    @(negedge clk); a = ma; b = mb; start = 1; t0 = cycles;
    @(negedge clk); start = 0; a = '0; b = '0;   // operands need not be held
    while (!done) @(negedge clk);
    lat = cycles - t0;
    checks += 2;
    if (product !== exp) begin failures++; $display("FAIL %h * %h got %h exp %h", ma, mb, product, exp); end
    if (lat != 128)      begin failures++; $display("FAIL latency %0d, expected 128", lat); end
    @(negedge clk);
    checks++;
    if (product !== exp || busy) begin failures++; $display("FAIL hold"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run('1, '1);
    run('1, 256'd1);
    run(256'd1, '1);
    run(256'd0, '1);
    run({1'b1, 255'd0}, {1'b1, 255'd0});
    run({2'b10, {254{1'b1}}}, 256'd3);
    for (int n = 0; n < 40; n++) run(rand_wide(), rand_wide());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
