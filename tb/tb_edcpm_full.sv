// tb_edcpm_full -- full-size point multiplication with a 256-bit key.
//
// Instantiates the point multiplier with its default parameters and runs two complete
// multiplications, one with a random 256-bit key (top bit set) and one with the
// all-ones key. Each result is compared, as an affine point, with k.P from a
// double-and-add reference and must lie on the curve; done must rise
// 255 * 646 + 1 = 164,731 clocks after start (164,730 clocks of point operations plus
// the Q register).
module tb_edcpm_full;
  import edc_ref_pkg::*;

  logic     clk = 0, rst_n = 0, start = 0;
  u256      key = '0;
  rpoint_t  pin = '0, p2in = '0, q;
  logic     busy, done;
  u256      dcoef;
  int       checks = 0, failures = 0;
  int       cycles = 0;
  int       n_bit0 = 0, n_bit1 = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  assign dcoef = edc_pkg::CURVE_D;

  edcpm dut (.clk, .rst_n, .start, .key, .p_in(pin), .p2_in(p2in), .busy, .done, .q);

  always @(posedge clk) if (rst_n && dut.busy && dut.pa_done) begin
    if (dut.kbit) n_bit1++; else n_bit0++;
  end

  initial begin
    wait (cycles == 400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input u256 k);
    rpoint_t b, b2, exp;
    int t0, lat;
    b   = rand_base();
    b2  = padd(b, b, A_C, dcoef);
    exp = pmul(k, 256, b, A_C, dcoef);
    @(negedge clk); key = k; pin = b; p2in = b2; start = 1; t0 = cycles;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    lat = cycles - t0;
    checks += 3;
    if (!same_point(q, exp)) begin failures++; $display("FAIL k=%h got (%h,%h,%h)", k, q.x, q.y, q.z); end
    if (!on_curve(q, A_C, dcoef)) begin failures++; $display("FAIL result not on curve"); end
    if (lat != 164731) begin failures++; $display("FAIL latency %0d, expected 164731", lat); end
    $display("k=%h: %0d clocks", k, lat);
  endtask

  initial begin
    u256 k;
    repeat (2) @(negedge clk);
    rst_n = 1;
    k = rand_wide();
    k[255] = 1'b1;
    run(k);
    run('1);
    checks += 2;
    if (n_bit0 == 0) begin failures++; $display("FAIL no step with key bit 0"); end
    if (n_bit1 == 0) begin failures++; $display("FAIL no step with key bit 1"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
