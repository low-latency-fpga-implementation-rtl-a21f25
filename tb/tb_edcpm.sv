// tb_edcpm -- end-to-end test of the point multiplier with a short key.
//
// Runs the whole design (two point units, the step controller, the result routing)
// with KEY_BITS = 8 for several keys with the top bit set, including all-ones, a single
// one, alternating patterns and random keys, on the base point with random projective
// scale. Each result is compared, as an affine point, with k.P from a left-to-right
// double-and-add reference (a different schedule, so the projective triplets differ),
// and must lie on the curve. done must rise (KEY_BITS - 1) * 646 + 1 clocks after
// start. Counts the steps taken with key bit 0 and with key bit 1 (the two routings of
// the results), the starts from the precomputed points, and a start pulse raised in the
// middle of a run (which must be ignored); a mechanism that never occurred counts as a
// failure.
module tb_edcpm;
  import edc_ref_pkg::*;

  localparam int KB = 8;

  logic          clk = 0, rst_n = 0, start = 0;
  logic [KB-1:0] key = '0;
  rpoint_t       pin = '0, p2in = '0, q;
  logic          busy, done;
  u256           dcoef;
  int            checks = 0, failures = 0;
  int            cycles = 0;
  int            n_bit0 = 0, n_bit1 = 0, n_first = 0, n_poke = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  assign dcoef = edc_pkg::CURVE_D;

  edcpm #(.KEY_BITS(KB)) dut (.clk, .rst_n, .start, .key, .p_in(pin), .p2_in(p2in), .busy, .done, .q);

  // mechanism counters, observed at the point where each step's results are routed
  always @(posedge clk) if (rst_n) begin
    if (dut.busy && dut.pa_done) begin
      if (dut.kbit) n_bit1++; else n_bit0++;
    end
    if (!dut.busy && start) n_first++;
  end

  initial begin
    wait (cycles == 80000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [KB-1:0] k, input bit poke = 0);
    rpoint_t b, b2, exp;
    int t0, lat;
    b   = rand_base();
    b2  = padd(b, b, A_C, dcoef);
    exp = pmul(u256'(k), KB, b, A_C, dcoef);
    @(negedge clk); key = k; pin = b; p2in = b2; start = 1; t0 = cycles;
    @(negedge clk); start = 0; key = '0; pin = '0; p2in = '0;
    if (poke) begin
      // a start pulse with other operands in the middle of the run must be ignored
      repeat (1000) @(negedge clk);
      key = '1; pin = rand_base(); p2in = pin; start = 1;
      @(negedge clk); start = 0; key = '0; pin = '0; p2in = '0;
      n_poke++;
    end
    while (!done) @(negedge clk);
    lat = cycles - t0;
    checks += 3;
    if (!same_point(q, exp)) begin
      failures++;
      $display("FAIL k=%b got (%h,%h,%h)", k, q.x, q.y, q.z);
    end
    if (!on_curve(q, A_C, dcoef)) begin failures++; $display("FAIL k=%b result not on curve", k); end
    if (lat != (KB - 1) * 646 + 1) begin failures++; $display("FAIL latency %0d", lat); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run('1);
    run({1'b1, {(KB-1){1'b0}}});
    run(8'b1010_1010);
    run(8'b1101_0011, 1);
    for (int n = 0; n < 2; n++) run({1'b1, 7'($urandom)});
    checks += 4;
    if (n_poke == 0) begin failures++; $display("FAIL no start while busy"); end
    if (n_bit0 == 0) begin failures++; $display("FAIL no step with key bit 0"); end
    if (n_bit1 == 0) begin failures++; $display("FAIL no step with key bit 1"); end
    if (n_first == 0) begin failures++; $display("FAIL no start from precomputed points"); end
    $display("steps key bit 0: %0d, key bit 1: %0d, starts: %0d", n_bit0, n_bit1, n_first);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
