// tb_upo -- self-checking test of the unified point operation.
//
// Checks the three output coordinates against the closed-form projective sum (computed
// from the textbook expressions, not from the level schedule) for random operand
// triplets, for additions of curve points with random projective scale, and for
// doublings (both inputs the same point), where the result must also lie on the curve.
// Every operation must take exactly 646 clocks from start to done. The curve constant d
// is checked against its definition -121665/121666.
module tb_upo;
  import edc_ref_pkg::*;

  logic    clk = 0, rst_n = 0, start = 0;
  rpoint_t p1 = '0, p2 = '0, p3;
  logic    done;
  u256     dcoef;
  int      checks = 0, failures = 0;
  int      cycles = 0;
  int      n_add = 0, n_dbl = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  assign dcoef = edc_pkg::CURVE_D;

  upo dut (.clk, .rst_n, .start, .p1, .p2, .a(A_C), .d(dcoef), .done, .p3);

  initial begin
    wait (cycles == 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input rpoint_t a1, input rpoint_t a2, input bit want_on_curve);
    rpoint_t exp;
    int t0, lat;
    exp = padd(a1, a2, A_C, dcoef);
    @(negedge clk); p1 = a1; p2 = a2; start = 1; t0 = cycles;
    @(negedge clk); start = 0; p1 = '0; p2 = '0;
    while (!done) @(negedge clk);
    lat = cycles - t0;
    checks += 2;
    if (p3 !== exp) begin
      failures++;
      $display("FAIL got (%h,%h,%h)\n      exp (%h,%h,%h)", p3.x, p3.y, p3.z, exp.x, exp.y, exp.z);
    end
    if (lat != 646) begin failures++; $display("FAIL latency %0d, expected 646", lat); end
    if (want_on_curve) begin
      checks++;
      if (!on_curve(p3, A_C, dcoef)) begin failures++; $display("FAIL result not on curve"); end
    end
    if (a1 == a2) n_dbl++; else n_add++;
  endtask

  initial begin
    rpoint_t b, q, r;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++;
    if (!d_ok(dcoef)) begin failures++; $display("FAIL d is not -121665/121666"); end
    b = rand_base();
    checks++;
    if (!on_curve(b, A_C, dcoef)) begin failures++; $display("FAIL base point not on curve"); end
    // doubling, then adding to the base point, with results fed back
    q = b;
    for (int n = 0; n < 3; n++) begin
      run(q, q, 1);
      r = p3;
      run(r, b, 1);
      q = p3;
    end
    // random triplets (not curve points): exact formula check
    for (int n = 0; n < 4; n++) begin
      r.x = rand_fe(); r.y = rand_fe(); r.z = rand_fe();
      q.x = rand_fe(); q.y = rand_fe(); q.z = rand_fe();
      run(r, q, 0);
    end
    checks++;
    if (n_add == 0 || n_dbl == 0) begin failures++; $display("FAIL both modes not exercised"); end
    $display("additions=%0d doublings=%0d", n_add, n_dbl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
