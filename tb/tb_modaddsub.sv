// tb_modaddsub -- self-checking test of the combined modular adder/subtractor.
//
// Drives random operands below p256 and the corner values 0, 1, p-1 in both modes, and
// compares Z, one clock after the operands are applied, with (x + y) mod p or (x - y)
// mod p computed by wide integer arithmetic. Also checks that Z holds while en is low.
module tb_modaddsub;
  import edc_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, sel = 0;
  u256  x = '0, y = '0, z;
  int   checks = 0, failures = 0;
  int   cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  modaddsub #(.W(256)) dut (.clk, .rst_n, .en, .sel, .x, .y, .p(P), .z);

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit s, input u256 a, input u256 b);
    u256 exp;
    exp = s ? addm(a, b) : subm(a, b);
    @(negedge clk); sel = s; x = a; y = b; en = 1;
    @(negedge clk); en = 0;
    checks++;
    if (z !== exp) begin
      failures++;
      $display("FAIL %s x=%h y=%h got %h exp %h", s ? "add" : "sub", a, b, z, exp);
    end
    // hold check: change operands with en low, Z must not move
    x = ~a; y = ~b;
    @(negedge clk);
    checks++;
    if (z !== exp) begin failures++; $display("FAIL hold"); end
  endtask

  initial begin
    u256 c [3];
    c[0] = 0; c[1] = 1; c[2] = P - 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (c[i]) foreach (c[j]) begin
      run(1, c[i], c[j]);
      run(0, c[i], c[j]);
    end
    for (int n = 0; n < 400; n++) run(n[0], rand_fe(), rand_fe());
    // operands close to p so that both outcomes of each comparison occur often
    for (int n = 0; n < 100; n++) run(n[0], P - 256'($urandom), P - 256'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
