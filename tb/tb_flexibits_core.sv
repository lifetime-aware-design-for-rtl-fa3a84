// tb_flexibits_core: self-checking test of the FlexiBits core at the three
// widths of the family, W = 1 (SERV-class), 4 (QERV-class) and 8
// (HERV-class). Each width runs its own random RV32E program against the
// reference model (see tb_core_harness). Checks: registers and PC after every
// instruction, per-instruction cycle counts, final RAM contents, and that
// two-stage instructions, memory accesses, shifts and traps all occurred.
module tb_flexibits_core;
  logic clk = 0;
  always #5 clk = ~clk;

  int c1, f1, c4, f4, c8, f8;
  bit d1, d4, d8;
  int t1, m1, s1, x1, t4, m4, s4, x4, t8, m8, s8, x8;

  tb_core_harness #(.W(1), .N(300)) h1 (.clk, .checks(c1), .failures(f1), .done(d1),
    .n_two_stage(t1), .n_mem(m1), .n_shift(s1), .n_trap(x1));
  tb_core_harness #(.W(4), .N(300)) h4 (.clk, .checks(c4), .failures(f4), .done(d4),
    .n_two_stage(t4), .n_mem(m4), .n_shift(s4), .n_trap(x4));
  tb_core_harness #(.W(8), .N(300)) h8 (.clk, .checks(c8), .failures(f8), .done(d8),
    .n_two_stage(t8), .n_mem(m8), .n_shift(s8), .n_trap(x8));

  initial begin
    int checks, failures;
    fork
      wait (d1 && d4 && d8);
      repeat (400000) @(posedge clk);
    join_any
    checks   = c1 + c4 + c8 + 4;
    failures = f1 + f4 + f8;
    if (!(d1 && d4 && d8)) begin
      failures++;
      $display("FAIL watchdog");
    end
    if (t1 == 0 || m1 == 0 || s1 == 0 || x1 == 0) failures++;
    if (t4 == 0 || m4 == 0 || s4 == 0 || x4 == 0) failures++;
    if (t8 == 0 || m8 == 0 || s8 == 0 || x8 == 0) failures++;
    if (c1 < 1000 || c4 < 1000 || c8 < 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
