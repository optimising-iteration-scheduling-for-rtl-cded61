// fp32_add_tb: checks the single-precision adder against sums formed in double
// precision and rounded to single precision. Sums of operands whose exponents
// differ by less than 29 are exact in double precision and must match bit for
// bit; for wider gaps a one-unit difference in the last place is accepted
// (double rounding). Also covers cancellation, zero, infinity and NaN cases.
module fp32_add_tb;
  import tb_fp_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a, .b, .y);

  task automatic check(input logic [31:0] exp_y, input bit allow_ulp, input string what);
    int diff;
    #1;
    checks++;
    diff = int'(y) - int'(exp_y);
    if (!(y === exp_y || (allow_ulp && y[31] == exp_y[31] && (diff == 1 || diff == -1)))) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %h + %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  task automatic check_ref(input string what);
    int gap;
    #1;
    gap = int'(a[30:23]) - int'(b[30:23]);
    if (gap < 0) gap = -gap;
    check(r2f(f2r(a) + f2r(b)), gap >= 29, what);
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = r2f(1.5);  b = r2f(2.25);  check(r2f(3.75), 0, "1.5+2.25");
    a = r2f(1.0);  b = r2f(-1.0);  check(32'h0, 0, "cancel");
    a = r2f(1.0);  b = r2f(-0.75); check(r2f(0.25), 0, "1-0.75");
    a = r2f(-3.0); b = r2f(1.0);   check(r2f(-2.0), 0, "-3+1");
    a = 32'h3f80_0000; b = 32'h3380_0000; check_ref("tie to even");
    a = 32'h3f80_0001; b = 32'h3380_0000; check_ref("tie up");
    a = 32'h3f80_0000; b = 32'hb300_0001; check_ref("borrow");
    a = 32'h7f7f_ffff; b = 32'h7f7f_ffff; check(32'h7f80_0000, 0, "overflow");
    a = 32'h0;  b = r2f(-2.5);     check(r2f(-2.5), 0, "zero+b");
    a = 32'h7f80_0000; b = 32'hff80_0000; check(32'h7fc0_0000, 0, "inf-inf");
    a = 32'hff80_0000; b = r2f(1.0); check(32'hff80_0000, 0, "-inf");
    for (int k = 0; k < 20000; k++) begin
      a = rand_f(20);
      b = rand_f(20);
      check_ref("random");
    end
    // close exponents exercise cancellation and normalisation
    for (int k = 0; k < 20000; k++) begin
      a = rand_f(2);
      b = {~a[31], a[30:23] - 8'($urandom_range(1, 0)), 23'($urandom)};
      check_ref("near cancel");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
