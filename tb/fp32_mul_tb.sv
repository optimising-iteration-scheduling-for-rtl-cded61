// fp32_mul_tb: checks the single-precision multiplier against products formed in
// double precision (exact for two single operands) and rounded to single
// precision to nearest even. Covers random operands over a wide exponent range,
// exact small products, rounding carry, zero, infinity, NaN, overflow and
// underflow flush.
module fp32_mul_tb;
  import tb_fp_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a, .b, .y);

  task automatic check(input logic [31:0] exp_y, input string what);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %h * %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  task automatic check_ref(input string what);
    #1;
    check(r2f(f2r(a) * f2r(b)), what);
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = r2f(1.5);  b = r2f(2.0);   check(r2f(3.0), "1.5*2");
    a = r2f(-0.5); b = r2f(0.25);  check(r2f(-0.125), "-0.5*0.25");
    a = r2f(3.0);  b = r2f(7.0);   check(r2f(21.0), "3*7");
    a = 32'h3fff_ffff; b = 32'h3fff_ffff; check_ref("near-2 squared");
    a = 32'h3f80_0001; b = 32'h3f7f_ffff; check_ref("rounding");
    a = 32'h0000_0000; b = r2f(5.0);  check(32'h0000_0000, "zero");
    a = 32'h8000_0000; b = r2f(5.0);  check(32'h8000_0000, "-zero");
    a = 32'h7f80_0000; b = r2f(-2.0); check(32'hff80_0000, "inf");
    a = 32'h7f80_0000; b = 32'h0;     check(32'h7fc0_0000, "inf*0");
    a = 32'h7fc0_0001; b = r2f(1.0);  check(32'h7fc0_0000, "nan");
    a = r2f(1.0e30); b = r2f(1.0e30); check(32'h7f80_0000, "overflow");
    a = r2f(1.0e-30); b = r2f(-1.0e-30); check(32'h8000_0000, "underflow");
    for (int k = 0; k < 20000; k++) begin
      a = rand_f(60);
      b = rand_f(60);
      check_ref("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
