// pair_compute_unit_tb: streams amplitude pairs through the compute unit with
// H, X, Y, Z, R_m and random complex matrices and compares both outputs with
// the 2x2 complex product computed in double precision (tolerance
// 1e-5 times (1 + |expected|), as the inputs are of order one). A
// back-to-back burst checks one pair per cycle and the three-cycle latency;
// gaps in in_valid check that out_valid follows it exactly.
module pair_compute_unit_tb;
  import qsim_pkg::*;
  import tb_fp_pkg::*;

  logic    clk = 0, rst_n = 0;
  cfloat_t mat [4];
  logic    in_valid, out_valid;
  cfloat_t in0, in1, out0, out1;
  int checks = 0, failures = 0;

  pair_compute_unit dut (.*);

  always #5 clk = ~clk;

  real mr[4], mi[4];
  typedef struct { real r0, i0, r1, i1; int t_in; } exp_t;
  exp_t exp_q[$];
  int cycle = 0;
  always @(posedge clk) cycle++;

  function automatic cfloat_t cf(input real r, input real i);
    return '{im: r2f(i), re: r2f(r)};
  endfunction

  task automatic set_mat(input real a_r, a_i, b_r, b_i, c_r, c_i, d_r, d_i);
    mr = '{a_r, b_r, c_r, d_r};
    mi = '{a_i, b_i, c_i, d_i};
    for (int k = 0; k < 4; k++) begin
      mr[k] = f2r(r2f(mr[k]));
      mi[k] = f2r(r2f(mi[k]));
      mat[k] = cf(mr[k], mi[k]);
    end
  endtask

  function automatic bit close(input real got, input real want);
    real d = got - want;
    real m = (want < 0) ? -want : want;
    if (d < 0) d = -d;
    return d <= 1e-5 * (m + 1.0);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("FAIL unexpected output");
    end else begin
      e = exp_q.pop_front();
      if (!(close(f2r(out0.re), e.r0) && close(f2r(out0.im), e.i0) &&
            close(f2r(out1.re), e.r1) && close(f2r(out1.im), e.i1))) begin
        failures++;
        if (failures < 10)
          $display("FAIL got (%f,%f) (%f,%f) expected (%f,%f) (%f,%f)",
                   f2r(out0.re), f2r(out0.im), f2r(out1.re), f2r(out1.im),
                   e.r0, e.i0, e.r1, e.i1);
      end
      checks++;
      if (cycle - e.t_in != 3) begin
        failures++;
        $display("FAIL latency %0d", cycle - e.t_in);
      end
    end
  end

  task automatic send(input real r0, i0, r1, i1);
    exp_t e;
    r0 = f2r(r2f(r0)); i0 = f2r(r2f(i0)); r1 = f2r(r2f(r1)); i1 = f2r(r2f(i1));
    in0 = cf(r0, i0); in1 = cf(r1, i1);
    in_valid = 1;
    e.r0 = mr[0]*r0 - mi[0]*i0 + mr[1]*r1 - mi[1]*i1;
    e.i0 = mr[0]*i0 + mi[0]*r0 + mr[1]*i1 + mi[1]*r1;
    e.r1 = mr[2]*r0 - mi[2]*i0 + mr[3]*r1 - mi[3]*i1;
    e.i1 = mr[2]*i0 + mi[2]*r0 + mr[3]*i1 + mi[3]*r1;
    e.t_in = cycle + 1;
    exp_q.push_back(e);
    @(negedge clk);
    in_valid = 0;
  endtask

  function automatic real rnd();
    return (real'($urandom_range(2000000, 0)) - 1000000.0) / 1000000.0;
  endfunction

  task automatic burst(input int n, input bit gaps);
    for (int k = 0; k < n; k++) begin
      send(rnd(), rnd(), rnd(), rnd());
      if (gaps && $urandom_range(1, 0)) @(negedge clk);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real s2 = 1.0 / $sqrt(2.0);
    real pi = 3.14159265358979;
    in_valid = 0; in0 = '0; in1 = '0;
    set_mat(1, 0, 0, 0, 0, 0, 1, 0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    set_mat(s2, 0, s2, 0, s2, 0, -s2, 0);          // H
    send(1, 0, 0, 0);
    send(0, 0, 1, 0);
    burst(50, 0);
    set_mat(0, 0, 1, 0, 1, 0, 0, 0);               // X
    burst(50, 1);
    set_mat(0, 0, 0, -1, 0, 1, 0, 0);              // Y
    burst(50, 0);
    set_mat(1, 0, 0, 0, 0, 0, -1, 0);              // Z
    burst(50, 1);
    for (int m = 2; m <= 5; m++) begin             // R_m
      set_mat(1, 0, 0, 0, 0, 0, $cos(2*pi/(2.0**m)), $sin(2*pi/(2.0**m)));
      burst(30, 0);
    end
    for (int g = 0; g < 10; g++) begin
      set_mat(rnd(), rnd(), rnd(), rnd(), rnd(), rnd(), rnd(), rnd());
      burst(40, g[0]);
    end
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
