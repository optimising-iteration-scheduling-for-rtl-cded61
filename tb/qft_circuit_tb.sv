// qft_circuit_tb: runs the quantum Fourier transform circuit (a Hadamard on each
// qubit q followed by controlled phase rotations R_2, R_3, ... controlled by the
// qubits above it, no final swaps) on registers of 3 to 9 qubits, with the
// kernel at its default of at most 2 controls per gate. For several basis inputs
// the final state is compared with a double-precision reference and, for input
// |0>, with the known result (every amplitude 2^(-n/2), to within the
// single-precision rounding of the Hadamard matrix). Checks the iteration
// total against the closed form n*2^(n-1) + n(n-1)/2*2^(n-2), i.e. controlled
// gates at half the unoptimised cost, and that the whole circuit ran at close to
// one iteration per clock cycle.
module qft_circuit_tb;
  import qsim_ref_pkg::*;

  logic clk;
  int checks = 0, failures = 0;

  kernel_env #(.MC(2), .MEM_AW(9)) env (.clk);

  task automatic expect_true(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  task automatic run_qft(input int n, input int value);
    gate_t g;
    longint exp_iters;
    env.load_basis(n, value);
    for (int q = 0; q < n; q++) begin
      g.kind = G_H; g.target = q; g.m = 0; g.ctrl = '{};
      env.run_gate(n, g);
      for (int c = q + 1; c < n; c++) begin
        g.kind = G_R; g.target = q; g.m = c - q + 1; g.ctrl = '{c};
        env.run_gate(n, g);
      end
    end
    exp_iters = longint'(n) * (longint'(1) << (n - 1))
              + longint'(n * (n - 1) / 2) * (longint'(1) << (n - 2));
    expect_true(env.iter_errors == 0, "per-gate iteration counts");
    expect_true(env.sched_iters == exp_iters,
                $sformatf("QFT%0d iterations %0d, expected %0d", n, env.sched_iters, exp_iters));
    expect_true(env.state_errors(n, 1e-4) == 0, $sformatf("QFT%0d |%0d> state", n, value));
    if (value == 0) begin
      real a = 1.0 / $sqrt(real'(1 << n));
      bit ok = 1;
      for (int k = 0; k < (1 << n); k++)
        if (env.rs.re[k] - a > 1e-6 || a - env.rs.re[k] > 1e-6) ok = 0;
      expect_true(ok, "reference QFT of |0> is uniform");
    end
    // gates = n + n(n-1)/2; allow ~20 cycles of fill per gate
    expect_true(env.cycles <= env.sched_iters + 20 * (n + n * (n - 1) / 2),
                $sformatf("QFT%0d rate: %0d cycles for %0d iterations", n, env.cycles, env.sched_iters));
    $display("QFT%0d input |%0d>: %0d iterations scheduled (unoptimised %0d), %0d cycles",
             n, value, env.sched_iters, env.base_iters, env.cycles);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    env.reset_kernel();
    run_qft(3, 0);
    run_qft(3, 5);
    run_qft(5, 0);
    run_qft(5, 19);
    run_qft(7, 77);
    run_qft(9, 0);
    run_qft(9, 300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
