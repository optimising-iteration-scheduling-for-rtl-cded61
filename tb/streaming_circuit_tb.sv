// streaming_circuit_tb: runs the streaming circuit (X on x0, then X on x_k
// controlled by all of x0..x_k-1, for k = 1..n-1) on registers of 2 to 10
// qubits. The last gate carries n-1 controls, so the kernel is built here with
// room for 9 controls instead of its default 2. Every basis input is checked
// against the reference and against the circuit's known action on basis states
// (the gate order X(x0), CX(x0->x1), ... maps |v> to a permuted basis state,
// worked out bit by bit). The iteration total must be sum_k 2^(n-k-1) =
// 2^n - 1, against n*2^(n-1) for an unoptimised kernel.
module streaming_circuit_tb;
  import qsim_ref_pkg::*;

  localparam int MAXN = 10;

  logic clk;
  int checks = 0, failures = 0;

  kernel_env #(.MC(MAXN - 1), .MEM_AW(MAXN)) env (.clk);

  task automatic expect_true(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  // Apply the gates to a classical bit string, in the same order.
  function automatic int stream_bits(input int n, input int v);
    for (int k = 0; k < n; k++) begin
      bit all_set = 1;
      for (int c = 0; c < k; c++) if (((v >> c) & 1) == 0) all_set = 0;
      if (all_set) v = v ^ (1 << k);
    end
    return v;
  endfunction

  task automatic run_stream(input int n, input int value);
    gate_t g;
    int out_v;
    env.load_basis(n, value);
    for (int k = 0; k < n; k++) begin
      g.kind = G_X; g.target = k; g.m = 0; g.ctrl = '{};
      for (int c = 0; c < k; c++) g.ctrl.push_back(c);
      env.run_gate(n, g);
    end
    out_v = stream_bits(n, value);
    expect_true(env.iter_errors == 0, "per-gate iteration counts");
    expect_true(env.sched_iters == (longint'(1) << n) - 1,
                $sformatf("stream%0d iterations %0d", n, env.sched_iters));
    expect_true(env.state_errors(n, 1e-6) == 0, $sformatf("stream%0d |%0d> vs reference", n, value));
    expect_true(env.rs.re[out_v] == 1.0, $sformatf("stream%0d |%0d> -> |%0d>", n, value, out_v));
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    env.reset_kernel();
    for (int n = 2; n <= 6; n++)
      for (int v = 0; v < (1 << n); v++) run_stream(n, v);
    for (int n = 7; n <= MAXN; n++) begin
      run_stream(n, 0);
      run_stream(n, (1 << n) - 1);
      run_stream(n, $urandom_range((1 << n) - 1, 0));
      $display("stream%0d: %0d iterations scheduled (unoptimised %0d), %0d cycles",
               n, env.sched_iters, env.base_iters, env.cycles);
    end
    expect_true(env.max_ctrl_seen == MAXN - 1, "gate with n-1 controls seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
