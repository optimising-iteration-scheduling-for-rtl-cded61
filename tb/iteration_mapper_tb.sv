// iteration_mapper_tb: for registers of 3 to 7 qubits, every target and every
// ascending set of up to MAX_CONTROLS controls, feeds the reduced indices
// 0 .. 2^(n-n_c-1)-1 through the mapper and compares the outputs with the
// global iteration indices found by brute force: walk all 2^(n-1) pairs in
// order and keep those whose first index has a 1 at every control position.
// Includes the paper's 3-qubit, t = 1 example: c = {0} -> {1,3},
// c = {2} -> {2,3}, c = {0,2} -> {3}. Random output back-pressure; the pipeline
// latency (MAX_CONTROLS cycles) is checked when unstalled.
module iteration_mapper_tb;
  import qsim_pkg::*;

  localparam int MC = 3;

  logic        clk = 0, rst_n = 0;
  qidx_t       target, n_ctrl;
  qidx_t       ctrl [MC];
  logic        in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_idx, out_idx;
  int checks = 0, failures = 0;
  int cases = 0;

  iteration_mapper #(.MAX_CONTROLS(MC), .IDX_W(32)) dut (.*);

  always #5 clk = ~clk;

  int unsigned exp_q[$];

  task automatic run_case(input int n, input int t, input int nc, input int c[MC],
                          input int ready_pct);
    int unsigned ig = 0;
    int sent = 0, got = 0, total, cyc = 0;
    exp_q.delete();
    for (int k = 0; k < (1 << n); k++) begin
      bit ok;
      if (((k >> t) & 1) != 0) continue;
      ok = 1;
      for (int j = 0; j < nc; j++) if (((k >> c[j]) & 1) == 0) ok = 0;
      if (ok) exp_q.push_back(ig);
      ig++;
    end
    total = 1 << (n - nc - 1);
    checks++;
    if (exp_q.size() != total) begin failures++; $display("FAIL reference size"); end
    target = qidx_t'(t); n_ctrl = qidx_t'(nc);
    for (int j = 0; j < MC; j++) ctrl[j] = qidx_t'(j < nc ? c[j] : 0);
    while (got < total) begin
      in_valid  = (sent < total);
      in_idx    = sent;
      out_ready = ($urandom_range(99, 0) < ready_pct);
      @(posedge clk);
      cyc++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_idx != exp_q[got]) begin
          failures++;
          if (failures < 10)
            $display("FAIL n=%0d t=%0d nc=%0d c=%0d,%0d,%0d: out %0d expected %0d",
                     n, t, nc, c[0], c[1], c[2], out_idx, exp_q[got]);
        end
        got++;
      end
      if (in_valid && in_ready) sent++;
      @(negedge clk);
    end
    in_valid = 0;
    if (ready_pct == 100) begin
      checks++;
      if (cyc != total + MC) begin
        failures++;
        $display("FAIL latency: %0d cycles for %0d indices", cyc, total);
      end
    end
    cases++;
    // drain
    out_ready = 1;
    repeat (MC + 1) @(negedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c[MC];
    in_valid = 0; in_idx = 0; out_ready = 1; target = 0; n_ctrl = 0;
    for (int j = 0; j < MC; j++) ctrl[j] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // paper example, n = 3, t = 1
    c = '{0, 0, 0}; run_case(3, 1, 1, c, 100);
    c = '{2, 0, 0}; run_case(3, 1, 1, c, 100);
    c = '{0, 2, 0}; run_case(3, 1, 2, c, 100);
    // exhaustive small registers
    for (int n = 3; n <= 7; n++)
      for (int t = 0; t < n; t++)
        for (int m = 0; m < (1 << n); m++) begin
          int nc;
          nc = 0;
          if ((m >> t) & 1) continue;
          for (int q = 0; q < n; q++) if ((m >> q) & 1) begin
            if (nc < MC) c[nc] = q;
            nc++;
          end
          if (nc > MC || nc > n - 1) continue;
          for (int j = nc; j < MC; j++) c[j] = 0;
          run_case(n, t, nc, c, (n == 5) ? 40 : 100);
        end
    $display("mapper cases run: %0d", cases);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
