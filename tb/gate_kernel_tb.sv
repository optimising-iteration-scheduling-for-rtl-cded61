// gate_kernel_tb: end-to-end test of the gate kernel at its default parameters
// (at most 2 controls per gate, 32-bit indices and addresses, 64-pair load/store
// buffering), attached to a behavioural DRAM model with 12-cycle read latency.
// The testbench acts as host: it writes a random state vector into memory, then
// launches gates one at a time (H, X, Y, Z, R_m and random unitary-like
// matrices, with 0, 1 or 2 controls above and below the target) and after each
// gate compares the whole state vector with a double-precision reference.
// Per gate it checks that the kernel scheduled exactly 2^(n-n_c-1) iterations
// and issued that many pair writes, and, with memory never stalling, that the
// gate finished within iterations + 24 cycles (one pair per cycle). Memory
// outside the state vector must stay untouched. Each mechanism is counted and
// must occur: gates with 0/1/2 controls, controls above and below the target,
// read stalls, write stalls, and issue stalls with the load/store buffer full.
module gate_kernel_tb;
  import qsim_pkg::*;
  import tb_fp_pkg::*;
  import qsim_ref_pkg::*;

  localparam int MC     = 2;     // default of the kernel
  localparam int MEM_AW = 10;

  logic        clk = 0, rst_n = 0;
  logic        start = 0, busy, done;
  qidx_t       n_qubits, target, n_ctrl;
  qidx_t       ctrl [MC];
  cfloat_t     mat  [4];
  logic [31:0] state_base, iter_count;
  logic        rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  logic [31:0] rd_addr0, rd_addr1, wr_addr0, wr_addr1;
  cfloat_t     rd_data0, rd_data1, wr_data0, wr_data1;

  gate_kernel dut (.*);

  gmem_model #(.MEM_AW(MEM_AW), .ADDR_W(32), .LAT(12)) gmem (
    .clk, .rd_req_valid, .rd_req_ready, .rd_addr0, .rd_addr1,
    .rd_rsp_valid, .rd_data0, .rd_data1,
    .wr_valid, .wr_ready, .wr_addr0, .wr_addr1, .wr_data0, .wr_data1);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_gates[3] = '{0, 0, 0};
  int ctrl_above = 0, ctrl_below = 0;
  int rd_stalls = 0, wr_stalls = 0, lsu_full_stalls = 0;
  int writes = 0;
  ref_state rs;

  always @(posedge clk) begin
    if (rd_req_valid && !rd_req_ready) rd_stalls++;
    if (wr_valid && !wr_ready) wr_stalls++;
    if (dut.map_valid && dut.u_addr_fifo.full) lsu_full_stalls++;
    if (wr_valid && wr_ready) writes++;
  end

  task automatic expect_true(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  function automatic cfloat_t cf(input real r, input real i);
    return '{im: r2f(i), re: r2f(r)};
  endfunction

  task automatic load_random_state(input int n, input int base);
    rs = new(n);
    for (int w = 0; w < (1 << MEM_AW); w++) gmem.mem[w] = '{im: 32'h1234_5678, re: 32'hdead_beef};
    for (int k = 0; k < (1 << n); k++) begin
      rs.re[k] = f2r(r2f((real'($urandom_range(2000, 0)) - 1000.0) / 1000.0));
      rs.im[k] = f2r(r2f((real'($urandom_range(2000, 0)) - 1000.0) / 1000.0));
      gmem.mem[base + k] = cf(rs.re[k], rs.im[k]);
    end
  endtask

  task automatic compare_state(input int n, input int base, input string what);
    int bad = 0;
    for (int k = 0; k < (1 << n); k++) begin
      real dr = f2r(gmem.mem[base + k].re) - rs.re[k];
      real di = f2r(gmem.mem[base + k].im) - rs.im[k];
      if (dr > 1e-3 || dr < -1e-3 || di > 1e-3 || di < -1e-3) begin
        if (bad == 0 && failures < 15)
          $display("  amp %0d: got (%f,%f) expected (%f,%f)", k,
                   f2r(gmem.mem[base + k].re), f2r(gmem.mem[base + k].im), rs.re[k], rs.im[k]);
        bad++;
      end
    end
    for (int w = 0; w < (1 << MEM_AW); w++)
      if (w < base || w >= base + (1 << n))
        if (gmem.mem[w] != '{im: 32'h1234_5678, re: 32'hdead_beef}) bad++;
    expect_true(bad == 0, $sformatf("%s: %0d amplitudes wrong", what, bad));
  endtask

  // Host side of one gate launch.
  task automatic run_gate(input int n, input int base, input gate_t g, input bit check_rate);
    real mr[4], mi[4];
    int  cs[$];
    int  nc, cycles, w0;
    cs = g.ctrl;
    cs.sort();
    nc = cs.size();
    gate_matrix(g.kind, g.m, mr, mi);
    for (int j = 0; j < 4; j++) begin
      mr[j] = f2r(r2f(mr[j]));
      mi[j] = f2r(r2f(mi[j]));
      mat[j] = cf(mr[j], mi[j]);
    end
    n_qubits = qidx_t'(n);
    target = qidx_t'(g.target);
    n_ctrl = qidx_t'(nc);
    for (int j = 0; j < MC; j++) ctrl[j] = qidx_t'(j < nc ? cs[j] : 0);
    state_base = 32'(base);
    foreach (cs[j]) begin
      if (cs[j] > g.target) ctrl_above++;
      else ctrl_below++;
    end
    n_gates[nc]++;
    w0 = writes;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    rs.apply(g.target, cs, mr, mi);
    expect_true(iter_count == 32'(1 << (n - nc - 1)),
                $sformatf("iter_count %0d for n=%0d nc=%0d", iter_count, n, nc));
    expect_true(writes - w0 == (1 << (n - nc - 1)),
                $sformatf("writes %0d for n=%0d nc=%0d", writes - w0, n, nc));
    if (check_rate)
      expect_true(cycles <= (1 << (n - nc - 1)) + 24,
                  $sformatf("rate: %0d cycles for %0d iterations", cycles, 1 << (n - nc - 1)));
    compare_state(n, base, $sformatf("gate kind %0d t=%0d nc=%0d", g.kind, g.target, nc));
  endtask

  function automatic gate_t random_gate(input int n, input int max_c);
    gate_t g;
    int q[$];
    int nc;
    g.kind = gate_kind_e'($urandom_range(5, 0));
    g.m = $urandom_range(6, 2);
    for (int k = 0; k < n; k++) q.push_back(k);
    q.shuffle();
    g.target = q.pop_front();
    nc = $urandom_range(max_c, 0);
    for (int k = 0; k < nc; k++) g.ctrl.push_back(q.pop_front());
    return g;
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gate_t g;
    n_qubits = 0; target = 0; n_ctrl = 0; state_base = 0;
    for (int j = 0; j < MC; j++) ctrl[j] = 0;
    for (int j = 0; j < 4; j++) mat[j] = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // Paper's 3-qubit example: target 1 with controls {0}, {2}, {0,2}.
    load_random_state(3, 5);
    g.kind = G_H; g.target = 1; g.m = 2;
    g.ctrl = '{0};    run_gate(3, 5, g, 1);
    g.ctrl = '{2};    run_gate(3, 5, g, 1);
    g.ctrl = '{2, 0}; run_gate(3, 5, g, 1);
    g.ctrl = '{};     run_gate(3, 5, g, 1);

    // Full-rate gates on 8 qubits, memory never stalling.
    load_random_state(8, 256);
    for (int k = 0; k < 12; k++) run_gate(8, 256, random_gate(8, MC), 1);

    // Random back-pressure on both ports.
    gmem.rd_ready_pct = 60;
    gmem.wr_ready_pct = 60;
    for (int k = 0; k < 20; k++) run_gate(8, 256, random_gate(8, MC), 0);

    // Slow writes: the load/store buffer fills and issue stalls.
    gmem.rd_ready_pct = 100;
    gmem.wr_ready_pct = 4;
    g.kind = G_Y; g.target = 6; g.ctrl = '{}; run_gate(8, 256, g, 0);
    g.kind = G_R; g.m = 3; g.target = 0; g.ctrl = '{7}; run_gate(8, 256, g, 0);
    gmem.wr_ready_pct = 100;

    // Every target/control combination of a 5-qubit register with 2 controls.
    load_random_state(5, 0);
    for (int t = 0; t < 5; t++)
      for (int a = 0; a < 5; a++)
        for (int b = a + 1; b < 5; b++)
          if (a != t && b != t) begin
            g.kind = G_RAND; g.target = t; g.ctrl = '{b, a};
            run_gate(5, 0, g, 1);
          end

    expect_true(gmem.bad_addr == 0, "addresses inside memory");
    $display("gates: %0d uncontrolled, %0d with 1 control, %0d with 2 controls",
             n_gates[0], n_gates[1], n_gates[2]);
    $display("controls above target %0d, below target %0d", ctrl_above, ctrl_below);
    $display("read stalls %0d, write stalls %0d, buffer-full stalls %0d",
             rd_stalls, wr_stalls, lsu_full_stalls);
    expect_true(n_gates[0] > 0, "uncontrolled gate seen");
    expect_true(n_gates[1] > 0, "1-control gate seen");
    expect_true(n_gates[2] > 0, "2-control gate seen");
    expect_true(ctrl_above > 0, "control above target seen");
    expect_true(ctrl_below > 0, "control below target seen");
    expect_true(rd_stalls > 0, "read stall seen");
    expect_true(wr_stalls > 0, "write stall seen");
    expect_true(lsu_full_stalls > 0, "buffer-full stall seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
