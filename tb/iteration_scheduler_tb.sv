// iteration_scheduler_tb: launches gates of several register sizes and control
// counts, accepts indices under random back-pressure and checks that exactly
// 0 .. 2^(n-n_c-1)-1 come out in order, that last marks the final one, that
// total is right, that start is ignored while busy, and that an unstalled gate
// issues one index per cycle.
module iteration_scheduler_tb;
  import qsim_pkg::*;

  logic        clk = 0, rst_n = 0, start = 0;
  qidx_t       n_qubits, n_ctrl;
  logic        busy, out_valid, out_ready, out_last;
  logic [31:0] total, out_idx;
  int checks = 0, failures = 0;

  iteration_scheduler #(.IDX_W(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(input int n, input int nc, input int ready_pct);
    longint expected = 0;
    int     cycles = 0;
    n_qubits = qidx_t'(n); n_ctrl = qidx_t'(nc);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    expect_eq(total, 64'(1) << (n - nc - 1), "total");
    // a second start while busy must be ignored
    n_qubits = 6'd20;
    start = 1;
    while (busy) begin
      out_ready = ($urandom_range(99, 0) < ready_pct);
      @(posedge clk);
      cycles++;
      start = 0;
      if (out_valid && out_ready) begin
        expect_eq(out_idx, expected, "index");
        expect_eq(out_last, expected == (64'(1) << (n - nc - 1)) - 1, "last");
        expected++;
      end
      @(negedge clk);
    end
    start = 0;
    expect_eq(expected, 64'(1) << (n - nc - 1), "count");
    if (ready_pct == 100) expect_eq(cycles, 64'(1) << (n - nc - 1), "one per cycle");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    out_ready = 0; n_qubits = 0; n_ctrl = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3, 0, 100);
    run(3, 2, 100);
    run(8, 0, 100);
    run(8, 3, 60);
    run(10, 1, 30);
    run(12, 11, 50);
    run(12, 2, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
