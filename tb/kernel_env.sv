// kernel_env: a gate kernel, its behavioural memory and a host model, for the
// circuit-level testbenches. The host task run_gate launches one gate (controls
// sorted ascending, matrix rounded to single precision), waits for done and
// applies the same gate to a double-precision reference state. It keeps the
// totals the circuit tests report: iterations the kernel scheduled, iterations
// an unoptimised kernel would have scheduled (2^(n-1) per gate) and clock
// cycles spent. check_state compares memory with the reference.
module kernel_env
  import qsim_pkg::*;
  import tb_fp_pkg::*;
  import qsim_ref_pkg::*;
#(
  parameter int MC     = 2,
  parameter int MEM_AW = 12
) (
  output logic clk
);
  logic        rst_n = 0;
  logic        start = 0, busy, done;
  qidx_t       n_qubits, target, n_ctrl;
  qidx_t       ctrl [MC];
  cfloat_t     mat  [4];
  logic [31:0] state_base, iter_count;
  logic        rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  logic [31:0] rd_addr0, rd_addr1, wr_addr0, wr_addr1;
  cfloat_t     rd_data0, rd_data1, wr_data0, wr_data1;

  initial clk = 0;
  always #5 clk = ~clk;

  gate_kernel #(.MAX_CONTROLS(MC)) dut (.*);

  gmem_model #(.MEM_AW(MEM_AW), .ADDR_W(32), .LAT(12)) gmem (
    .clk, .rd_req_valid, .rd_req_ready, .rd_addr0, .rd_addr1,
    .rd_rsp_valid, .rd_data0, .rd_data1,
    .wr_valid, .wr_ready, .wr_addr0, .wr_addr1, .wr_data0, .wr_data1);

  ref_state rs;
  longint   sched_iters = 0, base_iters = 0, cycles = 0;
  int       iter_errors = 0, max_ctrl_seen = 0;

  function automatic cfloat_t cf(input real r, input real i);
    return '{im: r2f(i), re: r2f(r)};
  endfunction

  task automatic reset_kernel();
    n_qubits = 0; target = 0; n_ctrl = 0; state_base = 0;
    for (int j = 0; j < MC; j++) ctrl[j] = 0;
    for (int j = 0; j < 4; j++) mat[j] = '0;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
  endtask

  // Basis state |value> of an n-qubit register.
  task automatic load_basis(input int n, input int value);
    rs = new(n);
    for (int k = 0; k < (1 << n); k++) begin
      rs.re[k] = (k == value) ? 1.0 : 0.0;
      rs.im[k] = 0.0;
      gmem.mem[k] = cf(rs.re[k], rs.im[k]);
    end
    sched_iters = 0; base_iters = 0; cycles = 0;
  endtask

  task automatic run_gate(input int n, input gate_t g);
    real mr[4], mi[4];
    int  cs[$];
    int  nc;
    cs = g.ctrl;
    cs.sort();
    nc = cs.size();
    if (nc > max_ctrl_seen) max_ctrl_seen = nc;
    gate_matrix(g.kind, g.m, mr, mi);
    for (int j = 0; j < 4; j++) begin
      mr[j] = f2r(r2f(mr[j]));
      mi[j] = f2r(r2f(mi[j]));
      mat[j] = cf(mr[j], mi[j]);
    end
    n_qubits = qidx_t'(n);
    target   = qidx_t'(g.target);
    n_ctrl   = qidx_t'(nc);
    for (int j = 0; j < MC; j++) ctrl[j] = qidx_t'(j < nc ? cs[j] : 0);
    state_base = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles++;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    if (iter_count != 32'(1 << (n - nc - 1))) iter_errors++;
    sched_iters += iter_count;
    base_iters  += longint'(1) << (n - 1);
    rs.apply(g.target, cs, mr, mi);
  endtask

  function automatic int state_errors(input int n, input real tol);
    int bad = 0;
    for (int k = 0; k < (1 << n); k++) begin
      real dr = f2r(gmem.mem[k].re) - rs.re[k];
      real di = f2r(gmem.mem[k].im) - rs.im[k];
      if (dr > tol || dr < -tol || di > tol || di < -tol) bad++;
    end
    return bad;
  endfunction
endmodule
