// iteration_mapper: maps a reduced iteration index to the global one.
//
// The controls of a gate, sorted so that c0 < c1 < ... , are applied one after
// the other. For control c the adjusted control is c_adj = c - 1 when c is above
// the target qubit and c otherwise, the skip interval is s = 2^c_adj, and the
// index advances as  i <- i + (floor(i / s) + 1) * s.  This skips every index
// whose bit c_adj would be zero, i.e. every pair that fails control c, so after
// the last control the index is a global iteration index whose pair satisfies
// all controls. Stage k applies control k when k < n_ctrl and passes the index
// unchanged otherwise.
// Timing: one register per stage, latency MAX_CONTROLS cycles, one index per
// cycle. The pipeline advances as a whole when its output is taken or empty
// (in_ready = out_ready || !out_valid). target, n_ctrl and ctrl must be stable
// while indices are in flight.
// The formula and its order of application follow the paper; the pipelining,
// the stall scheme and the per-stage enable are this design's own choices.
module iteration_mapper
  import qsim_pkg::*;
#(
  parameter int unsigned MAX_CONTROLS = 2,
  parameter int unsigned IDX_W        = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  qidx_t            target,
  input  qidx_t            n_ctrl,
  input  qidx_t            ctrl [MAX_CONTROLS],
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IDX_W-1:0] in_idx,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [IDX_W-1:0] out_idx
);
  logic [IDX_W-1:0] idx_q [MAX_CONTROLS];
  logic             vld_q [MAX_CONTROLS];
  logic [IDX_W-1:0] stage_in  [MAX_CONTROLS];
  logic             vld_in    [MAX_CONTROLS];
  logic [IDX_W-1:0] stage_out [MAX_CONTROLS];
  qidx_t            c_adj     [MAX_CONTROLS];
  logic             advance;

  assign advance  = out_ready || !vld_q[MAX_CONTROLS-1];
  assign in_ready = advance;

  always_comb begin
    for (int k = 0; k < MAX_CONTROLS; k++) begin
      stage_in[k] = (k == 0) ? in_idx   : idx_q[(k == 0) ? 0 : k-1];
      vld_in[k]   = (k == 0) ? in_valid : vld_q[(k == 0) ? 0 : k-1];
      c_adj[k]    = (ctrl[k] > target) ? ctrl[k] - qidx_t'(1) : ctrl[k];
      if (qidx_t'(k) < n_ctrl)
        stage_out[k] = stage_in[k]
                     + (((stage_in[k] >> c_adj[k]) + IDX_W'(1)) << c_adj[k]);
      else
        stage_out[k] = stage_in[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < MAX_CONTROLS; k++) begin
        vld_q[k] <= 1'b0;
        idx_q[k] <= '0;
      end
    end else if (advance) begin
      for (int k = 0; k < MAX_CONTROLS; k++) begin
        vld_q[k] <= vld_in[k];
        idx_q[k] <= stage_out[k];
      end
    end
  end

  assign out_valid = vld_q[MAX_CONTROLS-1];
  assign out_idx   = idx_q[MAX_CONTROLS-1];

`ifndef SYNTHESIS
  // The formula only holds for strictly ascending controls (paper's condition).
  for (genvar k = 1; k < MAX_CONTROLS; k++) begin : g_order
    a_ascending: assert property (@(posedge clk) disable iff (!rst_n)
      (in_valid && qidx_t'(k) < n_ctrl) |-> (ctrl[k] > ctrl[k-1]));
  end
`endif
endmodule
