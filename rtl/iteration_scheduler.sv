// iteration_scheduler: issues the reduced iteration index set of one gate.
//
// A gate on an n-qubit register with n_c controls needs only 2^(n-n_c-1)
// iterations, one per amplitude pair that satisfies every control. On start the
// block captures that count and then offers the indices 0, 1, ..., count-1 on a
// valid/ready stream, one per cycle while out_ready is high; out_last marks the
// final index. total holds the count of the current (or last) gate, busy is high
// until the last index has been accepted. start is ignored while busy.
// Requires 1 <= n - n_c <= IDX_W + 1.
// The size of the index set follows the paper; the stream handshake is this
// design's own choice (the original used the OpenCL runtime's NDRange launch).
module iteration_scheduler
  import qsim_pkg::*;
#(
  parameter int unsigned IDX_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  qidx_t            n_qubits,
  input  qidx_t            n_ctrl,
  output logic             busy,
  output logic [IDX_W-1:0] total,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [IDX_W-1:0] out_idx,
  output logic             out_last
);
  logic [IDX_W-1:0] last_idx;
  qidx_t            log2_count;

  always_comb log2_count = n_qubits - n_ctrl - qidx_t'(1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      out_idx  <= '0;
      last_idx <= '0;
      total    <= '0;
    end else if (!busy) begin
      if (start) begin
        busy     <= 1'b1;
        out_idx  <= '0;
        total    <= IDX_W'(1) << log2_count;
        last_idx <= (IDX_W'(1) << log2_count) - IDX_W'(1);
      end
    end else if (out_ready) begin
      if (out_idx == last_idx) busy <= 1'b0;
      else                     out_idx <= out_idx + IDX_W'(1);
    end
  end

  assign out_valid = busy;
  assign out_last  = busy && (out_idx == last_idx);

`ifndef SYNTHESIS
  a_start_range: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy) |-> (n_qubits > n_ctrl));
`endif
endmodule
