// gate_kernel: one quantum gate applied to a state vector in external memory,
// scheduling only the iterations that the gate's controls allow.
//
// A single-qubit gate G with target t and controls c0 < c1 < ... on an n-qubit
// register updates every amplitude pair (k, k+2^t) whose index k has a 1 in each
// control position. There are 2^(n-n_c-1) such pairs. Instead of walking all
// 2^(n-1) pairs and skipping the ones that fail a control, the kernel enumerates
// only the needed ones:
//   iteration_scheduler  reduced indices 0 .. 2^(n-n_c-1)-1
//   iteration_mapper     reduced index -> global index, one control per stage
//   pair_index_gen       global index  -> pair addresses (0 inserted at bit t)
//   load                 pair read request to memory (state_base + index)
//   pair_compute_unit    [out0; out1] = G * [in0; in1], fp32 complex
//   store                pair write with the addresses kept from the load
// Load and store are decoupled by two FIFOs of LSU_DEPTH entries: the pair
// addresses are queued when a read is accepted, the results when they leave the
// compute unit. A read is issued only while the address FIFO has room, which
// bounds the pairs in flight and guarantees that every result finds room; read
// data therefore need no ready signal. Reads may be stalled by rd_req_ready,
// writes by wr_ready, and issue also stalls when LSU_DEPTH pairs are in flight.
//
// Interface: with busy low, a start pulse latches the gate's arguments
// (n_qubits, target, n_ctrl, ctrl[] ascending, mat[], state_base). done pulses
// for one cycle when the last pair has been accepted by the memory; iter_count
// then holds the number of iterations the gate took. Read responses must return
// in request order. Memory must make each accepted write visible to later reads.
// Throughput is one pair per cycle when memory keeps up; the latency from a
// read response to the write request is the compute unit's three cycles plus
// one FIFO cycle.
//
// The index scheduling, the mapping formula, the pair addressing and the update
// equation follow the paper; the memory ports, FIFO decoupling, handshakes and
// argument latching are this design's own choices.
module gate_kernel
  import qsim_pkg::*;
#(
  parameter int unsigned MAX_CONTROLS = 2,
  parameter int unsigned IDX_W        = 32,
  parameter int unsigned ADDR_W       = 32,
  parameter int unsigned LSU_DEPTH    = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // kernel arguments and launch
  input  logic              start,
  input  qidx_t             n_qubits,
  input  qidx_t             target,
  input  qidx_t             n_ctrl,
  input  qidx_t             ctrl [MAX_CONTROLS],
  input  cfloat_t           mat  [4],
  input  logic [ADDR_W-1:0] state_base,
  output logic              busy,
  output logic              done,
  output logic [IDX_W-1:0]  iter_count,
  // pair load
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_addr0,
  output logic [ADDR_W-1:0] rd_addr1,
  input  logic              rd_rsp_valid,
  input  cfloat_t           rd_data0,
  input  cfloat_t           rd_data1,
  // pair store
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr0,
  output logic [ADDR_W-1:0] wr_addr1,
  output cfloat_t           wr_data0,
  output cfloat_t           wr_data1
);
  // ---------------------------------------------------------------- arguments
  qidx_t             target_q, n_ctrl_q;
  qidx_t             ctrl_q [MAX_CONTROLS];
  cfloat_t           mat_q  [4];
  logic [ADDR_W-1:0] base_q;
  logic              launch;

  assign launch = start && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      target_q <= '0;
      n_ctrl_q <= '0;
      base_q   <= '0;
      for (int k = 0; k < MAX_CONTROLS; k++) ctrl_q[k] <= '0;
      for (int k = 0; k < 4; k++)            mat_q[k]  <= '0;
    end else if (launch) begin
      target_q <= target;
      n_ctrl_q <= n_ctrl;
      base_q   <= state_base;
      ctrl_q   <= ctrl;
      mat_q    <= mat;
    end
  end

  // --------------------------------------------------------------- scheduling
  logic             sch_valid, sch_ready;
  logic [IDX_W-1:0] sch_idx, total;

  iteration_scheduler #(.IDX_W(IDX_W)) u_sched (
    .clk, .rst_n,
    .start     (launch),
    .n_qubits  (n_qubits),
    .n_ctrl    (n_ctrl),
    .busy      (),
    .total     (total),
    .out_valid (sch_valid),
    .out_ready (sch_ready),
    .out_idx   (sch_idx),
    .out_last  ()
  );

  logic             map_valid, map_ready;
  logic [IDX_W-1:0] map_idx;

  iteration_mapper #(.MAX_CONTROLS(MAX_CONTROLS), .IDX_W(IDX_W)) u_map (
    .clk, .rst_n,
    .target    (target_q),
    .n_ctrl    (n_ctrl_q),
    .ctrl      (ctrl_q),
    .in_valid  (sch_valid),
    .in_ready  (sch_ready),
    .in_idx    (sch_idx),
    .out_valid (map_valid),
    .out_ready (map_ready),
    .out_idx   (map_idx)
  );

  logic [IDX_W-1:0] pe0, pe1;

  pair_index_gen #(.IDX_W(IDX_W)) u_pair (
    .idx    (map_idx),
    .target (target_q),
    .pe0    (pe0),
    .pe1    (pe1)
  );

  // --------------------------------------------------------------------- load
  logic              af_full, af_empty, rf_full, rf_empty;
  logic [2*ADDR_W-1:0] af_dout;
  logic [127:0]      rf_dout;
  logic              rd_fire, wr_fire;

  assign rd_addr0     = base_q + ADDR_W'(pe0);
  assign rd_addr1     = base_q + ADDR_W'(pe1);
  assign rd_req_valid = map_valid && !af_full;
  assign map_ready    = rd_req_ready && !af_full;
  assign rd_fire      = rd_req_valid && rd_req_ready;

  sync_fifo #(.WIDTH(2*ADDR_W), .DEPTH(LSU_DEPTH)) u_addr_fifo (
    .clk, .rst_n,
    .push  (rd_fire),
    .din   ({rd_addr1, rd_addr0}),
    .pop   (wr_fire),
    .dout  (af_dout),
    .full  (af_full),
    .empty (af_empty),
    .count ()
  );

  // ------------------------------------------------------------------ compute
  logic    cu_valid;
  cfloat_t cu_out0, cu_out1;

  pair_compute_unit u_cu (
    .clk, .rst_n,
    .mat       (mat_q),
    .in_valid  (rd_rsp_valid),
    .in0       (rd_data0),
    .in1       (rd_data1),
    .out_valid (cu_valid),
    .out0      (cu_out0),
    .out1      (cu_out1)
  );

  // -------------------------------------------------------------------- store
  sync_fifo #(.WIDTH(128), .DEPTH(LSU_DEPTH)) u_result_fifo (
    .clk, .rst_n,
    .push  (cu_valid),
    .din   ({cu_out1, cu_out0}),
    .pop   (wr_fire),
    .dout  (rf_dout),
    .full  (rf_full),
    .empty (rf_empty),
    .count ()
  );

  assign wr_valid = !rf_empty;
  assign wr_fire  = wr_valid && wr_ready;
  assign wr_addr0 = af_dout[ADDR_W-1:0];
  assign wr_addr1 = af_dout[2*ADDR_W-1:ADDR_W];
  assign wr_data0 = rf_dout[63:0];
  assign wr_data1 = rf_dout[127:64];

  // ----------------------------------------------------------------- tracking
  logic [IDX_W-1:0] written;
  logic             last_write;

  assign last_write = wr_fire && (written == total - IDX_W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      written    <= '0;
      iter_count <= '0;
    end else begin
      done <= 1'b0;
      if (launch) begin
        busy    <= 1'b1;
        written <= '0;
      end else if (busy && wr_fire) begin
        written <= written + IDX_W'(1);
        if (last_write) begin
          busy       <= 1'b0;
          done       <= 1'b1;
          iter_count <= total;
        end
      end
    end
  end

`ifndef SYNTHESIS
  // Results never outnumber the pairs whose reads were accepted.
  a_result_room: assert property (@(posedge clk) disable iff (!rst_n)
    cu_valid |-> !rf_full);
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rd_rsp_valid |-> !af_empty);
  a_write_has_addr: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid |-> !af_empty);
  a_no_stray_write: assert property (@(posedge clk) disable iff (!rst_n)
    wr_fire |-> busy);
  a_target_free: assert property (@(posedge clk) disable iff (!rst_n)
    launch |-> (target < n_qubits) && (n_ctrl <= qidx_t'(MAX_CONTROLS)));
`endif
endmodule
