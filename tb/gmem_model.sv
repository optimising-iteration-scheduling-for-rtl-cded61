// gmem_model: behavioural model of the board's global (DRAM) memory as seen by
// the gate kernel's pair load and pair store ports. 2^MEM_AW 64-bit words.
// A pair read accepted in cycle c returns both words in cycle c + LAT, in
// request order, one response per cycle. Writes are applied when accepted.
// rd_ready_pct / wr_ready_pct set the chance, per cycle, that the ports accept,
// so a testbench can create back-pressure; they may be changed at any time.
// Not synthesizable: a stand-in for memory that the design does not contain.
module gmem_model
  import qsim_pkg::*;
#(
  parameter int unsigned MEM_AW = 10,
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned LAT    = 12
) (
  input  logic              clk,
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [ADDR_W-1:0] rd_addr0,
  input  logic [ADDR_W-1:0] rd_addr1,
  output logic              rd_rsp_valid,
  output cfloat_t           rd_data0,
  output cfloat_t           rd_data1,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [ADDR_W-1:0] wr_addr0,
  input  logic [ADDR_W-1:0] wr_addr1,
  input  cfloat_t           wr_data0,
  input  cfloat_t           wr_data1
);
  cfloat_t mem [2**MEM_AW];
  int      rd_ready_pct = 100;
  int      wr_ready_pct = 100;
  longint  cycle = 0;
  int      bad_addr = 0;

  typedef struct { longint due; cfloat_t d0, d1; } rsp_t;
  rsp_t rsp_q[$];

  initial begin
    rd_req_ready = 1'b0;
    wr_ready     = 1'b0;
    rd_rsp_valid = 1'b0;
    rd_data0     = '0;
    rd_data1     = '0;
  end

  always @(posedge clk) begin
    rsp_t r;
    cycle <= cycle + 1;
    if (rd_req_valid && rd_req_ready) begin
      if ((rd_addr0 >> MEM_AW) != 0 || (rd_addr1 >> MEM_AW) != 0) bad_addr++;
      r.due = cycle + LAT;
      r.d0  = mem[rd_addr0[MEM_AW-1:0]];
      r.d1  = mem[rd_addr1[MEM_AW-1:0]];
      rsp_q.push_back(r);
    end
    if (wr_valid && wr_ready) begin
      if ((wr_addr0 >> MEM_AW) != 0 || (wr_addr1 >> MEM_AW) != 0) bad_addr++;
      mem[wr_addr0[MEM_AW-1:0]] = wr_data0;
      mem[wr_addr1[MEM_AW-1:0]] = wr_data1;
    end
    if (rsp_q.size() != 0 && rsp_q[0].due <= cycle) begin
      r = rsp_q.pop_front();
      rd_rsp_valid <= 1'b1;
      rd_data0     <= r.d0;
      rd_data1     <= r.d1;
    end else begin
      rd_rsp_valid <= 1'b0;
    end
    rd_req_ready <= ($urandom_range(99, 0) < rd_ready_pct);
    wr_ready     <= ($urandom_range(99, 0) < wr_ready_pct);
  end
endmodule
