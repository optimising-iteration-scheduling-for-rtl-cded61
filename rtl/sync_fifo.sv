// sync_fifo: single-clock first-in first-out buffer.
//
// DEPTH entries of WIDTH bits held in a register array addressed by wrapping
// read and write pointers. push writes din when not full; pop drops the head
// when not empty; both may happen in the same cycle. dout shows the head
// combinationally. count gives the number of stored entries.
// A generic helper of this design, not described in the paper.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   push,
  input  logic [WIDTH-1:0]       din,
  input  logic                   pop,
  output logic [WIDTH-1:0]       dout,
  output logic                   full,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wr_ptr, rd_ptr;

  assign full  = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rd_ptr];

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + PW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push && !full)  wr_ptr <= next_ptr(wr_ptr);
      if (pop && !empty)  rd_ptr <= next_ptr(rd_ptr);
      case ({push && !full, pop && !empty})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full) mem[wr_ptr] <= din;
  end
endmodule
