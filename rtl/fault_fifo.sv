// fault_fifo: the storage of the receiver-side page-fault log.
//
// A synchronous first-in first-out queue, DEPTH entries of WIDTH bits; the
// defaults, 512 x 128, are the sizes the paper gives for its log. It is a
// memory array addressed by a write and a read pointer, with an occupancy
// counter that gives full and empty. The head entry is read combinationally
// (first-word fall-through): an entry pushed in cycle t is on rd_data, and
// empty is low, from cycle t+1. push and pop may act in the same cycle.
// pop while empty is ignored; push while full is a caller error (checked by
// an assertion) and is ignored too. How the queue is built is this design's
// choice: the paper gives only its depth and width.
module fault_fifo #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 128
) (
  input  logic                       clk,
  input  logic                       rst_n,    // synchronous, active low
  input  logic                       push,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       pop,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rd_ptr];

  function automatic logic [PTR_W-1:0] next_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  a_no_push_when_full : assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("fault_fifo: push while full");

endmodule
