// act_queue: the activation queue at the input of each PE.
//
// A FIFO of broadcast non-zero activations (value, column index). The CCU
// pushes the same entry into every PE's queue and holds the broadcast while
// any queue reports full, so each PE can run ahead or fall behind by up to
// DEPTH columns; this is what evens out the per-column load imbalance between
// PEs. The PE always works on the head entry (dout, valid when !empty) and
// pops it when its pointer read unit takes it. Push and pop may happen in the
// same cycle. Depth 8 is the paper's choice; the circular-buffer structure is
// this design's. Pushing into a full queue is a protocol error (assertion).
module act_queue
  import eie_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  nz_t  din,
  output logic full,
  input  logic pop,
  output nz_t  dout,
  output logic empty
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  nz_t             buffer [DEPTH];
  logic [AW-1:0]   wptr, rptr;
  logic [AW:0]     count;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign dout  = buffer[rptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) begin
        buffer[wptr] <= din;
        wptr         <= next_ptr(wptr);
      end
      if (pop) rptr <= next_ptr(rptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("act_queue: push into a full queue");
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("act_queue: pop from an empty queue");

endmodule
