// sync_fifo: single-clock first-in first-out buffer.
//
// Used as the pointer queue between the two routing phases (the paper reads
// the pointers of all fired neurons and active axons into a queue before
// fetching synapses), for the rows of fired neurons found by the sweep, and
// for output spikes. Depth and width are parameters; the data array is a
// plain memory. push is ignored when full and pop when empty (assertions
// flag both). `count` gives the fill level so producers can reserve room.
// Read data is the head entry, valid while !empty (first-word fall-through).
module sync_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 512,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign rdata   = mem[rptr];

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= wdata;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) pop  |-> !empty);

endmodule
