// asc_queue: first-in first-out buffer used for the encoder's three queues.
//
// The encoder keeps the raw input values of a block (input queue) until the
// block's endpoints are known, and the indices of both scales (linear and
// log-linear index queues) until the loss comparison has chosen one. When the
// hardware is scaled to LANES values per cycle the paper widens these queues
// by LANES and shortens them by the same factor, so one entry here is a whole
// beat of DW = LANES * element-width bits. The paper names the queues; their
// organisation (a circular register array with read and write pointers) is
// this design's choice.
//
// Interface: push writes wdata at the tail; pop removes the head. rdata shows
// the head combinationally while the queue is not empty. A push and a pop in
// the same cycle are allowed even when full. count is the number of entries.
// DEPTH must be a power of two. The assertions check that the user never
// pushes into a full queue or pops an empty one.
//
// Lint note: rst_n resets the pointers asynchronously and also disables the
// assertions; lint reports it as a net used both ways. No logic uses it
// synchronously.
module asc_queue #(
  parameter int unsigned DW    = 8,
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [DW-1:0]              wdata,
  input  logic                       pop,
  output logic [DW-1:0]              rdata,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH):0]     count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assign rdata = mem[rptr];
  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));

  // A beat may not be lost or invented.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push && full |-> pop);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
