// req_fifo: Requests FIFO of the centralized transmitter.
//
// Every write request that the host makes to the message memory is also
// queued here, so the transmitter re-encodes only the front-ends whose
// message changed.  Because the message itself is fetched from the message
// memory afterwards, an entry only needs the front-end address: 7 bits x 32
// entries = 224 bits, which matches the embedded memory reported for this
// FIFO.  (The text calls the whole 136-bit bus request the thing that is
// stored; storing only its address is this design's reading of it.)
//
// Synchronous, single clock, show-ahead: rd_data shows the oldest entry while
// empty is low and pop removes it at the clock edge.  push while full and pop
// while empty are ignored (and flagged by assertions).  A push and a pop in
// the same cycle are both performed.
module req_fifo #(
  parameter int unsigned WIDTH = vlc_pkg::FE_AW,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned PW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [PW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wptr, rptr;
  logic             do_push, do_pop;

  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign empty   = (count == '0);
  assign full    = (count == (PW+1)'(DEPTH));
  assign rd_data = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= (wptr == PW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (rptr == PW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule
