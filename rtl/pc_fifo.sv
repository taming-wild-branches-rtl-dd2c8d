// pc_fifo -- first-in first-out queue of H2P-active PCs.
//
// When the identification table flags a branch, its PC is queued here until
// an H2P cache slot can take it (immediately if a slot is free, otherwise
// when an entry becomes evictable). The design has two such queues, one in
// front of the local-history cache and one in front of the global-history
// cache, each 64 entries of 62-bit PCs as the paper's storage budget lists.
// The memory is a circular buffer with read and write pointers and a count.
//
// Interface: `push`/`din` enqueue, `pop` dequeues the head shown on `dout`
// (combinational read of the head). Pushing while full and popping while
// empty are not allowed (asserted); the caller drops a PC it cannot queue.
// A simultaneous push and pop is allowed in any state that permits each.
module pc_fifo
  import bullseye_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  pc_t  din,
  input  logic pop,
  output pc_t  dout,
  output logic empty,
  output logic full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned PTR_W = $clog2(DEPTH);

  pc_t mem [DEPTH];
  logic [PTR_W-1:0] rd_ptr, wr_ptr;

  assign empty = (count == 0);
  assign full  = (count == (PTR_W+1)'(DEPTH));
  assign dout  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == PTR_W'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == PTR_W'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PTR_W+1)'(push) - (PTR_W+1)'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
