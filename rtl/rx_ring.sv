// rx_ring: ring-buffer bookkeeping of one receive queue.
//
// The receive buffer is a pool of frame slots; the host gives each queue a
// contiguous range of slots [base, base+size) and so sets the queue's size.
// The ring keeps a write offset (next slot to fill), a read offset (oldest
// unread frame) and the occupancy. The dispatcher writes a frame into wr_slot
// and then pushes; the host reads the frame at head_slot and then pops.
// Queues as ring buffers and a host-set queue size follow the source design;
// the base/size representation in a shared slot pool is this design's choice.
//
// Timing: push, pop and cfg_we act on the next edge. Writing the range empties
// the queue. A queue of size 0 is always full. Push when full and pop when
// empty are ignored.
module rx_ring #(
  parameter int unsigned NUM_SLOTS = 64,
  localparam int unsigned SW = (NUM_SLOTS > 1) ? $clog2(NUM_SLOTS) : 1
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  logic [SW-1:0] cfg_base,
  input  logic [SW:0]   cfg_size,
  input  logic          push,
  input  logic          pop,
  output logic [SW-1:0] base,
  output logic [SW:0]   size,
  output logic [SW-1:0] wr_slot,
  output logic [SW-1:0] head_slot,
  output logic [SW:0]   count,
  output logic          full,
  output logic          empty
);

  logic [SW:0] wr_off, rd_off;

  assign full      = (count >= size);
  assign empty     = (count == '0);
  assign wr_slot   = SW'(base + wr_off[SW-1:0]);
  assign head_slot = SW'(base + rd_off[SW-1:0]);

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  function automatic logic [SW:0] next(input logic [SW:0] off, input logic [SW:0] sz);
    return (off + 1'b1 >= sz) ? '0 : off + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base   <= '0;
      size   <= '0;
      wr_off <= '0;
      rd_off <= '0;
      count  <= '0;
    end else if (cfg_we) begin
      base   <= cfg_base;
      size   <= cfg_size;
      wr_off <= '0;
      rd_off <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_off <= next(wr_off, size);
      if (do_pop)  rd_off <= next(rd_off, size);
      count <= count + (SW+1)'(do_push) - (SW+1)'(do_pop);
    end
  end

  a_push_room: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);

endmodule
