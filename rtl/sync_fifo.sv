// sync_fifo: single-clock first-in first-out buffer with show-ahead output.
//
// rd_data always shows the oldest entry while empty is low; a pop removes it
// on the next edge. A push when full and a pop when empty are ignored (and
// flagged by assertions). count gives the occupancy. Storage is a plain array
// of DEPTH entries with wrapping read and write pointers.
//
// Interface and timing: push/wr_data and pop act on the clock edge; full,
// empty, count and rd_data are registered state, valid in the cycle after.
// A push and a pop in the same cycle are both performed. This is a helper of
// the dispatcher (hold and decision FIFOs); the source design has no such
// block, so everything here is this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
)(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             full,
  output logic             empty,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rp];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
