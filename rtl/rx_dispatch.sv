// rx_dispatch: assigns each received frame to its queue or drops it.
//
// Frame bytes from the MAC enter a hold FIFO while the parser and distribution
// map classify the frame; each classification enters a small decision FIFO in
// frame order. The drain side takes the decision of the frame at the head of
// the hold FIFO, checks that the destination queue still has a free slot, and
// then moves the frame byte by byte into that slot of the receive buffer. At
// the frame's last byte it either commits a descriptor (the frame's length)
// to the queue or reports a drop with its reason: bad header, no registered
// port, queue full, longer than a slot, or MAC error; when several apply, the
// first in that order is reported. Dropping unmapped frames
// before any interrupt follows the source design; the hold-FIFO structure,
// drop-on-full and the size limit are this design's choices.
//
// Timing: one byte per cycle in and out. A frame waits at the FIFO head only
// until its own header is classified (<= 79 cycles after its first byte).
// s_ready falls when the hold FIFO is full or the decision FIFO is nearly
// full. commit and drop are one-cycle pulses in the cycle the last byte is
// drained; the ring and descriptor are updated on that edge, so the next
// frame's full check already sees them.
module rx_dispatch
  import nic_pkg::*;
#(
  parameter int unsigned NUM_QUEUES = 4,
  parameter int unsigned NUM_SLOTS  = 64,
  parameter int unsigned SLOT_BYTES = 2048,
  parameter int unsigned HOLD_DEPTH = 128,
  parameter int unsigned DEC_DEPTH  = 8,
  localparam int unsigned QW = (NUM_QUEUES > 1) ? $clog2(NUM_QUEUES) : 1,
  localparam int unsigned SW = (NUM_SLOTS > 1) ? $clog2(NUM_SLOTS) : 1,
  localparam int unsigned OW = $clog2(SLOT_BYTES),
  localparam int unsigned AW = SW + OW
)(
  input  logic                  clk,
  input  logic                  rst_n,
  // frame stream from the MAC
  input  logic [7:0]            s_data,
  input  logic                  s_valid,
  input  logic                  s_last,
  input  logic                  s_err,     // with s_last: MAC rejected frame
  output logic                  s_ready,
  // classification, one per frame, in frame order
  input  logic                  dec_valid,
  input  rx_dec_t               dec,
  // queue state
  input  logic [NUM_QUEUES-1:0] q_full,
  input  logic [SW-1:0]         q_wr_slot [NUM_QUEUES],
  // receive buffer write
  output logic                  buf_we,
  output logic [AW-1:0]         buf_waddr,
  output logic [7:0]            buf_wdata,
  // result per frame
  output logic                  commit,
  output logic [QW-1:0]         commit_q,
  output logic [SW-1:0]         commit_slot,
  output logic [15:0]           commit_len,
  output logic                  drop,
  output drop_reason_e          drop_reason
);

  initial begin
    assert (SLOT_BYTES == (1 << OW)) else $error("SLOT_BYTES must be a power of two");
    assert (SLOT_BYTES < 65536)      else $error("frame length is 16 bits");
  end

  // ---------------------------------------------------------- hold FIFO
  typedef struct packed {
    logic       err;
    logic       last;
    logic [7:0] data;
  } hold_t;

  hold_t hold_out;
  logic  hold_full, hold_empty, hold_pop;
  logic  dec_empty, dec_pop, dec_room;
  logic [$clog2(DEC_DEPTH):0] dec_count;
  rx_dec_t dec_head;

  // keep room for the classification of the frame now arriving
  assign dec_room = 32'(dec_count) + 2 <= DEC_DEPTH;
  assign s_ready  = !hold_full && dec_room;

  sync_fifo #(.WIDTH($bits(hold_t)), .DEPTH(HOLD_DEPTH)) u_hold (
    .clk, .rst_n,
    .push(s_valid && s_ready),
    .wr_data(hold_t'{err: s_err, last: s_last, data: s_data}),
    .pop(hold_pop), .rd_data(hold_out),
    .full(hold_full), .empty(hold_empty), .count()
  );

  sync_fifo #(.WIDTH($bits(rx_dec_t)), .DEPTH(DEC_DEPTH)) u_dec (
    .clk, .rst_n,
    .push(dec_valid), .wr_data(dec),
    .pop(dec_pop), .rd_data(dec_head),
    .full(), .empty(dec_empty), .count(dec_count)
  );

  // ---------------------------------------------------------- drain
  logic            in_frame;      // past the first byte of the head frame
  drop_reason_e    cur_reason;
  logic [QW-1:0]   cur_q;
  logic [SW-1:0]   cur_slot;
  logic [15:0]     off;           // bytes of the head frame drained so far

  // decision in effect for the byte being drained
  drop_reason_e  eff_reason;
  logic [QW-1:0] eff_q;
  logic [SW-1:0] eff_slot;
  logic          can_drain;

  always_comb begin
    if (in_frame) begin
      eff_reason = cur_reason;
      eff_q      = cur_q;
      eff_slot   = cur_slot;
    end else begin
      eff_q      = QW'(dec_head.qid);
      eff_slot   = q_wr_slot[eff_q];
      eff_reason = dec_head.reason;
      if (eff_reason == DROP_NONE && q_full[eff_q]) eff_reason = DROP_FULL;
    end
  end

  assign can_drain = !hold_empty && (in_frame || !dec_empty);
  assign hold_pop  = can_drain;
  assign dec_pop   = can_drain && !in_frame;

  logic fits;
  assign fits = 32'(off) < SLOT_BYTES;

  assign buf_we    = can_drain && eff_reason == DROP_NONE && fits;
  assign buf_waddr = {eff_slot, off[OW-1:0]};
  assign buf_wdata = hold_out.data;

  drop_reason_e final_reason;
  always_comb begin
    final_reason = eff_reason;
    if (final_reason == DROP_NONE) begin
      if (!fits)              final_reason = DROP_OVERSZ;
      else if (hold_out.err)  final_reason = DROP_MACERR;
    end
  end

  assign commit      = can_drain && hold_out.last && final_reason == DROP_NONE;
  assign commit_q    = eff_q;
  assign commit_slot = eff_slot;
  assign commit_len  = off + 16'd1;
  assign drop        = can_drain && hold_out.last && final_reason != DROP_NONE;
  assign drop_reason = final_reason;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame   <= 1'b0;
      cur_reason <= DROP_NONE;
      cur_q      <= '0;
      cur_slot   <= '0;
      off        <= '0;
    end else if (can_drain) begin
      if (hold_out.last) begin
        in_frame <= 1'b0;
        off      <= '0;
      end else begin
        in_frame   <= 1'b1;
        cur_reason <= (eff_reason == DROP_NONE && !fits) ? DROP_OVERSZ : eff_reason;
        cur_q      <= eff_q;
        cur_slot   <= eff_slot;
        if (off != 16'hFFFF) off <= off + 16'd1;
      end
    end
  end

  a_commit_room: assert property (@(posedge clk) disable iff (!rst_n)
                                  commit |-> !q_full[commit_q]);

endmodule
