// rx_buffer: the NIC's receive buffer.
//
// NUM_SLOTS frame slots of SLOT_BYTES bytes each, byte-addressed as
// {slot, offset}, plus one 16-bit descriptor word per slot holding the length
// of the frame stored there. The slots are shared out among the queues by the
// rings (rx_ring), which is how the buffer is "divided into multiple queues".
// The dispatcher writes frame bytes and descriptors; the host reads them.
// Sizes and the descriptor layout are this design's choices; the memory is
// written as arrays for mapping onto on-chip SRAM.
//
// Timing: writes on the clock edge. Byte reads have one cycle of latency
// (synchronous SRAM read); descriptor reads are combinational.
module rx_buffer #(
  parameter int unsigned NUM_SLOTS  = 64,
  parameter int unsigned SLOT_BYTES = 2048,
  localparam int unsigned SW = (NUM_SLOTS > 1) ? $clog2(NUM_SLOTS) : 1,
  localparam int unsigned OW = $clog2(SLOT_BYTES),
  localparam int unsigned AW = SW + OW
)(
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [7:0]    wdata,
  input  logic [AW-1:0] raddr,
  output logic [7:0]    rdata,
  input  logic          len_we,
  input  logic [SW-1:0] len_wslot,
  input  logic [15:0]   len_wdata,
  input  logic [SW-1:0] len_rslot,
  output logic [15:0]   len_rdata
);

  logic [7:0]  mem [NUM_SLOTS * SLOT_BYTES];
  logic [15:0] len [NUM_SLOTS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

  always_ff @(posedge clk) begin
    if (len_we) len[len_wslot] <= len_wdata;
  end

  assign len_rdata = len[len_rslot];

endmodule
