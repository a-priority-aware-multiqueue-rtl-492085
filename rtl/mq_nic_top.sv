// mq_nic_top: priority-aware multiqueue NIC receive path.
//
// Frames arriving from the MAC are parsed and validated (rx_parser); their
// destination port is looked up in the distribution map (dist_map), which
// names the queue of the process that bound the port. The dispatcher
// (rx_dispatch) writes each accepted frame into the next free slot of its
// queue's ring (rx_ring) in the shared receive buffer (rx_buffer), and drops
// frames with a bad header, no registered port, a disabled or full queue, or a
// MAC error. Every queue has its own interrupt moderator (irq_moderator): a
// critical queue interrupts on every packet, lower-priority queues coalesce
// packets under an absolute timer, a packet timer and a count threshold.
// irq_ctrl merges the queues' requests into the single CPU interrupt, and
// nic_csr is the host's register interface for configuring queues and the
// map and for reading frames' descriptors. usec_tick is the timers' 1 us base.
//
// Interfaces: byte stream from the MAC (s_*, s_err on the last byte marks a
// frame the MAC rejected), single-cycle register bus (csr_*), byte read port
// into the receive buffer (buf_raddr = {slot, offset}, data one cycle later),
// and the interrupt line irq. The MAC/PHY and the host CPU are outside.
module mq_nic_top
  import nic_pkg::*;
#(
  parameter int unsigned NUM_QUEUES  = 4,
  parameter int unsigned MAP_ENTRIES = 8,
  parameter int unsigned NUM_SLOTS   = 64,
  parameter int unsigned SLOT_BYTES  = 2048,
  parameter int unsigned HOLD_DEPTH  = 128,
  parameter int unsigned CLK_MHZ     = 125,
  localparam int unsigned QW = (NUM_QUEUES > 1) ? $clog2(NUM_QUEUES) : 1,
  localparam int unsigned IW = (MAP_ENTRIES > 1) ? $clog2(MAP_ENTRIES) : 1,
  localparam int unsigned SW = (NUM_SLOTS > 1) ? $clog2(NUM_SLOTS) : 1,
  localparam int unsigned AW = SW + $clog2(SLOT_BYTES)
)(
  input  logic          clk,
  input  logic          rst_n,
  // from the MAC
  input  logic [7:0]    s_data,
  input  logic          s_valid,
  input  logic          s_last,
  input  logic          s_err,
  output logic          s_ready,
  // host register bus
  input  logic          csr_we,
  input  logic [7:0]    csr_addr,
  input  logic [31:0]   csr_wdata,
  output logic [31:0]   csr_rdata,
  // host read of frame bytes
  input  logic [AW-1:0] buf_raddr,
  output logic [7:0]    buf_rdata,
  // to the CPU
  output logic          irq
);

  // ---------------------------------------------------------- time base
  logic tick_us;
  usec_tick #(.CLK_MHZ(CLK_MHZ)) u_tick (.clk, .rst_n, .tick(tick_us));

  // ---------------------------------------------------------- classification
  logic     meta_valid;
  rx_meta_t meta;
  rx_parser u_parser (
    .clk, .rst_n,
    .beat(s_valid && s_ready), .data(s_data), .last(s_last),
    .meta_valid, .meta
  );

  logic                  map_we, map_valid, lk_hit;
  logic [IW-1:0]         map_idx;
  logic [QW-1:0]         map_queue, lk_queue;
  logic [15:0]           map_port;
  logic [31:0]           map_rd_entry;
  logic [NUM_QUEUES-1:0] q_enable;

  dist_map #(.MAP_ENTRIES(MAP_ENTRIES), .NUM_QUEUES(NUM_QUEUES)) u_map (
    .clk, .rst_n,
    .cfg_we(map_we), .cfg_idx(map_idx), .cfg_valid(map_valid),
    .cfg_queue(map_queue), .cfg_port(map_port),
    .cfg_rd_idx(IW'(csr_addr - A_MAP_BASE)), .cfg_rd_entry(map_rd_entry),
    .lk_port(meta.dst_port), .lk_hit, .lk_queue
  );

  rx_dec_t dec;
  always_comb begin
    dec.qid = QID_W'(lk_queue);
    if (!meta.hdr_ok)                      dec.reason = DROP_BADHDR;
    else if (!lk_hit || !q_enable[lk_queue]) dec.reason = DROP_NOMAP;
    else                                   dec.reason = DROP_NONE;
  end

  // ---------------------------------------------------------- queues
  logic [NUM_QUEUES-1:0] q_full, ring_cfg_we, q_pop, q_push;
  logic [SW-1:0]         ring_cfg_base;
  logic [SW:0]           ring_cfg_size;
  logic [SW-1:0]         q_base [NUM_QUEUES];
  logic [SW:0]           q_size [NUM_QUEUES];
  logic [SW-1:0]         q_wr_slot [NUM_QUEUES];
  logic [SW-1:0]         q_head [NUM_QUEUES];
  logic [SW:0]           q_count [NUM_QUEUES];
  logic [CNT_W-1:0]      q_pending [NUM_QUEUES];
  logic [NUM_QUEUES-1:0] q_fire;
  mod_cfg_t              mod_cfg [NUM_QUEUES];

  logic                  commit, drop;
  logic [QW-1:0]         commit_q;
  logic [SW-1:0]         commit_slot;
  logic [15:0]           commit_len;
  drop_reason_e          drop_reason;

  always_comb begin
    q_push = '0;
    q_push[commit_q] = commit;
  end

  for (genvar q = 0; q < NUM_QUEUES; q++) begin : g_q
    rx_ring #(.NUM_SLOTS(NUM_SLOTS)) u_ring (
      .clk, .rst_n,
      .cfg_we(ring_cfg_we[q]), .cfg_base(ring_cfg_base), .cfg_size(ring_cfg_size),
      .push(q_push[q]), .pop(q_pop[q]),
      .base(q_base[q]), .size(q_size[q]),
      .wr_slot(q_wr_slot[q]), .head_slot(q_head[q]), .count(q_count[q]),
      .full(q_full[q]), .empty()
    );

    irq_moderator u_mod (
      .clk, .rst_n,
      .cfg(mod_cfg[q]), .tick_us, .pkt_in(q_push[q]),
      .fire(q_fire[q]), .pending(q_pending[q])
    );
  end

  // ---------------------------------------------------------- data path
  logic          buf_we;
  logic [AW-1:0] buf_waddr;
  logic [7:0]    buf_wdata;
  logic [SW-1:0] len_rslot;
  logic [15:0]   len_rdata;

  rx_dispatch #(
    .NUM_QUEUES(NUM_QUEUES), .NUM_SLOTS(NUM_SLOTS),
    .SLOT_BYTES(SLOT_BYTES), .HOLD_DEPTH(HOLD_DEPTH)
  ) u_dispatch (
    .clk, .rst_n,
    .s_data, .s_valid, .s_last, .s_err, .s_ready,
    .dec_valid(meta_valid), .dec,
    .q_full, .q_wr_slot,
    .buf_we, .buf_waddr, .buf_wdata,
    .commit, .commit_q, .commit_slot, .commit_len,
    .drop, .drop_reason
  );

  rx_buffer #(.NUM_SLOTS(NUM_SLOTS), .SLOT_BYTES(SLOT_BYTES)) u_buf (
    .clk,
    .we(buf_we), .waddr(buf_waddr), .wdata(buf_wdata),
    .raddr(buf_raddr), .rdata(buf_rdata),
    .len_we(commit), .len_wslot(commit_slot), .len_wdata(commit_len),
    .len_rslot, .len_rdata
  );

  // ---------------------------------------------------------- host side
  logic [NUM_QUEUES-1:0] irq_mask, irq_clr, irq_cause;
  logic                  irq_clr_we;

  irq_ctrl #(.NUM_QUEUES(NUM_QUEUES)) u_irq (
    .clk, .rst_n,
    .fire(q_fire), .mask(irq_mask),
    .clr_we(irq_clr_we), .clr(irq_clr),
    .cause(irq_cause), .irq
  );

  nic_csr #(
    .NUM_QUEUES(NUM_QUEUES), .MAP_ENTRIES(MAP_ENTRIES), .NUM_SLOTS(NUM_SLOTS)
  ) u_csr (
    .clk, .rst_n,
    .csr_we, .csr_addr, .csr_wdata, .csr_rdata,
    .q_enable, .mod_cfg,
    .ring_cfg_we, .ring_cfg_base, .ring_cfg_size, .q_pop,
    .q_base, .q_size, .q_count, .q_head, .q_pending,
    .len_rslot, .len_rdata,
    .map_we, .map_idx, .map_valid, .map_queue, .map_port, .map_rd_entry,
    .irq_mask, .irq_clr_we, .irq_clr, .irq_cause,
    .commit, .drop, .drop_reason
  );

endmodule
