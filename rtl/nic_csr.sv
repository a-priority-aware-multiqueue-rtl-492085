// nic_csr: the host's configuration and status registers.
//
// The two configuration paths of the design - tuning of the queues and
// transfer of port-to-process mappings - are both writes on this register
// bus, issued by the driver when a socket is bound or freed, at any time
// while traffic flows. The file holds per-queue enables (the OS's choice of
// how many queues are in use), the slot range (size) and moderation settings
// of each queue, and the interrupt mask; map entries and queue ranges are
// forwarded as write strobes to the distribution map and rings, which hold
// them. Reads return interrupt cause, queue status, head-frame length, map
// entries and counters of delivered and dropped frames. The register map
// (nic_pkg) and the bus are this design's choices.
//
// Bus: single-cycle, csr_we with csr_addr/csr_wdata writes on the edge;
// csr_rdata is combinational from csr_addr. Writing QR_POP of a queue
// releases its head frame; writing A_IRQ_CAUSE clears the bits written as 1.
// Bits a register does not define are ignored on write and read as 0, so
// some bits of csr_wdata (e.g. [30:18] at the defaults) are never used.
module nic_csr
  import nic_pkg::*;
#(
  parameter int unsigned NUM_QUEUES  = 4,
  parameter int unsigned MAP_ENTRIES = 8,
  parameter int unsigned NUM_SLOTS   = 64,
  localparam int unsigned QW = (NUM_QUEUES > 1) ? $clog2(NUM_QUEUES) : 1,
  localparam int unsigned IW = (MAP_ENTRIES > 1) ? $clog2(MAP_ENTRIES) : 1,
  localparam int unsigned SW = (NUM_SLOTS > 1) ? $clog2(NUM_SLOTS) : 1
)(
  input  logic                  clk,
  input  logic                  rst_n,
  // host bus
  input  logic                  csr_we,
  input  logic [7:0]            csr_addr,
  input  logic [31:0]           csr_wdata,
  output logic [31:0]           csr_rdata,
  // queue configuration
  output logic [NUM_QUEUES-1:0] q_enable,
  output mod_cfg_t              mod_cfg   [NUM_QUEUES],
  output logic [NUM_QUEUES-1:0] ring_cfg_we,
  output logic [SW-1:0]         ring_cfg_base,
  output logic [SW:0]           ring_cfg_size,
  output logic [NUM_QUEUES-1:0] q_pop,
  input  logic [SW-1:0]         q_base    [NUM_QUEUES],
  input  logic [SW:0]           q_size    [NUM_QUEUES],
  input  logic [SW:0]           q_count   [NUM_QUEUES],
  input  logic [SW-1:0]         q_head    [NUM_QUEUES],
  input  logic [CNT_W-1:0]      q_pending [NUM_QUEUES],
  output logic [SW-1:0]         len_rslot,
  input  logic [15:0]           len_rdata,
  // distribution map
  output logic                  map_we,
  output logic [IW-1:0]         map_idx,
  output logic                  map_valid,
  output logic [QW-1:0]         map_queue,
  output logic [15:0]           map_port,
  input  logic [31:0]           map_rd_entry,
  // interrupts
  output logic [NUM_QUEUES-1:0] irq_mask,
  output logic                  irq_clr_we,
  output logic [NUM_QUEUES-1:0] irq_clr,
  input  logic [NUM_QUEUES-1:0] irq_cause,
  // frame results
  input  logic                  commit,
  input  logic                  drop,
  input  drop_reason_e          drop_reason
);

  localparam int unsigned NDROP = 5;   // DROP_BADHDR .. DROP_OVERSZ

  logic [31:0] drop_cnt [NDROP];
  logic [31:0] accepted;

  // ---------------------------------------------------------- decode
  logic          is_q, is_map;
  logic [QW-1:0] sel_q;
  logic [2:0]    sel_r;
  logic [7:0]    q_off;

  assign q_off  = csr_addr - A_Q_BASE;
  assign is_q   = csr_addr >= A_Q_BASE && 32'(q_off[7:3]) < NUM_QUEUES && csr_addr < A_MAP_BASE;
  assign sel_q  = QW'(q_off[7:3]);
  assign sel_r  = q_off[2:0];
  assign is_map = csr_addr >= A_MAP_BASE && 32'(csr_addr - A_MAP_BASE) < MAP_ENTRIES;

  // strobes to blocks that hold their own configuration
  always_comb begin
    ring_cfg_we   = '0;
    q_pop         = '0;
    ring_cfg_base = csr_wdata[SW-1:0];
    ring_cfg_size = csr_wdata[8 +: SW+1];
    if (csr_we && is_q && sel_r == QR_RANGE) ring_cfg_we[sel_q] = 1'b1;
    if (csr_we && is_q && sel_r == QR_POP)   q_pop[sel_q]       = 1'b1;
  end

  assign map_we     = csr_we && is_map;
  assign map_idx    = IW'(csr_addr - A_MAP_BASE);
  assign map_valid  = csr_wdata[31];
  assign map_queue  = csr_wdata[16 +: QW];
  assign map_port   = csr_wdata[15:0];
  assign irq_clr_we = csr_we && csr_addr == A_IRQ_CAUSE;
  assign irq_clr    = csr_wdata[NUM_QUEUES-1:0];
  assign len_rslot  = q_head[sel_q];

  // ---------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_enable <= '0;
      irq_mask <= '0;
      for (int q = 0; q < NUM_QUEUES; q++) mod_cfg[q] <= '0;
    end else if (csr_we) begin
      if (csr_addr == A_Q_ENABLE) q_enable <= csr_wdata[NUM_QUEUES-1:0];
      if (csr_addr == A_IRQ_MASK) irq_mask <= csr_wdata[NUM_QUEUES-1:0];
      if (is_q) begin
        unique case (sel_r)
          QR_ABS: begin
            mod_cfg[sel_q].abs_en <= csr_wdata[31];
            mod_cfg[sel_q].abs_us <= csr_wdata[TIMER_W-1:0];
          end
          QR_PKT: begin
            mod_cfg[sel_q].pkt_en <= csr_wdata[31];
            mod_cfg[sel_q].pkt_us <= csr_wdata[TIMER_W-1:0];
          end
          QR_CNT: begin
            mod_cfg[sel_q].cnt_en  <= csr_wdata[31];
            mod_cfg[sel_q].cnt_thr <= csr_wdata[CNT_W-1:0];
          end
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      accepted <= '0;
      for (int i = 0; i < NDROP; i++) drop_cnt[i] <= '0;
    end else begin
      if (commit) accepted <= accepted + 1;
      if (drop && drop_reason != DROP_NONE)
        drop_cnt[int'(drop_reason) - 1] <= drop_cnt[int'(drop_reason) - 1] + 1;
    end
  end

  // ---------------------------------------------------------- read mux
  always_comb begin
    csr_rdata = '0;
    if (is_map) begin
      csr_rdata = map_rd_entry;
    end else if (is_q) begin
      unique case (sel_r)
        QR_RANGE:   csr_rdata = {16'd0, 8'(q_size[sel_q]), 8'(q_base[sel_q])};
        QR_ABS:     csr_rdata = {mod_cfg[sel_q].abs_en, 15'd0, mod_cfg[sel_q].abs_us};
        QR_PKT:     csr_rdata = {mod_cfg[sel_q].pkt_en, 15'd0, mod_cfg[sel_q].pkt_us};
        QR_CNT:     csr_rdata = {mod_cfg[sel_q].cnt_en, 23'd0, mod_cfg[sel_q].cnt_thr};
        QR_STATUS:  csr_rdata = {8'd0, 8'(q_pending[sel_q]), 8'(q_head[sel_q]), 8'(q_count[sel_q])};
        QR_HEADLEN: csr_rdata = {16'd0, len_rdata};
        default:    csr_rdata = '0;
      endcase
    end else if (csr_addr >= A_DROP_BASE && csr_addr < A_DROP_BASE + 8'(NDROP)) begin
      csr_rdata = drop_cnt[3'(csr_addr - A_DROP_BASE)];
    end else begin
      unique case (csr_addr)
        A_IRQ_CAUSE: csr_rdata = 32'(irq_cause);
        A_IRQ_MASK:  csr_rdata = 32'(irq_mask);
        A_Q_ENABLE:  csr_rdata = 32'(q_enable);
        A_ACCEPTED:  csr_rdata = accepted;
        default:     csr_rdata = '0;
      endcase
    end
  end

endmodule
