// nic_pkg: types and constants shared by the priority-aware multiqueue NIC.
//
// Holds the header constants the parser checks, the per-queue interrupt
// moderation configuration, the per-frame metadata and classification records
// that travel from the parser through the distribution map to the dispatcher,
// the drop reasons, and the host register map. Widths that the source design
// leaves open (16-bit microsecond timers, 8-bit count threshold, 32-bit
// register bus) are this implementation's choices.
package nic_pkg;

  // ---------------------------------------------------------------- headers
  localparam int unsigned ETH_HDR_BYTES  = 14;
  localparam logic [15:0] ETYPE_IPV4     = 16'h0800;
  localparam logic [7:0]  IP_PROTO_TCP   = 8'd6;
  localparam logic [7:0]  IP_PROTO_UDP   = 8'd17;

  // ---------------------------------------------------------- moderation
  localparam int unsigned TIMER_W = 16;   // microseconds, up to 65.5 ms
  localparam int unsigned CNT_W   = 8;    // coalesced-packet counter

  // Interrupt moderation settings of one queue. An enabled timer of 0 fires
  // on the cycle after a packet; with nothing enabled every packet fires.
  typedef struct packed {
    logic               abs_en;   // absolute timer: runs from the first packet
    logic [TIMER_W-1:0] abs_us;
    logic               pkt_en;   // packet timer: restarted by every packet
    logic [TIMER_W-1:0] pkt_us;
    logic               cnt_en;   // counter threshold
    logic [CNT_W-1:0]   cnt_thr;
  } mod_cfg_t;

  // ---------------------------------------------------- per-frame records
  typedef struct packed {
    logic        hdr_ok;          // Ethernet/IPv4/TCP-UDP header valid
    logic [15:0] dst_port;        // L4 destination port (valid when hdr_ok)
  } rx_meta_t;

  typedef enum logic [2:0] {
    DROP_NONE    = 3'd0,
    DROP_BADHDR  = 3'd1,          // failed header validation
    DROP_NOMAP   = 3'd2,          // port not registered or queue disabled
    DROP_FULL    = 3'd3,          // destination queue full
    DROP_MACERR  = 3'd4,          // MAC flagged the frame (FCS error)
    DROP_OVERSZ  = 3'd5           // longer than a buffer slot
  } drop_reason_e;

  localparam int unsigned QID_W = 8;      // queue index field in records

  // Classification of one frame, queued between parser and dispatcher.
  typedef struct packed {
    drop_reason_e     reason;     // DROP_NONE: deliver to queue
    logic [QID_W-1:0] qid;
  } rx_dec_t;

  // ---------------------------------------------------- register map
  // Word addresses on the 8-bit host register bus.
  localparam logic [7:0] A_IRQ_CAUSE  = 8'h01;  // R, write 1 to clear
  localparam logic [7:0] A_IRQ_MASK   = 8'h02;  // RW
  localparam logic [7:0] A_Q_ENABLE   = 8'h03;  // RW, one bit per queue
  localparam logic [7:0] A_DROP_BASE  = 8'h04;  // R, 0x04+reason-1: drop counters
  localparam logic [7:0] A_ACCEPTED   = 8'h0A;  // R, frames delivered
  localparam logic [7:0] A_Q_BASE     = 8'h10;  // queue q at 0x10 + 8*q
  localparam logic [2:0] QR_RANGE     = 3'd0;   // RW [7:0] base slot, [15:8] size
  localparam logic [2:0] QR_ABS       = 3'd1;   // RW [31] en, [15:0] us
  localparam logic [2:0] QR_PKT       = 3'd2;   // RW [31] en, [15:0] us
  localparam logic [2:0] QR_CNT       = 3'd3;   // RW [31] en, [7:0] threshold
  localparam logic [2:0] QR_STATUS    = 3'd4;   // R  [7:0] count, [15:8] head slot, [23:16] pending
  localparam logic [2:0] QR_HEADLEN   = 3'd5;   // R  [15:0] length of head frame
  localparam logic [2:0] QR_POP       = 3'd6;   // W  release the head frame
  localparam logic [7:0] A_MAP_BASE   = 8'h80;  // map entry m at 0x80+m:
                                                // [31] valid, [23:16] queue, [15:0] port
endpackage
