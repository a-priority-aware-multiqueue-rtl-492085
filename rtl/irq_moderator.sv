// irq_moderator: priority-dependent interrupt moderation of one queue.
//
// Packets committed to the queue are coalesced and announced with a single
// interrupt. Three conditions can end a coalescing window, each enabled and
// set by the host per queue (nic_pkg::mod_cfg_t):
//   * absolute timer - started by the first packet of a window and not
//     restarted by later ones, so under steady load the queue interrupts once
//     per period;
//   * packet timer   - restarted by every packet, so it expires after a gap;
//   * count threshold - the window holds cnt_thr packets.
// With none enabled every packet interrupts at once (no moderation). An
// enabled timer of 0 also interrupts on the next cycle, which is how a
// critical queue is configured. The two timers and the counter threshold are
// the source design's moderation parameters; their exact start/stop rules,
// OR-combination and microsecond units are this design's reading of them.
//
// Timing: timers count tick_us pulses, so a timer of N fires N-1 to N us after
// it starts. fire is a registered one-cycle pulse, one cycle after the
// condition holds; the window (pending count, timers) is cleared on that edge.
// A packet arriving in the firing cycle opens the next window.
module irq_moderator
  import nic_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  mod_cfg_t         cfg,
  input  logic             tick_us,
  input  logic             pkt_in,
  output logic             fire,
  output logic [CNT_W-1:0] pending
);

  logic [TIMER_W-1:0] abs_cnt, pkt_cnt;
  logic               no_mod, abs_hit, pkt_hit, cnt_hit, cond;

  assign no_mod  = !cfg.abs_en && !cfg.pkt_en && !cfg.cnt_en;
  assign abs_hit = cfg.abs_en && abs_cnt == '0;
  assign pkt_hit = cfg.pkt_en && pkt_cnt == '0;
  assign cnt_hit = cfg.cnt_en && pending >= cfg.cnt_thr;
  assign cond    = pending != '0 && (no_mod || abs_hit || pkt_hit || cnt_hit);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
      abs_cnt <= '0;
      pkt_cnt <= '0;
      fire    <= 1'b0;
    end else begin
      fire <= cond;
      if (tick_us) begin
        if (abs_cnt != '0) abs_cnt <= abs_cnt - 1'b1;
        if (pkt_cnt != '0) pkt_cnt <= pkt_cnt - 1'b1;
      end
      if (cond) begin
        pending <= CNT_W'(pkt_in);
        if (pkt_in) begin
          abs_cnt <= cfg.abs_us;
          pkt_cnt <= cfg.pkt_us;
        end
      end else if (pkt_in) begin
        if (pending != '1) pending <= pending + 1'b1;
        if (pending == '0) abs_cnt <= cfg.abs_us;
        pkt_cnt <= cfg.pkt_us;
      end
    end
  end

endmodule
