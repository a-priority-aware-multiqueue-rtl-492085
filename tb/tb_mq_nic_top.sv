// tb_mq_nic_top: end-to-end test of the multiqueue NIC at its default size.
//
// The testbench plays the MAC (a byte stream of generated frames) and the
// host: it configures four queues the way an RTOS would for four processes
// of falling priority (queue 0 critical and unmoderated, queue 1 with an
// absolute timer, queue 2 with a packet timer, queue 3 with a count threshold
// backed by an absolute timer), registers their ports in the distribution
// map, and runs an interrupt service routine that drains the interrupting
// queues over the register bus, reading every frame back from the buffer.
// Checks: every accepted frame arrives in its queue in order with its bytes
// and length; every other frame is counted under the right drop reason;
// every interrupt is explained by its queue's moderation rule at the right
// time (critical: within 3 cycles of the packet); moderated queues raise
// fewer interrupts than they receive packets. Phases then fill a queue to
// overflow, send an oversize frame, and change the mapping and the set of
// enabled queues at run time. Each mechanism must occur at least once.
//
// The four queues of falling priority and their three kinds of moderation
// follow the source design's evaluation setup; the timer values (20 us,
// 10 us, 4 packets / 100 us), the traffic mix and the host routine are
// chosen here to make every mechanism happen within a short simulation.
module tb_mq_nic_top;
  import nic_pkg::*;
  import tb_frame_pkg::*;

  localparam int Q = 4, SLOT_BYTES = 2048, CYC_US = 125;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;                       // 125 MHz

  logic [7:0]  s_data;
  logic        s_valid, s_last, s_err, s_ready;
  logic        csr_we;
  logic [7:0]  csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic [16:0] buf_raddr;
  logic [7:0]  buf_rdata;
  logic        irq;

  mq_nic_top dut (.*);

  int checks = 0, failures = 0;

  task automatic fail(string msg);
    failures++;
    $display("FAIL: %s", msg);
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- host bus
  task automatic csr_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask

  task automatic csr_rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); csr_addr = a; #1; d = csr_rdata;
  endtask

  function automatic logic [7:0] qa(int q, logic [2:0] r);
    return A_Q_BASE + 8'(8 * q) + 8'(r);
  endfunction

  // ------------------------------------------------------------- expectations
  bytes_t exp_q [Q][$];                // frames each queue should deliver
  int     exp_drop [8];                // by drop reason
  int     got_frames [Q];
  int     sent_to [Q];

  // ------------------------------------------------------------- MAC side
  task automatic send(bytes_t f, bit err, int gap_cycles);
    for (int i = 0; i < f.size(); i++) begin
      @(negedge clk);
      s_valid = 1; s_data = f[i]; s_last = (i == f.size() - 1); s_err = s_last && err;
      #1;
      while (!s_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk);
    s_valid = 0; s_last = 0; s_err = 0;
    repeat (gap_cycles) @(negedge clk);
  endtask

  // queue of a mapped port, -1 for none
  int port_q [int];

  // send one frame and record what should happen to it
  typedef enum int {K_GOOD, K_BADCSUM, K_MACERR, K_OVERSZ} kind_e;
  bit q_on [Q];
  int q_room [Q];                      // only tracked while the host is idle
  bit host_idle = 0;

  task automatic frame(logic [15:0] port, kind_e kind, int payload, int gap);
    frame_cfg_t c;
    bytes_t f;
    int q;
    c = good_cfg(port, payload, $urandom_range(255));
    if (kind == K_BADCSUM) c.bad_csum = 1;
    f = make_frame(c);
    q = port_q.exists(int'(port)) ? port_q[int'(port)] : -1;
    if (kind == K_BADCSUM)              exp_drop[DROP_BADHDR]++;
    else if (q < 0 || !q_on[q])         exp_drop[DROP_NOMAP]++;
    else if (host_idle && q_room[q] == 0) exp_drop[DROP_FULL]++;
    else if (kind == K_OVERSZ)          exp_drop[DROP_OVERSZ]++;
    else if (kind == K_MACERR)          exp_drop[DROP_MACERR]++;
    else begin
      exp_q[q].push_back(f);
      sent_to[q]++;
      if (host_idle) q_room[q]--;
    end
    send(f, kind == K_MACERR, gap);
  endtask

  // ------------------------------------------------------------- host side
  bit isr_on = 1;
  bit isr_busy = 0;
  int isr_runs = 0;

  task automatic service_queue(int q);
    logic [31:0] st, ln;
    bytes_t f;
    int avail;
    csr_rd(qa(q, QR_STATUS), st);
    avail = int'(st[7:0]);
    for (int n = 0; n < avail; n++) begin
      logic [5:0] slot;
      csr_rd(qa(q, QR_STATUS), st);
      slot = st[13:8];
      csr_rd(qa(q, QR_HEADLEN), ln);
      checks++;
      if (exp_q[q].size() == 0) begin
        fail($sformatf("queue %0d delivered an unexpected frame", q));
      end else begin
        f = exp_q[q].pop_front();
        if (int'(ln[15:0]) != f.size())
          fail($sformatf("queue %0d length %0d expected %0d", q, ln[15:0], f.size()));
        else begin
          // pipelined reads: address i goes out while byte i-1 comes back
          for (int i = 0; i <= f.size(); i++) begin
            @(negedge clk);
            if (i > 0 && buf_rdata != f[i-1]) begin
              fail($sformatf("queue %0d frame byte %0d: %h expected %h", q, i - 1, buf_rdata, f[i-1]));
              break;
            end
            buf_raddr = {slot, 11'(i)};
          end
        end
      end
      got_frames[q]++;
      csr_wr(qa(q, QR_POP), 0);
    end
  endtask

  initial begin : isr
    logic [31:0] cause;
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (irq && isr_on) begin
        isr_busy = 1;
        isr_runs++;
        csr_rd(A_IRQ_CAUSE, cause);
        csr_wr(A_IRQ_CAUSE, cause);              // acknowledge first
        for (int q = 0; q < Q; q++) if (cause[q]) service_queue(q);
        isr_busy = 0;
      end
    end
  end

  // ------------------------------------------------------------- moderation monitor
  // Mirrors the timing of the moderators: fire in cycle c answers the window
  // holding the packets committed up to cycle c-2.
  localparam int ABS1 = 20, PKT2 = 10, CNT3 = 4, ABS3 = 100;
  longint cyc = 0;
  longint first_t [Q], last_t [Q];
  int     win_n [Q];
  logic [Q-1:0] com_d;                 // commit of the previous cycle, per queue
  int     irqs [Q], pkts [Q];
  int     n_imm = 0, n_abs = 0, n_pkt = 0, n_cnt = 0, n_wrap = 0, max_hold = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      com_d <= '0;
      for (int q = 0; q < Q; q++) begin win_n[q] = 0; irqs[q] = 0; pkts[q] = 0; end
    end else begin
      for (int q = 0; q < Q; q++) begin
        if (dut.q_fire[q]) begin
          int since_first, since_last;
          since_first = int'(cyc - first_t[q]);
          since_last = int'(cyc - last_t[q]);
          irqs[q]++;
          checks++;
          if (win_n[q] == 0) fail($sformatf("queue %0d interrupt with no packet", q));
          else case (q)
            0: begin
              n_imm++;
              if (since_last > 3) fail($sformatf("critical interrupt %0d cycles late", since_last));
            end
            1: begin
              n_abs++;
              if (since_first < (ABS1 - 1) * CYC_US || since_first > ABS1 * CYC_US + 3)
                fail($sformatf("queue 1 absolute timer fired after %0d cycles", since_first));
            end
            2: begin
              n_pkt++;
              if (since_last < (PKT2 - 1) * CYC_US || since_last > PKT2 * CYC_US + 3)
                fail($sformatf("queue 2 packet timer fired %0d cycles after last packet", since_last));
            end
            default: begin
              if (win_n[q] >= CNT3 && since_last <= 3) n_cnt++;
              else if (since_first >= (ABS3 - 1) * CYC_US && since_first <= ABS3 * CYC_US + 3) n_abs++;
              else fail($sformatf("queue 3 interrupt unexplained: %0d packets, %0d cycles", win_n[q], since_first));
            end
          endcase
          if (win_n[q] > max_hold && q != 0) max_hold = win_n[q];
          win_n[q] = 0;
        end
        if (com_d[q]) begin
          if (win_n[q] == 0) first_t[q] = cyc - 1;
          last_t[q] = cyc - 1;
          win_n[q]++;
          pkts[q]++;
        end
      end
      com_d <= '0;
      if (dut.commit) begin
        com_d[dut.commit_q] <= 1'b1;
        if (dut.commit_slot < dut.q_head[dut.commit_q] && dut.q_count[dut.commit_q] != 0) n_wrap++;
      end
    end
  end

  // ------------------------------------------------------------- test
  task automatic wait_delivered(int limit_us);
    int t = 0;
    bit pend = 1;
    while (pend && t < limit_us * CYC_US) begin
      pend = 0;
      for (int q = 0; q < Q; q++) if (exp_q[q].size() != 0) pend = 1;
      @(negedge clk); t++;
    end
    checks++;
    if (pend) fail("frames not delivered in time");
  endtask

  logic [15:0] ports [Q] = '{16'd502, 16'd503, 16'd504, 16'd505};

  initial begin : main
    logic [31:0] d;
    s_valid = 0; s_data = 0; s_last = 0; s_err = 0;
    csr_we = 0; csr_addr = 0; csr_wdata = 0; buf_raddr = 0;
    for (int i = 0; i < 8; i++) exp_drop[i] = 0;
    for (int q = 0; q < Q; q++) begin got_frames[q] = 0; sent_to[q] = 0; q_on[q] = 1; q_room[q] = 0; end
    repeat (5) @(negedge clk);
    rst_n = 1;

    // --- socket binding: queues, moderation, map
    for (int q = 0; q < Q; q++) csr_wr(qa(q, QR_RANGE), {16'd0, 8'd8, 8'(8 * q)});
    csr_wr(qa(0, QR_ABS), 32'h8000_0000);                       // critical: 0 us
    csr_wr(qa(1, QR_ABS), 32'h8000_0000 | ABS1);
    csr_wr(qa(2, QR_PKT), 32'h8000_0000 | PKT2);
    csr_wr(qa(3, QR_CNT), 32'h8000_0000 | CNT3);
    csr_wr(qa(3, QR_ABS), 32'h8000_0000 | ABS3);
    for (int q = 0; q < Q; q++) begin
      csr_wr(A_MAP_BASE + 8'(q), {1'b1, 7'd0, 8'(q), ports[q]});
      port_q[int'(ports[q])] = q;
    end
    csr_wr(A_Q_ENABLE, 32'hF);
    csr_wr(A_IRQ_MASK, 32'hF);
    csr_rd(A_MAP_BASE + 8'd2, d);
    checks++;
    if (d != {1'b1, 7'd0, 8'd2, 16'd504}) fail("map read-back");

    // --- phase A: mixed traffic, host servicing interrupts
    for (int k = 0; k < 120; k++) begin
      int r, q, gap;
      r = $urandom_range(99);
      q = $urandom_range(Q - 1);
      gap = $urandom_range(200, 600);
      if (r < 8)       frame(16'd80, K_GOOD, 20, gap);               // no process
      else if (r < 13) frame(ports[q], K_BADCSUM, 20, gap);
      else if (r < 18) frame(ports[q], K_MACERR, 20, gap);
      else             frame(ports[q], K_GOOD, $urandom_range(0, 200), gap);
    end
    wait_delivered(300);

    // --- phase B: host busy; queue 3 (4 slots) overflows; oversize frame
    isr_on = 0;
    wait (!isr_busy);
    repeat (2) @(negedge clk);
    csr_wr(qa(3, QR_CNT), 32'd0);                               // no count limit
    csr_wr(qa(3, QR_RANGE), {16'd0, 8'd4, 8'd24});
    host_idle = 1;
    q_room[3] = 4;
    for (int k = 0; k < 7; k++) frame(ports[3], K_GOOD, 30, 20);
    q_room[0] = 8;
    frame(ports[0], K_OVERSZ, SLOT_BYTES, 20);
    host_idle = 0;
    isr_on = 1;
    wait_delivered(300);

    // --- phase C: run-time changes: port 505 freed, 506 bound to queue 3,
    //     queue 2's process gone (queue disabled)
    isr_on = 0;
    wait (!isr_busy);
    csr_wr(qa(3, QR_RANGE), {16'd0, 8'd8, 8'd24});             // queue 3 back to 8 slots
    csr_wr(qa(3, QR_CNT), 32'h8000_0000 | CNT3);
    isr_on = 1;
    csr_wr(A_MAP_BASE + 8'd3, {1'b1, 7'd0, 8'd3, 16'd506});
    port_q.delete(505);
    port_q[506] = 3;
    csr_wr(A_Q_ENABLE, 32'b1011);
    q_on[2] = 0;
    for (int k = 0; k < 30; k++) begin
      logic [15:0] p;
      p = (k % 4 == 0) ? 16'd505 : (k % 4 == 1) ? 16'd506 : (k % 4 == 2) ? 16'd504 : 16'd502;
      frame(p, K_GOOD, 40, 100);
    end
    wait_delivered(300);
    repeat (ABS3 * CYC_US + 100) @(negedge clk);

    // --- drop counters
    for (int r = 1; r <= 5; r++) begin
      csr_rd(A_DROP_BASE + 8'(r - 1), d);
      checks++;
      if (int'(d) != exp_drop[r]) fail($sformatf("drop counter %0d = %0d, expected %0d", r, d, exp_drop[r]));
    end
    csr_rd(A_ACCEPTED, d);
    checks++;
    if (int'(d) != sent_to[0] + sent_to[1] + sent_to[2] + sent_to[3]) fail("accepted counter");

    // --- interrupt economy
    checks++;
    if (irqs[0] != pkts[0]) fail($sformatf("critical queue: %0d interrupts for %0d packets", irqs[0], pkts[0]));
    for (int q = 1; q < Q; q++) begin
      checks++;
      if (irqs[q] >= pkts[q]) fail($sformatf("queue %0d not moderated: %0d interrupts for %0d packets", q, irqs[q], pkts[q]));
    end

    // --- every mechanism happened
    begin
      string names [11];
      int    counts [11];
      names = '{"immediate interrupt", "absolute timer", "packet timer", "count threshold",
                            "drop bad header", "drop unmapped", "drop queue full", "drop MAC error",
                            "drop oversize", "ring wrap", "coalesced window"};
      counts = '{n_imm, n_abs, n_pkt, n_cnt, exp_drop[DROP_BADHDR], exp_drop[DROP_NOMAP],
                 exp_drop[DROP_FULL], exp_drop[DROP_MACERR], exp_drop[DROP_OVERSZ], n_wrap, int'(max_hold > 1)};
      for (int i = 0; i < 11; i++) begin
        $display("  %-20s %0d", names[i], counts[i]);
        checks++;
        if (counts[i] == 0) fail($sformatf("mechanism never exercised: %s", names[i]));
      end
      $display("  packets per queue %0d %0d %0d %0d, interrupts %0d %0d %0d %0d, ISR runs %0d",
               pkts[0], pkts[1], pkts[2], pkts[3], irqs[0], irqs[1], irqs[2], irqs[3], isr_runs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
