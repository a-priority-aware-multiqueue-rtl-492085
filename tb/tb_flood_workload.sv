// tb_flood_workload: the packet-flood experiment on the full-size NIC.
//
// Four processes each receive periodic MODBUS/TCP requests (port 502..505,
// about 60 packets/s each); queue 0 is critical (no moderation), queues 1 and
// 2 use absolute timers of 1 ms and 5 ms. A flood of extra packets arrives for
// queue 3 at 5000 or 15000 packets/s, and queue 3's absolute timer is set to
// nothing (nomod), 800, 1600, 2400 or 3200 us in turn. Each run lasts RUN_MS
// of simulated time (the original experiment ran 30 s per point; the ratio of
// interrupts to packets is what is compared, and it is reached within a few
// timer periods). For each run the testbench counts packets and interrupts
// per queue and checks:
//   * the critical queue raises one interrupt per packet;
//   * the flooded queue with timer D raises about one interrupt per D of
//     flood (packets per interrupt = D x rate, within 20 %), and none are lost;
//   * nothing is dropped;
//   * at 15000 packets/s with d3200, all queues together raise interrupts
//     for at most 5 % of the packets (the original reports 2 %, with a
//     different background traffic).
// It prints the share of interrupts saved against the unmoderated run and
// the interrupts per 100 packets over all queues.
module tb_flood_workload;
  import nic_pkg::*;
  import tb_frame_pkg::*;

  localparam int Q = 4, CYC_US = 125, RUN_MS = 40;

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

  initial begin
    repeat (45_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  // ------------------------------------------------------------- counters
  int pkts [Q], irqs [Q], popped [Q];
  int all_pkts, all_irqs;                     // every queue, last run
  always @(posedge clk) if (rst_n) begin
    for (int q = 0; q < Q; q++) begin
      if (dut.q_fire[q]) irqs[q]++;
      if (dut.commit && int'(dut.commit_q) == q) pkts[q]++;
    end
  end

  // ------------------------------------------------------------- host
  bit isr_busy = 0, isr_on = 0;
  initial begin : isr
    logic [31:0] cause, st;
    forever begin
      @(negedge clk);
      if (irq && isr_on) begin
        isr_busy = 1;
        csr_rd(A_IRQ_CAUSE, cause);
        csr_wr(A_IRQ_CAUSE, cause);
        for (int q = 0; q < Q; q++) if (cause[q]) begin
          csr_rd(qa(q, QR_STATUS), st);
          for (int n = 0; n < int'(st[7:0]); n++) begin
            csr_wr(qa(q, QR_POP), 0);
            popped[q]++;
          end
        end
        isr_busy = 0;
      end
    end
  end

  // ------------------------------------------------------------- MAC
  // A frame source: frames are queued by time and sent one after another.
  bytes_t tx_q [$];
  initial begin : mac
    s_valid = 0; s_data = 0; s_last = 0; s_err = 0;
    forever begin
      @(negedge clk);
      if (tx_q.size() != 0) begin
        bytes_t f;
        f = tx_q.pop_front();
        for (int i = 0; i < f.size(); i++) begin
          s_valid = 1; s_data = f[i]; s_last = (i == f.size() - 1);
          #1;
          while (!s_ready) begin @(negedge clk); #1; end
          @(negedge clk);
        end
        s_valid = 0; s_last = 0;
      end
    end
  end

  // traffic generator: base period per queue and flood period, in cycles
  longint base_per [Q] = '{16_000 * CYC_US, 16_500 * CYC_US, 17_000 * CYC_US, 17_500 * CYC_US};

  task automatic run(int delay_us, int rate_pps, output int flood_pkts, output int flood_irqs);
    longint next [Q], next_flood, flood_per;
    int p0 [Q], i0 [Q];
    frame_cfg_t c;
    // quiesce and configure the flooded queue
    isr_on = 0;
    wait (!isr_busy);
    csr_wr(qa(3, QR_ABS), delay_us < 0 ? 32'd0 : (32'h8000_0000 | 32'(delay_us)));
    csr_wr(qa(3, QR_RANGE), {16'd0, 8'd52, 8'd12});              // 52 slots
    isr_on = 1;
    repeat (6000 * CYC_US) @(negedge clk);                       // let old windows close
    for (int q = 0; q < Q; q++) begin p0[q] = pkts[q]; i0[q] = irqs[q]; next[q] = base_per[q] / 2 + q * 1000; end
    flood_per = 64'(125_000_000 / rate_pps);
    next_flood = 100;
    for (longint t = 0; t < longint'(RUN_MS) * 1000 * CYC_US; t++) begin
      @(negedge clk);
      for (int q = 0; q < Q; q++) if (t == next[q]) begin
        c = good_cfg(16'(502 + q), 12, q);                       // MODBUS/TCP request
        tx_q.push_back(make_frame(c));
        next[q] += base_per[q];
      end
      if (t == next_flood) begin
        c = good_cfg(16'd505, 12, 9);
        tx_q.push_back(make_frame(c));
        next_flood += flood_per;
      end
    end
    repeat ((delay_us > 0 ? delay_us : 0) * CYC_US + 20000) @(negedge clk);  // flush last window
    flood_pkts = pkts[3] - p0[3];
    flood_irqs = irqs[3] - i0[3];
    all_pkts = 0; all_irqs = 0;
    for (int q = 0; q < Q; q++) begin all_pkts += pkts[q] - p0[q]; all_irqs += irqs[q] - i0[q]; end
    checks++;
    if (irqs[0] - i0[0] != pkts[0] - p0[0] || pkts[0] == p0[0]) begin
      failures++; $display("FAIL: critical queue %0d interrupts for %0d packets", irqs[0] - i0[0], pkts[0] - p0[0]);
    end
    checks++;
    if (delay_us < 0) begin
      if (flood_irqs != flood_pkts) begin failures++; $display("FAIL: nomod %0d irqs for %0d packets", flood_irqs, flood_pkts); end
    end else begin
      real per_irq, expect_per;
      per_irq = real'(flood_pkts) / real'(flood_irqs);
      expect_per = real'(delay_us) * real'(rate_pps) / 1.0e6;
      if (per_irq < 0.8 * expect_per || per_irq > 1.2 * expect_per + 1.0) begin
        failures++; $display("FAIL: d%0d %0d pps: %0.1f packets per interrupt, expected about %0.1f",
                             delay_us, rate_pps, per_irq, expect_per);
      end
    end
  endtask

  initial begin : main
    int fp, fi, base_irqs;
    logic [31:0] d;
    int delays [6];
    int rates  [6];
    delays = '{-1, 800, 1600, 2400, 3200, 3200};
    rates  = '{5000, 5000, 5000, 5000, 5000, 15000};
    csr_we = 0; csr_addr = 0; csr_wdata = 0; buf_raddr = 0;
    for (int q = 0; q < Q; q++) begin pkts[q] = 0; irqs[q] = 0; popped[q] = 0; end
    repeat (5) @(negedge clk);
    rst_n = 1;
    // queues 0..2: 4 slots each; queue 3: 52 slots (set per run)
    for (int q = 0; q < 3; q++) csr_wr(qa(q, QR_RANGE), {16'd0, 8'd4, 8'(4 * q)});
    csr_wr(qa(0, QR_ABS), 32'h8000_0000);
    csr_wr(qa(1, QR_ABS), 32'h8000_0000 | 32'd1000);
    csr_wr(qa(2, QR_ABS), 32'h8000_0000 | 32'd5000);
    for (int q = 0; q < Q; q++) csr_wr(A_MAP_BASE + 8'(q), {1'b1, 7'd0, 8'(q), 16'(502 + q)});
    csr_wr(A_Q_ENABLE, 32'hF);
    csr_wr(A_IRQ_MASK, 32'hF);
    base_irqs = 0;
    for (int k = 0; k < 6; k++) begin
      run(delays[k], rates[k], fp, fi);
      if (k == 0) base_irqs = fi;
      $display("  %-6s %5d pkt/s: flood packets %0d, interrupts %0d, saved vs nomod %0d %%, all queues %0d interrupts per 100 packets",
               delays[k] < 0 ? "nomod" : $sformatf("d%0d", delays[k]), rates[k], fp, fi,
               rates[k] == 5000 ? 100 - (100 * fi) / (base_irqs > 0 ? base_irqs : 1) : 0,
               (100 * all_irqs) / (all_pkts > 0 ? all_pkts : 1));
      // the heaviest point: interrupts for only a few percent of all packets
      if (k == 5) begin
        checks++;
        if (100 * all_irqs > 5 * all_pkts) begin
          failures++; $display("FAIL: %0d interrupts for %0d packets at 15000 pkt/s, d3200", all_irqs, all_pkts);
        end
      end
    end
    for (int r = 1; r <= 5; r++) begin
      csr_rd(A_DROP_BASE + 8'(r - 1), d);
      checks++;
      if (d != 0) begin failures++; $display("FAIL: %0d frames dropped for reason %0d", d, r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
