// tb_irq_moderator: checks each moderation mode of irq_moderator.
// Time base: one tick every T cycles. For each scenario the number of
// interrupts and their delay from the packet that opened (absolute timer) or
// last touched (packet timer) the window are compared with the configured
// values: a timer of N ticks must fire between N-1 and N ticks later, plus
// the two cycles of registered output.
//
// The three conditions (absolute timer, packet timer restarted by every
// packet, count threshold) and unmoderated queues are the source design's.
// That the absolute timer starts at a window's first packet and is not
// restarted by later ones, the tick-based delay windows and the two-cycle
// output latency are this implementation's choices.
module tb_irq_moderator;
  import nic_pkg::*;
  localparam int T = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mod_cfg_t cfg;
  logic tick_us, pkt_in, fire;
  logic [CNT_W-1:0] pending;

  irq_moderator dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  int fires = 0;
  longint first_pkt = -1, last_pkt = -1, last_fire = -1;
  int win_pkts = 0, pkt_total = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    tick_us <= ((cyc + 1) % longint'(T) == 0);
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // record window start/last packet as seen by the DUT
  always @(posedge clk) begin
    if (fire) begin
      fires++;
      last_fire = cyc;
    end
  end

  task automatic reset_cfg();
    cfg = '0;
  endtask

  task automatic pkt();
    pkt_in <= 1; @(posedge clk); pkt_in <= 0;
  endtask

  task automatic idle(int n);
    repeat (n) @(posedge clk);
  endtask

  task automatic expect_fires(string what, int n0, int exp);
    checks++;
    if (fires - n0 != exp) begin
      failures++; $display("FAIL %s: %0d interrupts, expected %0d", what, fires - n0, exp);
    end
  endtask

  task automatic expect_delay(string what, longint from, longint lo, longint hi);
    checks++;
    if (last_fire - from < lo || last_fire - from > hi) begin
      failures++; $display("FAIL %s: delay %0d cycles, expected %0d..%0d", what, last_fire - from, lo, hi);
    end
  endtask

  initial begin
    int n0; longint t0;
    cfg = '0; pkt_in = 0; tick_us = 0;
    idle(3); rst_n = 1; idle(2);

    // 1. no moderation: one interrupt per packet, two cycles later
    n0 = fires;
    for (int i = 0; i < 10; i++) begin t0 = cyc; pkt(); idle(5); expect_delay("nomod", t0, 1, 3); end
    expect_fires("nomod", n0, 10);

    // 2. critical queue: absolute timer of 0
    cfg.abs_en = 1; cfg.abs_us = 0; n0 = fires;
    for (int i = 0; i < 5; i++) begin t0 = cyc; pkt(); idle(5); expect_delay("abs0", t0, 1, 3); end
    expect_fires("abs0", n0, 5);

    // 3. absolute timer of 8 ticks; packets every 3 ticks do not restart it
    cfg.abs_us = 8; n0 = fires;
    idle(20);
    t0 = cyc; pkt();
    for (int i = 0; i < 2; i++) begin idle(3 * T - 1); pkt(); end     // at 3T, 6T
    idle(3 * T);                                                     // fires ~8T
    expect_fires("abs8 window", n0, 1);
    expect_delay("abs8", t0, 7 * T, 8 * T + 3);
    checks++;
    if (pending != 0) begin failures++; $display("FAIL abs8: pending %0d", pending); end
    // periodic under steady load: 80 ticks of a packet per tick -> 10 interrupts
    n0 = fires;
    for (int i = 0; i < 80; i++) begin pkt(); idle(T - 1); end
    idle(10 * T);
    expect_fires("abs8 periodic", n0, 10);

    // 4. packet timer of 5 ticks: restarted by each packet
    reset_cfg(); cfg.pkt_en = 1; cfg.pkt_us = 5; n0 = fires;
    for (int i = 0; i < 6; i++) begin t0 = cyc; pkt(); idle(3 * T - 1); end  // gaps < 5 ticks
    idle(5 * T);
    expect_fires("pkt5", n0, 1);
    expect_delay("pkt5", t0, 4 * T, 5 * T + 3);

    // 5. count threshold of 4 without timers
    reset_cfg(); cfg.cnt_en = 1; cfg.cnt_thr = 4; n0 = fires;
    for (int i = 0; i < 11; i++) begin pkt(); idle(3); end
    idle(50 * T);
    expect_fires("cnt4", n0, 2);
    checks++;
    if (pending != 3) begin failures++; $display("FAIL cnt4: pending %0d expected 3", pending); end

    // 6. enabling an absolute timer whose count has run out flushes the
    //    waiting packets at once; the next packet then waits 10 ticks
    cfg.abs_en = 1; cfg.abs_us = 10; n0 = fires;
    idle(3);
    expect_fires("abs enabled", n0, 1);
    t0 = cyc; pkt(); idle(12 * T);
    expect_fires("cnt+abs", n0, 2);
    expect_delay("cnt+abs", t0, 9 * T, 10 * T + 3);
    checks++;
    if (pending != 0) begin failures++; $display("FAIL cnt+abs: pending %0d", pending); end

    // 7. no packets, no interrupts
    n0 = fires; idle(100 * T);
    expect_fires("idle", n0, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
