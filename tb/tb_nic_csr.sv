// tb_nic_csr: checks the register map of nic_csr: read-back of the
// configuration registers and of the moderation settings driven to the
// queues, the write strobes for ring ranges, pops, map entries and interrupt
// clears, the status words assembled from queue state, and the frame counters.
//
// Bus accesses are driven at the falling edge. Write strobes are
// combinational and are sampled before the next rising edge; stored registers
// are read back after it. The expected field positions are the register map
// written out here by hand, so a misplaced field shows as a mismatch.
//
// The two configuration paths (queue parameters and port mappings) follow the
// source design; the register map under test is this design's own.
module tb_nic_csr;
  import nic_pkg::*;
  localparam int Q = 4, M = 8, S = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic csr_we;
  logic [7:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic [Q-1:0] q_enable, ring_cfg_we, q_pop, irq_mask, irq_clr, irq_cause;
  mod_cfg_t mod_cfg [Q];
  logic [5:0] ring_cfg_base, len_rslot;
  logic [6:0] ring_cfg_size;
  logic [5:0] q_base [Q];
  logic [6:0] q_size [Q];
  logic [6:0] q_count [Q];
  logic [5:0] q_head [Q];
  logic [CNT_W-1:0] q_pending [Q];
  logic [15:0] len_rdata, map_port;
  logic map_we, map_valid, irq_clr_we, commit, drop;
  logic [2:0] map_idx;
  logic [1:0] map_queue;
  logic [31:0] map_rd_entry;
  drop_reason_e drop_reason;

  nic_csr #(.NUM_QUEUES(Q), .MAP_ENTRIES(M), .NUM_SLOTS(S)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d; @(negedge clk); csr_we = 0;
  endtask

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  task automatic rd_check(logic [7:0] a, logic [31:0] exp);
    csr_addr = a; #1; check($sformatf("read %h", a), csr_rdata, exp);
  endtask

  // head length comes from the buffer at the slot the CSR selects
  assign len_rdata = 16'(1000 + len_rslot);
  assign map_rd_entry = 32'hA5000000 | 32'(csr_addr);

  initial begin
    csr_we = 0; csr_addr = 0; csr_wdata = 0; irq_cause = 4'b1010; commit = 0; drop = 0;
    drop_reason = DROP_NONE;
    for (int q = 0; q < Q; q++) begin
      q_base[q] = 6'(q * 16); q_size[q] = 7'(8 + q); q_count[q] = 7'(q + 1);
      q_head[q] = 6'(q * 16 + 3); q_pending[q] = 8'(q * 2);
    end
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);

    wr(A_Q_ENABLE, 32'hF); wr(A_IRQ_MASK, 32'h5);
    @(negedge clk);
    check("q_enable", 32'(q_enable), 32'hF);
    check("irq_mask", 32'(irq_mask), 32'h5);
    rd_check(A_Q_ENABLE, 32'hF); rd_check(A_IRQ_MASK, 32'h5); rd_check(A_IRQ_CAUSE, 32'hA);

    // moderation registers of each queue
    for (int q = 0; q < Q; q++) begin
      logic [7:0] b;
      b = A_Q_BASE + 8'(8 * q);
      wr(b + 8'(QR_ABS), 32'h8000_0000 | 32'(800 * q));
      wr(b + 8'(QR_PKT), 32'h0000_0000 | 32'(100 + q));
      wr(b + 8'(QR_CNT), 32'h8000_0000 | 32'(4 + q));
    end
    @(negedge clk);
    for (int q = 0; q < Q; q++) begin
      logic [7:0] b;
      b = A_Q_BASE + 8'(8 * q);
      check("abs_en", 32'(mod_cfg[q].abs_en), 1);
      check("abs_us", 32'(mod_cfg[q].abs_us), 32'(800 * q));
      check("pkt_en", 32'(mod_cfg[q].pkt_en), 0);
      check("pkt_us", 32'(mod_cfg[q].pkt_us), 32'(100 + q));
      check("cnt_thr", 32'(mod_cfg[q].cnt_thr), 32'(4 + q));
      rd_check(b + 8'(QR_ABS), 32'h8000_0000 | 32'(800 * q));
      rd_check(b + 8'(QR_STATUS), {8'd0, 8'(q * 2), 8'(q * 16 + 3), 8'(q + 1)});
      rd_check(b + 8'(QR_RANGE), {16'd0, 8'(8 + q), 8'(q * 16)});
      rd_check(b + 8'(QR_HEADLEN), 32'(1000 + q * 16 + 3));
    end

    // strobes
    csr_we = 1; csr_addr = A_Q_BASE + 8'd16 + 8'(QR_RANGE); csr_wdata = {16'd0, 8'd12, 8'd40}; #1;
    check("ring_cfg_we", 32'(ring_cfg_we), 32'b0100);
    check("ring base", 32'(ring_cfg_base), 40);
    check("ring size", 32'(ring_cfg_size), 12);
    csr_addr = A_Q_BASE + 8'd24 + 8'(QR_POP); #1;
    check("pop", 32'(q_pop), 32'b1000);
    check("no ring write", 32'(ring_cfg_we), 0);
    csr_addr = A_MAP_BASE + 8'd5; csr_wdata = 32'h8002_01F6; #1;
    check("map_we", 32'(map_we), 1);
    check("map fields", {map_valid, 4'd0, map_idx, 6'd0, map_queue, map_port}, {1'b1, 4'd0, 3'd5, 6'd0, 2'd2, 16'd502});
    csr_addr = A_IRQ_CAUSE; csr_wdata = 32'h2; #1;
    check("irq clear", {31'(irq_clr), irq_clr_we}, {31'h2, 1'b1});
    csr_we = 0; csr_addr = A_MAP_BASE + 8'd3; #1;
    check("map read", csr_rdata, 32'hA5000083);
    check("no strobes", 32'({map_we, irq_clr_we, q_pop, ring_cfg_we}), 0);

    // counters
    @(negedge clk);
    for (int i = 0; i < 7; i++) begin commit = 1; @(negedge clk); end
    commit = 0;
    for (int r = 1; r <= 5; r++) begin
      for (int i = 0; i < r; i++) begin drop = 1; drop_reason = drop_reason_e'(r); @(negedge clk); end
    end
    drop = 0;
    rd_check(A_ACCEPTED, 7);
    for (int r = 1; r <= 5; r++) rd_check(A_DROP_BASE + 8'(r - 1), 32'(r));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
