// tb_rx_ring: checks ring pointers, wrap-around within the configured slot
// range, full/empty and reconfiguration against a queue model kept here.
//
// A 16-slot pool is used. After reset the ring has size 0 and must be full
// and empty at once. It is then given slots 4..8, and halfway through slots
// 10..15, which must empty it. In between, 400 cycles of random pushes and
// pops (pops also when empty, which are ignored; the dispatcher never pushes
// into a full ring, so neither does this test) run against a model of the
// offsets and count; wr_slot, head_slot, count, full and empty are compared
// after every edge, which exercises wrap-around many times.
//
// Queues as ring buffers follow the source design; the base/size range in a
// shared slot pool under test is this design's choice.
module tb_rx_ring;
  localparam int S = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, push, pop, full, empty;
  logic [3:0] cfg_base, base, wr_slot, head_slot;
  logic [4:0] cfg_size, size, count;

  rx_ring #(.NUM_SLOTS(S)) dut (.*);

  int checks = 0, failures = 0;
  int mb, ms, mw, mr, mc;   // model: base, size, write/read offset, count

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (count != 5'(mc) || full != (mc >= ms) || empty != (mc == 0) ||
        wr_slot != 4'(mb + mw) || head_slot != 4'(mb + mr)) begin
      failures++;
      $display("FAIL: count %0d/%0d wr %0d/%0d head %0d/%0d full %0b", count, mc,
               wr_slot, mb + mw, head_slot, mb + mr, full);
    end
  endtask

  task automatic config_ring(int b, int s);
    cfg_we <= 1; cfg_base <= 4'(b); cfg_size <= 5'(s);
    @(posedge clk); cfg_we <= 0;
    mb = b; ms = s; mw = 0; mr = 0; mc = 0;
    @(negedge clk); compare();
  endtask

  initial begin
    cfg_we = 0; push = 0; pop = 0; cfg_base = 0; cfg_size = 0;
    mb = 0; ms = 0; mw = 0; mr = 0; mc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); compare();            // size 0: full and empty
    config_ring(4, 5);
    for (int k = 0; k < 400; k++) begin
      bit pu, po;
      pu = 1'($urandom);
      po = 1'($urandom);
      if (pu && mc >= ms) pu = 0;         // the user never pushes into a full ring
      push <= pu; pop <= po;
      @(posedge clk); push <= 0; pop <= 0;
      if (pu) begin mw = (mw + 1 == ms) ? 0 : mw + 1; mc++; end
      if (po && mc - int'(pu) > 0) begin mr = (mr + 1 == ms) ? 0 : mr + 1; mc--; end
      @(negedge clk); compare();
      if (k == 200) config_ring(10, 6);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
