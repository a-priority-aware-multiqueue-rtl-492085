// tb_dist_map: checks registration, lookup, first-match priority, removal and
// read-back of the distribution map against a reference table kept here.
//
// A small table (8 entries, 4 queues) is written through cfg_we: four ports
// for four queues, a duplicate port in a higher entry (the lower entry must
// win), the removal of an entry, then 200 random updates over a narrow port
// range so that hits, misses and duplicates are frequent. After each update a
// port is looked up and compared with the model; at the end every entry is
// read back. Lookups are combinational and are checked in the cycle after
// the write.
//
// Port-to-process mapping follows the source design; the table size and
// first-match rule under test are this design's choices.
module tb_dist_map;
  localparam int N = 8, Q = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, cfg_valid, lk_hit;
  logic [2:0] cfg_idx, cfg_rd_idx;
  logic [1:0] cfg_queue, lk_queue;
  logic [15:0] cfg_port, lk_port;
  logic [31:0] cfg_rd_entry;

  dist_map #(.MAP_ENTRIES(N), .NUM_QUEUES(Q)) dut (.*);

  int checks = 0, failures = 0;
  bit          rv [N];
  logic [1:0]  rq [N];
  logic [15:0] rp [N];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int i, bit v, logic [1:0] q, logic [15:0] p);
    cfg_we <= 1; cfg_idx <= 3'(i); cfg_valid <= v; cfg_queue <= q; cfg_port <= p;
    @(posedge clk); cfg_we <= 0;
    rv[i] = v; rq[i] = q; rp[i] = p;
  endtask

  task automatic look(logic [15:0] p);
    bit eh = 0; logic [1:0] eq = 0;
    for (int i = 0; i < N; i++) if (rv[i] && rp[i] == p && !eh) begin eh = 1; eq = rq[i]; end
    lk_port = p; #1;
    checks++;
    if (lk_hit != eh || (eh && lk_queue != eq)) begin
      failures++; $display("FAIL: port %0d hit %0b q %0d, expected %0b %0d", p, lk_hit, lk_queue, eh, eq);
    end
  endtask

  initial begin
    cfg_we = 0; cfg_idx = 0; cfg_valid = 0; cfg_queue = 0; cfg_port = 0; cfg_rd_idx = 0; lk_port = 0;
    for (int i = 0; i < N; i++) begin rv[i] = 0; rq[i] = 0; rp[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    look(16'd502);                               // empty map: miss
    wr(0, 1, 0, 16'd502);                        // four processes, four queues
    wr(1, 1, 1, 16'd503);
    wr(2, 1, 2, 16'd504);
    wr(3, 1, 3, 16'd505);
    @(negedge clk);
    for (int p = 500; p < 508; p++) look(16'(p));
    wr(5, 1, 2, 16'd502);                        // duplicate: lower index wins
    @(negedge clk); look(16'd502);
    wr(0, 0, 0, 16'd502);                        // socket freed
    @(negedge clk); look(16'd502);
    for (int k = 0; k < 200; k++) begin
      wr($urandom_range(N-1), 1'($urandom), 2'($urandom), 16'($urandom_range(16)));
      @(negedge clk);
      look(16'($urandom_range(16)));
    end
    for (int i = 0; i < N; i++) begin
      cfg_rd_idx = 3'(i); #1; checks++;
      if (cfg_rd_entry != {rv[i], 7'd0, 6'd0, rq[i], rp[i]}) begin
        failures++; $display("FAIL: readback %0d = %h", i, cfg_rd_entry);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
