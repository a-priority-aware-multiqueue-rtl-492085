// tb_rx_dispatch: streams frames with pre-decided classifications through
// rx_dispatch and checks, frame by frame and in order, the commit or drop and
// its reason, the slot and length of each descriptor, and the bytes written
// into the buffer. Queues hold CAP slots each and are not drained while
// traffic runs, so which frames find their queue full is known in advance.
// A gap-free phase also checks that the input is never stalled (one byte per
// cycle) when each frame's classification arrives within its first 21 bytes.
//
// The dispatcher itself is this design's own construction (the source design
// states only that frames are validated, mapped and queued), so the test
// checks the behaviour specified in rx_dispatch's header: in-order commits,
// drop precedence and the one-byte-per-cycle input rate.
module tb_rx_dispatch;
  import nic_pkg::*;
  localparam int Q = 4, S = 16, B = 128, H = 64, CAP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] s_data;
  logic s_valid, s_last, s_err, s_ready, dec_valid;
  rx_dec_t dec;
  logic [Q-1:0] q_full;
  logic [3:0] q_wr_slot [Q];
  logic buf_we, commit, drop;
  logic [10:0] buf_waddr;
  logic [7:0] buf_wdata;
  logic [1:0] commit_q;
  logic [3:0] commit_slot;
  logic [15:0] commit_len;
  drop_reason_e drop_reason;

  rx_dispatch #(.NUM_QUEUES(Q), .NUM_SLOTS(S), .SLOT_BYTES(B), .HOLD_DEPTH(H)) dut (.*);

  int checks = 0, failures = 0;

  // ring model: queue q owns slots 4q .. 4q+CAP-1, never popped during a phase
  int fill [Q];
  always_comb for (int q = 0; q < Q; q++) begin
    q_full[q]    = fill[q] >= CAP;
    q_wr_slot[q] = 4'(4 * q + fill[q] % CAP);
  end

  // frames to send
  typedef struct {
    int len; drop_reason_e pre; int q; bit err; int dec_at;
  } fr_t;
  fr_t         frames [$];
  logic [7:0]  fbytes [$][$];
  int          next_chk = 0;
  logic [7:0]  mem [S * B];
  int          stalls = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: buffer writes and per-frame results
  bit pend = 0;
  int pend_k, pend_s;
  always @(posedge clk) if (rst_n) begin
    if (buf_we) mem[buf_waddr] <= buf_wdata;
    pend <= 0;
    if (pend) begin
      checks++;
      for (int i = 0; i < frames[pend_k].len; i++)
        if (mem[pend_s * B + i] != fbytes[pend_k][i]) begin
          failures++; $display("FAIL frame %0d byte %0d", pend_k, i); break;
        end
    end
    if (commit || drop) begin
      fr_t f;
      drop_reason_e exp;
      f = frames[next_chk];
      exp = f.pre;
      if (exp == DROP_NONE && fill[f.q] >= CAP) exp = DROP_FULL;
      if (exp == DROP_NONE && f.len > B)        exp = DROP_OVERSZ;
      if (exp == DROP_NONE && f.err)            exp = DROP_MACERR;
      checks++;
      if ((exp == DROP_NONE) != commit || (drop && drop_reason != exp)) begin
        failures++;
        $display("FAIL frame %0d: commit %0b reason %0d, expected %0d", next_chk, commit, drop_reason, exp);
      end
      if (commit && exp == DROP_NONE) begin
        checks++;
        if (int'(commit_q) != f.q || commit_len != 16'(f.len) ||
            commit_slot != 4'(4 * f.q + fill[f.q] % CAP)) begin
          failures++;
          $display("FAIL frame %0d: q %0d len %0d slot %0d", next_chk, commit_q, commit_len, commit_slot);
        end
        fill[f.q] <= fill[f.q] + 1;
        // compare the data on the next edge, once this edge's write landed
        pend   <= 1;
        pend_k <= next_chk;
        pend_s <= int'(commit_slot);
      end
      next_chk++;
    end
  end

  task automatic add_frame(int len, drop_reason_e pre, int q, bit err, int dec_at);
    logic [7:0] b [$];
    fr_t f;
    f.len = len; f.pre = pre; f.q = q; f.err = err; f.dec_at = dec_at;
    for (int i = 0; i < len; i++) b.push_back(8'($urandom));
    frames.push_back(f);
    fbytes.push_back(b);
  endtask

  // drive frames [first, last] on negative edges; gaps with probability 1/gap
  task automatic send(int first, int last_i, int gap);
    for (int k = first; k <= last_i; k++) begin
      for (int i = 0; i < frames[k].len; i++) begin
        bit sent = 0;
        while (gap != 0 && $urandom_range(gap - 1) == 0) begin @(negedge clk); dec_valid = 0; end
        while (!sent) begin
          s_valid = 1; s_data = fbytes[k][i]; s_last = (i == frames[k].len - 1);
          s_err = s_last && frames[k].err;
          #1;
          sent = s_ready;
          if (!sent) stalls++;
          @(negedge clk);
          dec_valid = 0;
        end
        s_valid = 0; s_last = 0; s_err = 0;
        if (i == frames[k].dec_at) begin
          dec_valid = 1;
          dec.reason = frames[k].pre;
          dec.qid = 8'(frames[k].q);
        end
      end
    end
  endtask

  task automatic wait_drained();
    int t = 0;
    while (next_chk < frames.size() && t < 20000) begin @(negedge clk); dec_valid = 0; t++; end
    @(negedge clk); dec_valid = 0;
  endtask

  initial begin
    int n0;
    s_valid = 0; s_data = 0; s_last = 0; s_err = 0; dec_valid = 0; dec = '0;
    for (int q = 0; q < Q; q++) fill[q] = 0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    // phase 1: mixed traffic with gaps; queues fill up
    for (int k = 0; k < 40; k++) begin
      int len, r;
      drop_reason_e pre;
      len = $urandom_range(1, 150);
      r = $urandom_range(9);
      pre = (r == 0) ? DROP_BADHDR : (r == 1) ? DROP_NOMAP : DROP_NONE;
      add_frame(len, pre, $urandom_range(Q - 1), $urandom_range(19) == 0,
                $urandom_range(0, (len < 21 ? len : 21) - 1));
    end
    send(0, 39, 4);
    wait_drained();
    checks++;
    if (next_chk != 40) begin failures++; $display("FAIL: %0d of 40 frames finished", next_chk); end

    // host empties the queues
    for (int q = 0; q < Q; q++) fill[q] = 0;

    // phase 2: back-to-back frames, all accepted, no stalls allowed
    n0 = frames.size();
    stalls = 0;
    for (int k = 0; k < 12; k++) add_frame($urandom_range(40, 120), DROP_NONE, k % Q, 0, 20);
    send(n0, n0 + 11, 0);
    wait_drained();
    checks++;
    if (stalls != 0) begin failures++; $display("FAIL: %0d stall cycles at full rate", stalls); end
    checks++;
    if (next_chk != frames.size()) begin failures++; $display("FAIL: frames lost in phase 2"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
