// tb_rx_parser: checks the header validation and port extraction of rx_parser.
//
// Frames with and without each defect are streamed, with random idle gaps
// between bytes: valid TCP and UDP frames with IHL 5 to 15, then one frame
// each with a wrong EtherType, a bad checksum, an ICMP protocol, a non-zero
// fragment offset, truncation before the port and IHL 4, and a good frame
// after them. Every frame must produce exactly one record, with the verdict
// and port it was built with, no later than the byte that completes the port
// (byte 14 + 4*IHL + 3) and, for a bad frame, no later than its last byte.
// Frames come from tb_frame_pkg, which computes the checksum independently.
//
// Validation before mapping and the destination port as the key follow the
// source design; the particular header checks are this design's choice.
module tb_rx_parser;
  import nic_pkg::*;
  import tb_frame_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic beat, last;
  logic [7:0] data;
  logic meta_valid;
  rx_meta_t meta;

  rx_parser dut (.*);

  int checks = 0, failures = 0;
  int records = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (meta_valid) records++;

  task automatic send(bytes_t f, bit exp_ok, logic [15:0] exp_port, int exp_by);
    int start = records;
    int n_at;
    bit seen = 0;
    rx_meta_t got;
    for (int i = 0; i < f.size(); i++) begin
      while ($urandom_range(3) == 0) begin
        beat <= 0; @(posedge clk);
        if (meta_valid && !seen) begin seen = 1; got = meta; n_at = i; end
      end
      beat <= 1; data <= f[i]; last <= (i == f.size() - 1);
      @(posedge clk);
      if (meta_valid && !seen) begin seen = 1; got = meta; n_at = i; end
    end
    beat <= 0; last <= 0;
    repeat (2) begin
      @(posedge clk);
      if (meta_valid && !seen) begin seen = 1; got = meta; n_at = f.size(); end
    end
    checks++;
    if (records - start != 1) begin
      failures++; $display("FAIL: %0d records for one frame", records - start);
    end
    checks++;
    if (!seen || got.hdr_ok != exp_ok) begin
      failures++; $display("FAIL: verdict %0b expected %0b", got.hdr_ok, exp_ok);
    end
    if (exp_ok) begin
      checks++;
      if (got.dst_port != exp_port) begin
        failures++; $display("FAIL: port %h expected %h", got.dst_port, exp_port);
      end
      // record is registered: seen after the byte with index exp_by
      checks++;
      if (n_at > exp_by + 1) begin
        failures++; $display("FAIL: verdict late at byte %0d, port ends at %0d", n_at, exp_by);
      end
    end
  endtask

  initial begin
    frame_cfg_t c;
    beat = 0; last = 0; data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // good TCP frames, several ports and IHLs
    for (int k = 0; k < 20; k++) begin
      c = good_cfg(16'($urandom), $urandom_range(0, 60), k);
      c.ihl = (k % 4 == 0) ? 5 + $urandom_range(10) : 5;
      c.proto = (k % 3 == 0) ? 8'd17 : 8'd6;
      send(make_frame(c), 1, c.dst_port, 14 + 4 * c.ihl + 3);
    end
    // MODBUS/TCP port 502
    c = good_cfg(16'd502, 12, 1);
    send(make_frame(c), 1, 16'd502, 37);
    // defects
    c = good_cfg(16'd502, 10, 2); c.etype = 16'h86DD;  send(make_frame(c), 0, 0, 0);
    c = good_cfg(16'd502, 10, 3); c.bad_csum = 1;      send(make_frame(c), 0, 0, 0);
    c = good_cfg(16'd502, 10, 4); c.proto = 8'd1;      send(make_frame(c), 0, 0, 0);
    c = good_cfg(16'd502, 10, 5); c.frag = 1;          send(make_frame(c), 0, 0, 0);
    begin
      bytes_t f;
      c = good_cfg(16'd502, 10, 6);
      f = make_frame(c);
      f = f[0:29];                                      // truncated before the port
      send(f, 0, 0, 0);
      f = make_frame(c);
      f[14] = 8'h44;                                    // IHL 4
      send(f, 0, 0, 0);
    end
    // a good frame right after the bad ones
    c = good_cfg(16'd8080, 0, 7);
    send(make_frame(c), 1, 16'd8080, 37);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
