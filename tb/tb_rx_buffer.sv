// tb_rx_buffer: writes bytes and descriptors and reads them back through the
// host ports.
//
// A reduced buffer is used. Every byte address {slot, offset} is written with
// a value computed from the address, every descriptor with a value computed
// from the slot, and then 300 random addresses are overwritten with random
// data kept in a model. All bytes are then read back, each compared one
// cycle after its address is presented (the read latency), and all
// descriptors are read combinationally.
//
// A receive buffer shared by the queues follows the source design; the slot
// layout and read latency under test are this design's choices.
module tb_rx_buffer;
  localparam int S = 8, B = 64;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we, len_we;
  logic [8:0] waddr, raddr;
  logic [7:0] wdata, rdata;
  logic [2:0] len_wslot, len_rslot;
  logic [15:0] len_wdata, len_rdata;

  rx_buffer #(.NUM_SLOTS(S), .SLOT_BYTES(B)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0]  ref_mem [S*B];
  logic [15:0] ref_len [S];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; len_we = 0; waddr = 0; raddr = 0; wdata = 0; len_wslot = 0; len_rslot = 0; len_wdata = 0;
    for (int a = 0; a < S*B; a++) begin
      we <= 1; waddr <= 9'(a); wdata <= 8'(a * 13 + 5); ref_mem[a] = 8'(a * 13 + 5);
      @(posedge clk);
    end
    for (int s = 0; s < S; s++) begin
      len_we <= 1; len_wslot <= 3'(s); len_wdata <= 16'(100 + s * 3); ref_len[s] = 16'(100 + s * 3);
      we <= 0; @(posedge clk);
    end
    len_we <= 0;
    for (int k = 0; k < 300; k++) begin
      int a;
      logic [7:0] d;
      a = $urandom_range(S*B - 1);
      d = 8'($urandom);
      we <= 1; waddr <= 9'(a); wdata <= d; ref_mem[a] = d;
      @(posedge clk);
    end
    we <= 0;
    for (int a = 0; a < S*B; a++) begin
      raddr <= 9'(a); @(posedge clk); #1;
      checks++;
      if (rdata != ref_mem[a]) begin failures++; $display("FAIL: byte %0d", a); end
    end
    for (int s = 0; s < S; s++) begin
      len_rslot = 3'(s); #1; checks++;
      if (len_rdata != ref_len[s]) begin failures++; $display("FAIL: len %0d", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
