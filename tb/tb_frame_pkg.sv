// tb_frame_pkg: builds Ethernet/IPv4/TCP-UDP frames for the testbenches.
//
// make_frame returns the frame bytes (no preamble, no FCS) with a correct
// IPv4 header checksum unless a defect is requested. Payload bytes are a
// simple function of the seed so a reader can check them.
//
// IP options (IHL above 5) are filled with 0x01 (no-operation). The frame
// layout follows the Ethernet II, IPv4, TCP and UDP standards; the defects
// a frame can carry are the ones the parser checks.
package tb_frame_pkg;

  typedef logic [7:0] bytes_t[$];

  typedef struct {
    logic [15:0] etype;      // 16'h0800 for IPv4
    int          ihl;        // IPv4 header words (5..15)
    logic [7:0]  proto;      // 6 TCP, 17 UDP
    logic [15:0] dst_port;
    int          payload;    // bytes after the L4 header
    bit          bad_csum;   // corrupt the IPv4 checksum
    bit          frag;       // non-zero fragment offset
    int          seed;
  } frame_cfg_t;

  function automatic frame_cfg_t good_cfg(logic [15:0] port, int payload, int seed);
    frame_cfg_t c;
    c.etype = 16'h0800; c.ihl = 5; c.proto = 8'd6; c.dst_port = port;
    c.payload = payload; c.bad_csum = 0; c.frag = 0; c.seed = seed;
    return c;
  endfunction

  function automatic bytes_t make_frame(frame_cfg_t c);
    bytes_t f;
    int     l4 = (c.proto == 8'd17) ? 8 : 20;
    int     iplen = c.ihl * 4 + l4 + c.payload;
    logic [31:0] sum;
    // Ethernet
    for (int i = 0; i < 6; i++) f.push_back(8'h02);            // dst MAC
    for (int i = 0; i < 6; i++) f.push_back(8'h10 + 8'(i));    // src MAC
    f.push_back(c.etype[15:8]); f.push_back(c.etype[7:0]);
    // IPv4
    f.push_back({4'd4, 4'(c.ihl)});
    f.push_back(8'h00);
    f.push_back(8'(iplen >> 8)); f.push_back(8'(iplen));
    f.push_back(8'h12); f.push_back(8'h34);                    // id
    f.push_back(c.frag ? 8'h00 : 8'h40); f.push_back(c.frag ? 8'h10 : 8'h00);
    f.push_back(8'd64); f.push_back(c.proto);
    f.push_back(8'h00); f.push_back(8'h00);                    // checksum
    f.push_back(8'd192); f.push_back(8'd168); f.push_back(8'd1); f.push_back(8'd2);
    f.push_back(8'd192); f.push_back(8'd168); f.push_back(8'd1); f.push_back(8'd1);
    for (int i = 20; i < c.ihl * 4; i++) f.push_back(8'h01);  // options (NOP)
    sum = 0;
    for (int i = 14; i < 14 + c.ihl * 4; i += 2) sum += int'({f[i], f[i+1]});
    while (sum >> 16 != 0) sum = (sum & 32'hFFFF) + (sum >> 16);
    sum = ~sum & 32'hFFFF;
    if (c.bad_csum) sum ^= 32'h0100;
    f[24] = sum[15:8]; f[25] = sum[7:0];
    // L4
    f.push_back(8'hC0); f.push_back(8'h01);                    // src port
    f.push_back(c.dst_port[15:8]); f.push_back(c.dst_port[7:0]);
    for (int i = 4; i < l4; i++) f.push_back(8'h00);
    for (int i = 0; i < c.payload; i++) f.push_back(8'(c.seed * 7 + i));
    return f;
  endfunction

endpackage
