// rx_parser: header validation and destination-port extraction.
//
// The parser watches the byte stream of received frames (Ethernet II, no
// preamble or FCS) as it is accepted by the dispatcher and produces exactly one
// metadata record per frame. The source design says only that an arriving
// frame "is validated" and that its destination port selects the process; the
// checks made here are this design's choice: EtherType IPv4, version 4,
// IHL >= 5, protocol TCP or UDP, fragment offset 0 and a correct IPv4 header
// checksum.
//
// Timing: a byte counter indexes the frame. The record is emitted (meta_valid
// for one cycle, registered) after the byte that completes the destination
// port (frame byte 14 + 4*IHL + 3), or earlier after the first byte that fails
// a check, or after the last byte of a frame that ends before its port. So the
// verdict never waits for more than the header, at most 78 bytes.
//
// Interface: beat qualifies data/last (one byte per beat); meta_valid/meta out.
module rx_parser
  import nic_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       beat,
  input  logic [7:0] data,
  input  logic       last,
  output logic       meta_valid,
  output rx_meta_t   meta
);

  logic [15:0] idx;          // index of the current byte in the frame
  logic        done;         // record already emitted for this frame
  logic [7:0]  prev;         // previous byte (to form 16-bit fields)
  logic [3:0]  ihl;
  logic [19:0] csum;         // running sum of IPv4 header words

  // Field positions that depend on IHL.
  logic [15:0] ip_end;       // last byte of the IPv4 header
  logic [15:0] port_lo;      // last byte of the destination port
  assign ip_end  = 16'(ETH_HDR_BYTES) + {10'd0, ihl, 2'b00} - 16'd1;
  assign port_lo = ip_end + 16'd4;

  // Checks applied to the current byte.
  logic        fail_now;
  logic [15:0] word;
  logic [19:0] csum_nxt;
  logic [15:0] csum_fold;
  assign word = {prev, data};

  always_comb begin
    fail_now = 1'b0;
    csum_nxt = csum;
    if (idx >= 16'(ETH_HDR_BYTES) && idx <= ip_end && idx[0] == 1'b1)
      csum_nxt = csum + {4'd0, word};
    // fold the carries twice: the sum of up to 30 words fits 20 bits
    csum_fold = csum_nxt[15:0] + {12'd0, csum_nxt[19:16]};
    csum_fold = csum_fold + 16'(csum_fold < {12'd0, csum_nxt[19:16]});
    unique case (idx)
      16'd13: fail_now = (word != ETYPE_IPV4);
      16'd14: fail_now = (data[7:4] != 4'd4) || (data[3:0] < 4'd5);
      16'd21: fail_now = ({prev[4:0], data} != 13'd0);      // fragment offset
      16'd23: fail_now = (data != IP_PROTO_TCP) && (data != IP_PROTO_UDP);
      default: ;
    endcase
    if (idx > 16'd14 && idx == ip_end && csum_fold != 16'hFFFF)
      fail_now = 1'b1;
  end

  logic emit_now;
  assign emit_now = beat && !done &&
                    (fail_now || last || (idx > 16'd14 && idx == port_lo));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx        <= '0;
      done       <= 1'b0;
      prev       <= '0;
      ihl        <= 4'd5;
      csum       <= '0;
      meta_valid <= 1'b0;
      meta       <= '0;
    end else begin
      meta_valid <= 1'b0;
      if (beat) begin
        prev <= data;
        csum <= csum_nxt;
        if (idx == 16'd14) ihl <= data[3:0];
        if (emit_now) begin
          meta_valid    <= 1'b1;
          meta.hdr_ok   <= !fail_now && !(last && idx != port_lo) && idx > 16'd14;
          meta.dst_port <= word;
        end
        if (last) begin
          idx  <= '0;
          done <= 1'b0;
          csum <= '0;
          ihl  <= 4'd5;
        end else begin
          if (idx != 16'hFFFF) idx <= idx + 16'd1;
          if (emit_now) done <= 1'b1;
        end
      end
    end
  end

endmodule
