// pkt_parser: extracts the header vector from the first beat of a packet.
//
// The first 512-bit beat holds the frame with byte 0 in bits [511:504]. The
// Ethernet, IPv4 and TCP headers are overlaid on the top 432 bits. A packet is
// classified as TCP when its EtherType is IPv4, the IP version is 4, the IHL is
// 5 (no IP options) and the protocol is 6. If the TCP data offset leaves room
// for options and the first option is an MSS option (kind 2, length 4), its
// value is reported as well. Purely combinational.
//
// The paper parses "up to and including the TCP header"; the beat layout, the
// restriction to option-less IPv4 headers and looking only at the first TCP
// option are choices of this design.
module pkt_parser
  import syn_pkg::*;
(
  input  logic [DATA_W-1:0] beat,
  output hdr_t              hdr
);
  eth_h_t  eth;
  ipv4_h_t ip;
  tcp_h_t  tcp;
  logic [7:0]  opt_kind, opt_len;
  logic [15:0] opt_val;

  assign {eth, ip, tcp} = beat[DATA_W-1 -: HDR_BITS];
  // bytes 54, 55, 56..57 of the frame
  assign opt_kind = beat[DATA_W-1-54*8 -: 8];
  assign opt_len  = beat[DATA_W-1-55*8 -: 8];
  assign opt_val  = beat[DATA_W-1-56*8 -: 16];

  always_comb begin
    hdr.eth       = eth;
    hdr.ip        = ip;
    hdr.tcp       = tcp;
    hdr.is_tcp    = (eth.ethertype == ETHERTYPE_IPV4) && (ip.version == 4'd4) &&
                    (ip.ihl == 4'd5) && (ip.protocol == IPPROTO_TCP) &&
                    (tcp.data_off >= 4'd5);
    hdr.mss_valid = hdr.is_tcp && (tcp.data_off >= 4'd6) &&
                    (opt_kind == 8'd2) && (opt_len == 8'd4);
    hdr.mss       = opt_val;
  end
endmodule
