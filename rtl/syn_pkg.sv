// syn_pkg: types and constants shared by the SYN-authentication proxy data plane.
//
// The proxy sees packets as a stream of 512-bit beats. The first beat of a
// packet carries the Ethernet, IPv4 and TCP headers (54 bytes) and, when
// present, a leading 4-byte MSS option. Byte 0 of the frame sits in the most
// significant byte of the beat, so a packed header struct overlays the top bits
// of the beat directly. The header layouts are the standard wire formats; the
// beat width and byte order are choices of this design.
package syn_pkg;

  localparam int unsigned DATA_W = 512;
  localparam int unsigned KEEP_W = DATA_W / 8;
  localparam int unsigned PORT_W = 2;          // up to four front-panel ports

  typedef struct packed {
    logic [47:0] dst;
    logic [47:0] src;
    logic [15:0] ethertype;
  } eth_h_t;                                   // 14 bytes

  typedef struct packed {
    logic [3:0]  version;
    logic [3:0]  ihl;
    logic [7:0]  tos;
    logic [15:0] total_len;
    logic [15:0] id;
    logic [2:0]  flags;
    logic [12:0] frag_off;
    logic [7:0]  ttl;
    logic [7:0]  protocol;
    logic [15:0] hdr_csum;
    logic [31:0] src;
    logic [31:0] dst;
  } ipv4_h_t;                                  // 20 bytes

  // TCP flag field: NS CWR ECE URG ACK PSH RST SYN FIN (9 bits)
  typedef struct packed {
    logic [15:0] sport;
    logic [15:0] dport;
    logic [31:0] seq;
    logic [31:0] ack;
    logic [3:0]  data_off;
    logic [2:0]  reserved;
    logic [8:0]  flags;
    logic [15:0] window;
    logic [15:0] csum;
    logic [15:0] urg;
  } tcp_h_t;                                   // 20 bytes

  localparam int unsigned HDR_BITS = $bits(eth_h_t) + $bits(ipv4_h_t) + $bits(tcp_h_t);  // 432

  localparam logic [8:0] TCP_FIN = 9'h001;
  localparam logic [8:0] TCP_SYN = 9'h002;
  localparam logic [8:0] TCP_RST = 9'h004;
  localparam logic [8:0] TCP_PSH = 9'h008;
  localparam logic [8:0] TCP_ACK = 9'h010;

  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IPPROTO_TCP    = 8'd6;

  // Parsed header vector
  typedef struct packed {
    eth_h_t      eth;
    ipv4_h_t     ip;
    tcp_h_t      tcp;
    logic        is_tcp;      // IPv4 (IHL 5) carrying TCP
    logic        mss_valid;   // first TCP option is MSS
    logic [15:0] mss;         // MSS option value
  } hdr_t;

  // Per-packet action of the proxy
  typedef enum logic [1:0] {
    ACT_DROP    = 2'd0,
    ACT_FORWARD = 2'd1,   // to the other side, headers unchanged except MACs
    ACT_SYNACK  = 2'd2,   // reflect a SYN back to the client as SYN/ACK
    ACT_RST     = 2'd3    // reflect a handshake-completing ACK as RST
  } action_e;

  // Mitigation strategy
  typedef enum logic {
    MODE_AUTH_FULL   = 1'b0,  // whitelist on any completing ACK
    MODE_AUTH_COOKIE = 1'b1   // whitelist only when the ACK carries a valid cookie
  } mode_e;

  // Four-tuple that the cookie hash covers
  typedef struct packed {
    logic [31:0] saddr;
    logic [31:0] daddr;
    logic [15:0] sport;
    logic [15:0] dport;
  } tuple_t;

  // MSS values selectable by the 3-bit MSS code of a cookie
  function automatic logic [15:0] mss_of_code(input logic [2:0] code);
    case (code)
      3'd0: return 16'd536;
      3'd1: return 16'd1024;
      3'd2: return 16'd1220;
      3'd3: return 16'd1300;
      3'd4: return 16'd1360;
      3'd5: return 16'd1400;
      3'd6: return 16'd1440;
      default: return 16'd1460;
    endcase
  endfunction

  // Largest table entry not above the client's MSS (code 0 if none fits)
  function automatic logic [2:0] code_of_mss(input logic [15:0] mss);
    logic [2:0] c;
    c = 3'd0;
    for (int i = 1; i < 8; i++)
      if (mss >= mss_of_code(3'(i))) c = 3'(i);
    return c;
  endfunction

endpackage
