// auth_decision: per-packet action of the SYN-authentication proxy.
//
// Traffic from the server side and non-TCP traffic is forwarded. A TCP
// segment from the client side is forwarded if its source is whitelisted.
// Otherwise the proxy answers the handshake itself:
//   SYN (no ACK)            -> reflected as SYN/ACK carrying the cookie
//   ACK (no SYN, no RST)    -> Auth_full: reflected as RST, source whitelisted
//                              Auth_cookie: the same if the cookie in the
//                              acknowledgement number verifies, else dropped
//   anything else           -> dropped
// The client then retries its connection, which is now forwarded.
//
// need_cookie tells the datapath, before the action is final, that in
// Auth_cookie mode a cookie must be generated (SYN) or verified (ACK);
// Auth_full needs no hash at all. Purely
// combinational.
//
// The message exchange (SYN -> SYN/ACK, ACK -> RST plus whitelisting, retried
// connection forwarded) follows the paper's SYN authentication scheme;
// forwarding non-TCP traffic and dropping other unauthenticated segments are
// this design's choices.
module auth_decision
  import syn_pkg::*;
(
  input  hdr_t    hdr,
  input  logic    client_side,
  input  logic    whitelisted,
  input  mode_e   mode,
  input  logic    cookie_ok,     // verify result, used for ACKs in Auth_cookie
  output logic    need_cookie,
  output logic    cookie_verify, // 1: verify, 0: generate
  output action_e action,
  output logic    wl_insert
);
  logic syn, ack, rst;
  assign syn = (hdr.tcp.flags & TCP_SYN) != 0;
  assign ack = (hdr.tcp.flags & TCP_ACK) != 0;
  assign rst = (hdr.tcp.flags & TCP_RST) != 0;

  logic challenge, response;
  assign challenge = hdr.is_tcp && client_side && !whitelisted && syn && !ack && !rst;
  assign response  = hdr.is_tcp && client_side && !whitelisted && ack && !syn && !rst;

  always_comb begin
    need_cookie   = (challenge || response) && mode == MODE_AUTH_COOKIE;
    cookie_verify = response;
    wl_insert     = 1'b0;
    if (!hdr.is_tcp || !client_side || whitelisted) begin
      action = ACT_FORWARD;
    end else if (challenge) begin
      action = ACT_SYNACK;
    end else if (response && (mode == MODE_AUTH_FULL || cookie_ok)) begin
      action    = ACT_RST;
      wl_insert = 1'b1;
    end else begin
      action = ACT_DROP;
    end
  end
endmodule
