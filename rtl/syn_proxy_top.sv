// syn_proxy_top: SYN-flood mitigating proxy data plane (SYN authentication).
//
// The proxy sits between untrusted clients and protected servers. A client
// that is not yet whitelisted has its SYN answered by the proxy with a SYN/ACK
// whose sequence number is a cookie. When the client completes the handshake
// with an ACK, the proxy (Auth_cookie mode: after verifying the cookie in the
// acknowledgement number; Auth_full mode: without a check) whitelists the
// client's source address and answers with a RST. The client retries; its
// new connection, and all its later segments, are forwarded to the server
// untouched except for the MAC addresses. The proxy never creates packets: a
// reply is the received packet with swapped addresses and ports, new
// sequence/acknowledgement numbers and flags, and an incrementally updated
// TCP checksum. Spoofed SYN floods therefore cost one reflected reply each
// and never reach the server.
//
// Packet interface: AXI4-Stream style, 512-bit beats, byte 0 of the frame in
// bits [511:504], s_tkeep/m_tkeep mark valid bytes (most significant bit =
// byte 0), s_tport/m_tport carry the ingress/egress port with the first beat
// and all later beats. All headers are in the first beat.
//
// Timing: one packet is processed at a time. The first beat is accepted
// (cycle 0), the whitelist read returns in cycle 1, the rewritten first beat
// is offered in cycle 2 without a cookie and in cycle 12 when Auth_cookie
// mode generates or verifies one (the hash takes 10 cycles), and the next
// packet can be accepted the cycle after the last beat leaves. A
// minimum-size packet thus takes 3 cycles without and 13 cycles with a
// cookie: 66.7 Mpps and 15.4 Mpps at a 200 MHz clock. Input is held off until
// the whitelist has been cleared after reset.
//
// The strategy, message exchange, cookie layout, whitelist with second-chance
// ageing and the L2 forwarding core follow the paper; the bus format, the
// one-packet-at-a-time sequencing and the exact timing are this design's.
module syn_proxy_top
  import syn_pkg::*;
#(
  parameter int unsigned     WL_IDX_W       = 32,
  parameter longint unsigned SWEEP_INTERVAL = 64'd120_000_000_000, // 10 min at 200 MHz
  parameter longint unsigned TICK_CYCLES    = 64'd12_800_000_000,  // 64 s at 200 MHz
  parameter int unsigned     MAX_AGE        = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // ingress packet stream
  input  logic              s_tvalid,
  output logic              s_tready,
  input  logic [DATA_W-1:0] s_tdata,
  input  logic [KEEP_W-1:0] s_tkeep,
  input  logic              s_tlast,
  input  logic [PORT_W-1:0] s_tport,
  // egress packet stream
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic [DATA_W-1:0] m_tdata,
  output logic [KEEP_W-1:0] m_tkeep,
  output logic              m_tlast,
  output logic [PORT_W-1:0] m_tport,
  // control plane
  input  mode_e             mode,
  input  logic [127:0]      cookie_key,
  input  logic              cfg_we,
  input  logic              cfg_sel,
  input  logic [PORT_W-1:0] cfg_addr,
  input  logic [95:0]       cfg_data,
  input  logic              sweep_req,
  // status
  output logic              ready_init,
  output logic              wl_sweeping,
  output logic [31:0]       wl_sweep_count,
  output logic [31:0]       cnt_forward,
  output logic [31:0]       cnt_synack,
  output logic [31:0]       cnt_rst,
  output logic [31:0]       cnt_drop,
  output logic [31:0]       cnt_cookie_fail
);
  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_HASH, S_EMIT, S_BODY, S_DRAIN} state_e;
  state_e state;

  // ---------------- captured first beat ----------------------------------
  logic [DATA_W-1:0] beat_r;
  logic [KEEP_W-1:0] keep_r;
  logic              last_r;
  logic [PORT_W-1:0] port_r;
  hdr_t              hdr_in, hdr_r;
  logic              wl_hit_r;
  logic [31:0]       cookie_r;
  logic              cookie_ok_r;

  pkt_parser u_parser (.beat(s_tdata), .hdr(hdr_in));

  logic accept_first;
  assign accept_first = (state == S_IDLE) && s_tvalid && ready_init;

  // ---------------- timestamp and cookies --------------------------------
  logic [4:0] ts;
  timestamp_counter #(.TICK_CYCLES(TICK_CYCLES)) u_ts (.clk, .rst_n, .ts, .tick());

  logic        ck_req, ck_ready, ck_resp;
  logic [31:0] ck_cookie;
  logic        ck_ok;
  logic [2:0]  mss_code;
  logic        need_cookie, cookie_verify;
  tuple_t      tuple;

  assign mss_code = hdr_r.mss_valid ? code_of_mss(hdr_r.mss) : 3'd0;
  assign tuple    = '{saddr: hdr_r.ip.src, daddr: hdr_r.ip.dst,
                      sport: hdr_r.tcp.sport, dport: hdr_r.tcp.dport};

  cookie_unit #(.MAX_AGE(MAX_AGE)) u_cookie (
    .clk, .rst_n,
    .key          (cookie_key),
    .req_valid    (ck_req),
    .req_verify   (cookie_verify),
    .tuple,
    .ts_now       (ts),
    .mss_code,
    .cookie_in    (hdr_r.tcp.ack - 32'd1),
    .ready        (ck_ready),
    .resp_valid   (ck_resp),
    .cookie_out   (ck_cookie),
    .cookie_ok    (ck_ok),
    .mss_code_out ()
  );

  // ---------------- whitelist --------------------------------------------
  logic wl_lk_hit, wl_ins;

  whitelist #(.IDX_W(WL_IDX_W), .SWEEP_INTERVAL(SWEEP_INTERVAL)) u_wl (
    .clk, .rst_n,
    .lk_valid    (accept_first && hdr_in.is_tcp),
    .lk_idx      (hdr_in.ip.src[WL_IDX_W-1:0]),
    .lk_done     (),
    .lk_hit      (wl_lk_hit),
    .ins_valid   (wl_ins),
    .ins_idx     (hdr_r.ip.src[WL_IDX_W-1:0]),
    .sweep_req,
    .sweeping    (wl_sweeping),
    .init_done   (ready_init),
    .sweep_count (wl_sweep_count)
  );

  // ---------------- forwarding tables ------------------------------------
  logic [PORT_W-1:0] fwd_port, out_port;
  logic              client_side;
  logic [47:0]       src_mac, dst_mac;

  l2_forward u_l2 (
    .clk, .rst_n,
    .cfg_we, .cfg_sel, .cfg_addr, .cfg_data,
    .in_port (port_r),
    .fwd_port,
    .client_side,
    .out_port,
    .src_mac,
    .dst_mac
  );

  // ---------------- decision ---------------------------------------------
  action_e action;
  logic    wl_insert;
  logic    whitelisted_now;

  // in S_LOOKUP the whitelist answer arrives this cycle; later it is registered
  assign whitelisted_now = (state == S_LOOKUP) ? wl_lk_hit : wl_hit_r;

  auth_decision u_dec (
    .hdr          (hdr_r),
    .client_side,
    .whitelisted  (whitelisted_now),
    .mode,
    .cookie_ok    (cookie_ok_r),
    .need_cookie,
    .cookie_verify,
    .action,
    .wl_insert
  );

  assign ck_req = (state == S_LOOKUP) && need_cookie;

  // ---------------- header rewrite ---------------------------------------
  hdr_t              hdr_out;
  logic [4:0][15:0]  csum_old_w, csum_new_w;
  logic [15:0]       csum_new;
  logic [31:0]       synack_seq;

  assign out_port = (action == ACT_FORWARD) ? fwd_port : port_r;
  // Auth_full has no cookie: the SYN/ACK carries timestamp and MSS code only
  assign synack_seq = (mode == MODE_AUTH_COOKIE) ? cookie_r : {ts, mss_code, 24'd0};

  logic [31:0] new_seq, new_ack;
  logic [8:0]  new_flags;
  always_comb begin
    new_seq   = hdr_r.tcp.seq;
    new_ack   = hdr_r.tcp.ack;
    new_flags = hdr_r.tcp.flags;
    if (action == ACT_SYNACK) begin
      new_seq   = synack_seq;
      new_ack   = hdr_r.tcp.seq + 32'd1;
      new_flags = TCP_SYN | TCP_ACK;
    end else if (action == ACT_RST) begin
      new_seq   = hdr_r.tcp.ack;
      new_ack   = '0;
      new_flags = TCP_RST;
    end
  end

  always_comb begin
    hdr_out         = hdr_r;
    hdr_out.eth.src = src_mac;
    hdr_out.eth.dst = dst_mac;
    if (action == ACT_SYNACK || action == ACT_RST) begin
      hdr_out.ip.src    = hdr_r.ip.dst;
      hdr_out.ip.dst    = hdr_r.ip.src;
      hdr_out.tcp.sport = hdr_r.tcp.dport;
      hdr_out.tcp.dport = hdr_r.tcp.sport;
      hdr_out.tcp.seq   = new_seq;
      hdr_out.tcp.ack   = new_ack;
      hdr_out.tcp.flags = new_flags;
      hdr_out.tcp.csum  = csum_new;
    end
  end

  assign csum_old_w = {hdr_r.tcp.seq, hdr_r.tcp.ack,
                       {hdr_r.tcp.data_off, hdr_r.tcp.reserved, hdr_r.tcp.flags}};
  assign csum_new_w = {new_seq, new_ack,
                       {hdr_r.tcp.data_off, hdr_r.tcp.reserved, new_flags}};

  tcp_csum_update #(.N_WORDS(5)) u_csum (
    .csum_old  (hdr_r.tcp.csum),
    .words_old (csum_old_w),
    .words_new (csum_new_w),
    .csum_new
  );

  logic [DATA_W-1:0] beat_out;
  pkt_deparser u_deparser (.beat_in(beat_r), .hdr(hdr_out), .beat_out);

  // ---------------- stream control ---------------------------------------
  logic [PORT_W-1:0] out_port_r;   // egress of the body beats
  logic              emit_done;

  assign emit_done = (state == S_EMIT) && (action == ACT_DROP || m_tready);
  assign wl_ins    = emit_done && wl_insert;

  always_comb begin
    s_tready = 1'b0;
    m_tvalid = 1'b0;
    m_tdata  = beat_out;
    m_tkeep  = keep_r;
    m_tlast  = last_r;
    m_tport  = out_port;
    unique case (state)
      S_IDLE:  s_tready = ready_init;
      S_EMIT:  m_tvalid = (action != ACT_DROP);
      S_BODY: begin
        s_tready = m_tready;
        m_tvalid = s_tvalid;
        m_tdata  = s_tdata;
        m_tkeep  = s_tkeep;
        m_tlast  = s_tlast;
        m_tport  = out_port_r;
      end
      S_DRAIN: s_tready = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      beat_r          <= '0;
      keep_r          <= '0;
      last_r          <= 1'b0;
      port_r          <= '0;
      hdr_r           <= '0;
      wl_hit_r        <= 1'b0;
      cookie_r        <= '0;
      cookie_ok_r     <= 1'b0;
      out_port_r      <= '0;
      cnt_forward     <= '0;
      cnt_synack      <= '0;
      cnt_rst         <= '0;
      cnt_drop        <= '0;
      cnt_cookie_fail <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (accept_first) begin
          beat_r      <= s_tdata;
          keep_r      <= s_tkeep;
          last_r      <= s_tlast;
          port_r      <= s_tport;
          hdr_r       <= hdr_in;
          cookie_ok_r <= 1'b0;
          state       <= S_LOOKUP;
        end
        S_LOOKUP: begin
          wl_hit_r <= wl_lk_hit;
          state    <= (need_cookie && ck_ready) ? S_HASH : S_EMIT;
        end
        S_HASH: if (ck_resp) begin
          cookie_r    <= ck_cookie;
          cookie_ok_r <= ck_ok;
          if (cookie_verify && !ck_ok) cnt_cookie_fail <= cnt_cookie_fail + 32'd1;
          state       <= S_EMIT;
        end
        S_EMIT: if (emit_done) begin
          out_port_r <= out_port;
          unique case (action)
            ACT_FORWARD: cnt_forward <= cnt_forward + 32'd1;
            ACT_SYNACK:  cnt_synack  <= cnt_synack + 32'd1;
            ACT_RST:     cnt_rst     <= cnt_rst + 32'd1;
            default:     cnt_drop    <= cnt_drop + 32'd1;
          endcase
          if (last_r)                   state <= S_IDLE;
          else if (action == ACT_DROP)  state <= S_DRAIN;
          else                          state <= S_BODY;
        end
        S_BODY:  if (s_tvalid && m_tready && s_tlast) state <= S_IDLE;
        S_DRAIN: if (s_tvalid && s_tlast) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- stream rules -----------------------------------------
  // An offered beat stays offered and unchanged until it is taken, and the
  // cookie unit is idle whenever a packet asks for a cookie. The checks are
  // gated by rst_n because registers hold arbitrary values until the first
  // clock edge under reset; this use of the asynchronous reset as a data
  // input is why lint reports rst_n as both a synchronous and an
  // asynchronous net. It feeds only these checks, not the circuit.
  logic              stall_q;
  logic [DATA_W-1:0] stall_data_q;
  logic [PORT_W-1:0] stall_port_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stall_q      <= 1'b0;
      stall_data_q <= '0;
      stall_port_q <= '0;
    end else begin
      stall_q      <= m_tvalid && !m_tready;
      stall_data_q <= m_tdata;
      stall_port_q <= m_tport;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && stall_q)
      a_hold: assert (m_tvalid && m_tdata == stall_data_q && m_tport == stall_port_q)
        else $error("egress beat changed while stalled");
    if (rst_n && ck_req)
      a_ck_ready: assert (ck_ready) else $error("cookie unit busy on request");
  end
endmodule
