// tb_syn_proxy_top: end-to-end test of the SYN-authentication proxy at a
// reduced whitelist (4096 entries) and a short timestamp step.
//
// For each mode (Auth_full, then Auth_cookie) it plays the handshake of a
// legitimate client: SYN -> SYN/ACK from the proxy with the expected cookie,
// ACK -> RST and whitelisting, retried SYN and a two-beat data segment
// forwarded to the server port, and a server reply forwarded back. It then
// sends a SYN flood from random sources, forged ACKs, stray RST/FIN, non-TCP
// frames, a multi-beat segment to be dropped, a stale cookie, and lets the
// whitelist age a client out. Every output frame is compared field by field
// with values computed here (reference SipHash, full TCP checksum recomputed)
// while the egress side applies random back-pressure. The cycles per SYN of
// the flood are checked: 3 per SYN in Auth_full and 13 in Auth_cookie, both
// within the 13.4 cycles that 14.88 Mpps allows at the assumed 200 MHz clock.
// Each mechanism is counted and one that never happened counts as a failure.
module tb_syn_proxy_top;
  import syn_pkg::*;
  import tb_util_pkg::*;

  localparam int unsigned WL_IDX_W = 12;
  localparam longint unsigned TICK = 3000;

  logic              clk = 1'b0;
  logic              rst_n;
  logic              s_tvalid, s_tready, s_tlast;
  logic [DATA_W-1:0] s_tdata;
  logic [KEEP_W-1:0] s_tkeep;
  logic [PORT_W-1:0] s_tport;
  logic              m_tvalid, m_tready, m_tlast;
  logic [DATA_W-1:0] m_tdata;
  logic [KEEP_W-1:0] m_tkeep;
  logic [PORT_W-1:0] m_tport;
  mode_e             mode;
  logic [127:0]      cookie_key;
  logic              cfg_we, cfg_sel;
  logic [PORT_W-1:0] cfg_addr;
  logic [95:0]       cfg_data;
  logic              sweep_req, ready_init, wl_sweeping;
  logic [31:0]       wl_sweep_count, cnt_forward, cnt_synack, cnt_rst, cnt_drop, cnt_cookie_fail;

  syn_proxy_top #(
    .WL_IDX_W(WL_IDX_W), .SWEEP_INTERVAL(64'hffff_ffff_ffff), .TICK_CYCLES(TICK), .MAX_AGE(1)
  ) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_synack, n_rst, n_fwd_c2s, n_fwd_s2c, n_body, n_drop, n_drain, n_forged,
      n_nontcp, n_stall, n_aged, n_stale, n_flood;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL @%0d %s", cycle, what);
    end
  endtask

  // ---------------- egress monitor with random back-pressure -------------
  typedef logic [DATA_W-1:0] beat_t;
  typedef struct {
    beat_t          beats[$];
    logic [PORT_W-1:0] port;
  } frame_t;
  frame_t rxq[$];
  beat_t  cur[$];
  bit     bp_on = 1'b0;

  always @(negedge clk) m_tready <= bp_on ? ($urandom % 4 != 0) : 1'b1;

  always @(posedge clk) begin
    if (m_tvalid && !m_tready) n_stall++;
    if (m_tvalid && m_tready) begin
      cur.push_back(m_tdata);
      if (m_tlast) begin
        frame_t f;
        f.beats = cur;
        f.port  = m_tport;
        rxq.push_back(f);
        cur = {};
      end
    end
  end

  // ---------------- ingress driver ----------------------------------------
  task automatic send(input beat_t beats[$], input logic [PORT_W-1:0] port);
    foreach (beats[i]) begin
      @(negedge clk);
      s_tvalid = 1'b1;
      s_tdata  = beats[i];
      s_tkeep  = '1;
      s_tlast  = (i == beats.size() - 1);
      s_tport  = port;
      @(posedge clk);
      while (!s_tready) @(posedge clk);
      #1 s_tvalid = 1'b0;
    end
  endtask

  // wait for the proxy to finish and return what left it
  task automatic collect(output frame_t fs[$]);
    repeat (40) @(posedge clk);
    fs = rxq;
    rxq = {};
  endtask

  // ---------------- addresses ---------------------------------------------
  localparam logic [47:0] MAC_P0_SRC = 48'h02_00_00_00_00_10, MAC_P0_DST = 48'h02_00_00_00_00_c1;
  localparam logic [47:0] MAC_P1_SRC = 48'h02_00_00_00_00_11, MAC_P1_DST = 48'h02_00_00_00_00_5e;
  localparam logic [31:0] SERVER = 32'h0a00_0001;

  function automatic logic [2:0] mss_code_ref(logic [15:0] mss);
    logic [15:0] tab [8] = '{536, 1024, 1220, 1300, 1360, 1400, 1440, 1460};
    logic [2:0] c = 0;
    for (int i = 0; i < 8; i++) if (mss >= tab[i]) c = 3'(i);
    return c;
  endfunction

  function automatic logic [4:0] ts_ref();
    return 5'((cycle - reset_cycle) / longint'(TICK));
  endfunction
  longint reset_cycle;

  // ---------------- expected replies --------------------------------------
  // returns the SYN/ACK's sequence number (the cookie) after checking it
  task automatic expect_synack(input beat_t syn, output logic [31:0] y);
    frame_t fs[$];
    beat_t  b;
    logic [63:0] h;
    logic [4:0] tsr;
    collect(fs);
    check(fs.size() == 1, $sformatf("SYN/ACK: %0d frames out", fs.size()));
    if (fs.size() != 1) begin y = '0; return; end
    b = fs[0].beats[0];
    y = get32(b, 38);
    n_synack++;
    check(fs[0].port == 0, "SYN/ACK leaves on the client port");
    check({get32(b, 0), get16(b, 4)} == MAC_P0_DST && {get32(b, 6), get16(b, 10)} == MAC_P0_SRC, "SYN/ACK MACs");
    check(get32(b, 26) == get32(syn, 30) && get32(b, 30) == get32(syn, 26), "SYN/ACK IPs swapped");
    check(get16(b, 34) == get16(syn, 36) && get16(b, 36) == get16(syn, 34), "SYN/ACK ports swapped");
    check(get32(b, 42) == get32(syn, 38) + 1, "SYN/ACK ack = x + 1");
    check(get16(b, 46) == ((get16(syn, 46) & 16'hf000) | 16'h0012), "SYN/ACK flags");
    check(tcp_csum_ok(b), "SYN/ACK TCP checksum");
    check(get_byte(b, 22) == get_byte(syn, 22), "TTL unchanged");
    // cookie fields
    tsr = ts_ref();
    check(y[31:27] == tsr || y[31:27] == tsr - 5'd1, $sformatf("cookie ts %0d vs %0d", y[31:27], tsr));
    if (get_byte(syn, 54) == 8'd2) check(y[26:24] == mss_code_ref(get16(syn, 56)), "cookie MSS code");
    else                           check(y[26:24] == 3'd0, "cookie MSS code without option");
    if (mode == MODE_AUTH_COOKIE) begin
      h = cookie_hash_ref(cookie_key, get32(syn, 26), get32(syn, 30), get16(syn, 34), get16(syn, 36), y[31:27]);
      check(y[23:0] == h[23:0], "cookie hash");
    end else begin
      check(y[23:0] == 24'd0, "Auth_full SYN/ACK carries no hash");
    end
  endtask

  task automatic expect_rst(input beat_t ackp);
    frame_t fs[$];
    beat_t  b;
    collect(fs);
    check(fs.size() == 1, $sformatf("RST: %0d frames out", fs.size()));
    if (fs.size() != 1) return;
    b = fs[0].beats[0];
    n_rst++;
    check(fs[0].port == 0, "RST leaves on the client port");
    check(get32(b, 26) == get32(ackp, 30) && get32(b, 30) == get32(ackp, 26), "RST IPs swapped");
    check(get16(b, 34) == get16(ackp, 36) && get16(b, 36) == get16(ackp, 34), "RST ports swapped");
    check(get32(b, 38) == get32(ackp, 42), "RST seq = y + 1");
    check(get16(b, 46) == ((get16(ackp, 46) & 16'hf000) | 16'h0004), "RST flags");
    check(tcp_csum_ok(b), "RST TCP checksum");
  endtask

  task automatic expect_forward(input beat_t beats[$], input logic [PORT_W-1:0] port);
    frame_t fs[$];
    beat_t  b;
    logic [47:0] s, d;
    collect(fs);
    check(fs.size() == 1, $sformatf("forward: %0d frames out", fs.size()));
    if (fs.size() != 1) return;
    check(fs[0].port == port, "forward port");
    check(fs[0].beats.size() == beats.size(), "forward beat count");
    if (fs[0].beats.size() != beats.size()) return;
    {s, d} = (port == 1) ? {MAC_P1_SRC, MAC_P1_DST} : {MAC_P0_SRC, MAC_P0_DST};
    b = beats[0];
    for (int k = 0; k < 6; k++) b = put_byte(b, k, d[8*(5-k) +: 8]);
    for (int k = 0; k < 6; k++) b = put_byte(b, 6 + k, s[8*(5-k) +: 8]);
    check(fs[0].beats[0] == b, "forwarded first beat: only MACs rewritten");
    for (int i = 1; i < beats.size(); i++) begin
      check(fs[0].beats[i] == beats[i], "forwarded body beat");
      n_body++;
    end
    if (port == 1) n_fwd_c2s++; else n_fwd_s2c++;
  endtask

  task automatic expect_drop();
    frame_t fs[$];
    collect(fs);
    check(fs.size() == 0, $sformatf("drop: %0d frames out", fs.size()));
    n_drop++;
  endtask

  function automatic beat_t tcp(logic [31:0] sa, logic [15:0] sp, logic [31:0] seq,
                                logic [31:0] ack, logic [8:0] flags, bit mss);
    return make_tcp(48'h02_00_00_00_00_10, 48'h02_00_00_00_00_c1, sa, SERVER, sp, 16'd80,
                    seq, ack, flags, mss, 16'd1460);
  endfunction

  function automatic beat_t rand_beat();
    beat_t b;
    for (int w = 0; w < 16; w++) b[32*w +: 32] = $urandom;
    return b;
  endfunction

  // ---------------- one legitimate handshake -------------------------------
  task automatic handshake(input logic [31:0] client, input logic [15:0] sp);
    beat_t p, a;
    beat_t q[$];
    logic [31:0] x, y;
    x = $urandom;
    p = tcp(client, sp, x, 0, TCP_SYN, 1'b1);
    send('{p}, 0);
    expect_synack(p, y);
    a = tcp(client, sp, x + 1, y + 1, TCP_ACK, 1'b0);
    send('{a}, 0);
    expect_rst(a);
    // the client retries: now forwarded
    p = tcp(client, sp + 16'd1, x + 7, 0, TCP_SYN, 1'b1);
    send('{p}, 0);
    expect_forward('{p}, 1);
    // two-beat data segment
    q = '{tcp(client, sp + 16'd1, x + 8, 32'h1234, TCP_ACK | TCP_PSH, 1'b0), rand_beat()};
    send(q, 0);
    expect_forward(q, 1);
    // server answer goes back to the client port
    p = make_tcp(48'h02_00_00_00_00_11, 48'h02_00_00_00_00_5e, SERVER, client, 16'd80,
                 sp + 16'd1, 32'h1234, x + 9, TCP_ACK, 1'b0, 16'd0);
    q = '{p, rand_beat(), rand_beat()};
    send(q, 1);
    expect_forward(q, 0);
  endtask

  initial begin
    beat_t p, a;
    beat_t q[$];
    logic [31:0] y, c;
    longint t0;
    int nflood;
    rst_n = 1'b0; s_tvalid = 1'b0; s_tdata = '0; s_tkeep = '0; s_tlast = 1'b0; s_tport = '0;
    mode = MODE_AUTH_FULL; cookie_key = {$urandom, $urandom, $urandom, $urandom};
    cfg_we = 1'b0; cfg_sel = 1'b0; cfg_addr = '0; cfg_data = '0; sweep_req = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    reset_cycle = cycle;
    // MAC table: port 0 faces the clients, port 1 the server
    @(negedge clk) begin cfg_we = 1'b1; cfg_sel = 1'b1; cfg_addr = 0; cfg_data = {MAC_P0_SRC, MAC_P0_DST}; end
    @(negedge clk) begin cfg_addr = 1; cfg_data = {MAC_P1_SRC, MAC_P1_DST}; end
    @(negedge clk) cfg_we = 1'b0;
    while (!ready_init) @(negedge clk);

    for (int m = 0; m < 2; m++) begin
      mode = mode_e'(m);
      bp_on = 1'b1;
      handshake(32'hc0a8_0000 + 32'(m * 256 + 5), 16'd40000);

      // SYN flood from random sources: every SYN answered, none forwarded
      bp_on = 1'b0;
      nflood = 0;
      @(negedge clk);
      t0 = cycle;
      for (int i = 0; i < 50; i++) begin
        p = tcp($urandom | 32'h0100_0000, 16'($urandom), $urandom, 0, TCP_SYN, 1'b0);
        send('{p}, 0);
      end
      t0 = cycle - t0;
      repeat (40) @(posedge clk);
      check(rxq.size() == 50, $sformatf("flood: %0d SYN/ACKs for 50 SYNs", rxq.size()));
      foreach (rxq[i]) begin
        check(rxq[i].port == 0, "flood reply on client port");
        check((get16(rxq[i].beats[0], 46) & 16'h0fff) == 16'h0012, "flood reply is SYN/ACK");
      end
      n_flood += rxq.size();
      rxq = {};
      $display("mode %0d: 50 SYNs in %0d cycles (%0.1f cycles/SYN)", m, t0, real'(t0) / 50.0);
      if (mode == MODE_AUTH_FULL)
        check(t0 <= 50 * 3 + 2, "Auth_full: 3 cycles per SYN, above 14.88 Mpps at 200 MHz");
      else
        check(t0 <= 50 * 13 + 2, "Auth_cookie: 13 cycles per SYN, above 14.88 Mpps at 200 MHz");

      // forged ACK from an unknown source
      bp_on = 1'b1;
      a = tcp(32'h0bad_0000 + 32'(m), 16'd1234, 32'h55, 32'h1234_5679, TCP_ACK, 1'b0);
      send('{a}, 0);
      if (mode == MODE_AUTH_COOKIE) begin
        expect_drop();
        n_forged++;
      end else begin
        expect_rst(a);   // Auth_full whitelists any completing ACK
      end
      // stray RST and FIN from unknown sources, multi-beat junk
      send('{tcp(32'h0bad_1a01, 16'd1, 1, 1, TCP_RST, 1'b0)}, 0);
      expect_drop();
      send('{tcp(32'h0bad_1a02, 16'd1, 1, 1, TCP_FIN, 1'b0), rand_beat(), rand_beat()}, 0);
      expect_drop();
      n_drain++;
      // non-TCP frame (ARP) is forwarded
      p = rand_beat();
      p = put16(p, 12, 16'h0806);
      send('{p}, 0);
      expect_forward('{p}, 1);
      n_nontcp++;
    end

    // stale cookie (Auth_cookie): answer after two timestamp steps
    mode = MODE_AUTH_COOKIE;
    p = tcp(32'hc0a8_0300, 16'd5000, 32'h1000, 0, TCP_SYN, 1'b1);
    send('{p}, 0);
    expect_synack(p, y);
    repeat (2 * TICK + 10) @(posedge clk);
    a = tcp(32'hc0a8_0300, 16'd5000, 32'h1001, y + 1, TCP_ACK, 1'b0);
    send('{a}, 0);
    expect_drop();
    n_stale++;
    check(cnt_cookie_fail >= 2, "cookie failures counted");

    // ageing: a whitelisted client unseen for two passes is removed
    c = 32'hc0a8_0400;
    handshake(c, 16'd6000);
    sweep_req = 1'b1; @(negedge clk); sweep_req = 1'b0;
    while (wl_sweeping) @(negedge clk);
    // still whitelisted after one pass
    q = '{tcp(c, 16'd6001, 32'h77, 32'h88, TCP_ACK, 1'b0)};
    send(q, 0);
    expect_forward(q, 1);
    // two quiet passes
    repeat (2) begin
      @(negedge clk) sweep_req = 1'b1; @(negedge clk) sweep_req = 1'b0;
      while (wl_sweeping) @(negedge clk);
    end
    send(q, 0);
    expect_drop();   // no longer whitelisted; its ACK fails the cookie check
    n_aged++;
    check(wl_sweep_count == 3, $sformatf("sweep count %0d", wl_sweep_count));

    // counters of the proxy agree with what was seen
    check(cnt_synack == 32'(n_synack + n_flood), $sformatf("cnt_synack %0d vs %0d", cnt_synack, n_synack + n_flood));
    check(cnt_rst == 32'(n_rst), $sformatf("cnt_rst %0d vs %0d", cnt_rst, n_rst));
    check(cnt_drop == 32'(n_drop), $sformatf("cnt_drop %0d vs %0d", cnt_drop, n_drop));
    check(cnt_forward == 32'(n_fwd_c2s + n_fwd_s2c), $sformatf("cnt_forward %0d", cnt_forward));

    $display("mechanisms: synack=%0d flood=%0d rst=%0d fwd_c2s=%0d fwd_s2c=%0d body=%0d drop=%0d drain=%0d forged=%0d nontcp=%0d stall=%0d stale=%0d aged=%0d",
             n_synack, n_flood, n_rst, n_fwd_c2s, n_fwd_s2c, n_body, n_drop, n_drain, n_forged,
             n_nontcp, n_stall, n_stale, n_aged);
    check(n_synack > 0, "SYN/ACK reflection happened");
    check(n_flood > 0, "flood happened");
    check(n_rst > 0, "RST reflection happened");
    check(n_fwd_c2s > 0 && n_fwd_s2c > 0, "forwarding both ways happened");
    check(n_body > 0, "multi-beat forwarding happened");
    check(n_drain > 0, "multi-beat drop happened");
    check(n_forged > 0, "forged ACK rejection happened");
    check(n_nontcp > 0, "non-TCP forwarding happened");
    check(n_stall > 0, "egress back-pressure happened");
    check(n_stale > 0, "stale cookie rejection happened");
    check(n_aged > 0, "whitelist ageing removal happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
