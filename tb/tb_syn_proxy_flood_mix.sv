// tb_syn_proxy_flood_mix: the proxy under a SYN flood mixed with legitimate
// clients, in both modes, with the whitelist reduced to 65536 entries.
//
// The scenario follows a flood measurement: 100 legitimate clients open
// connections while spoofed SYNs from random sources arrive back to back on
// the same ingress port (10 flood packets per client packet, in random
// order). Three rounds are streamed without gaps: (1) the clients' SYNs,
// (2) the clients' ACKs carrying their cookie + 1, plus forged ACKs with
// random acknowledgement numbers, (3) each client's retried SYN and a data
// segment. Flood SYNs are mixed into every round. Every output frame is
// checked against the frame that caused it (outputs come in input order):
// flood SYNs and client SYNs get a SYN/ACK on the ingress port with a cookie
// recomputed here, client ACKs get a RST with seq = ack, forged ACKs are
// dropped in Auth_cookie and whitelisted in Auth_full (as that mode accepts
// any ACK), and round 3 reaches the server port unchanged. Address ranges
// are chosen so that the low 16 bits, the whitelist index at this size,
// never collide between clients, forged ACKs and flood sources.
//
// Rate: the cycles per flood SYN in round 1 are measured. At the assumed
// 200 MHz clock, 14.88 Mpps (10 GbE line rate of minimum-size frames)
// allows 13.44 cycles per packet. Both modes must stay within that.
// Success rate: every client must end up with its data forwarded (100 %).
module tb_syn_proxy_flood_mix;
  import syn_pkg::*;
  import tb_util_pkg::*;

  localparam int unsigned WL_IDX_W  = 16;
  localparam int          N_CLIENTS = 100;
  localparam int          FLOOD_PER = 10;

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

  syn_proxy_top #(.WL_IDX_W(WL_IDX_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  typedef logic [DATA_W-1:0] beat_t;
  typedef enum logic [1:0] {E_SYNACK, E_RST, E_FWD, E_DROP} exp_e;
  typedef struct {
    beat_t b;
    exp_e  e;
    int    client;   // client index, -1 for flood / forged traffic
  } item_t;

  // ---------------- egress monitor (no back-pressure)
  beat_t             rx[$];
  logic [PORT_W-1:0] rx_port[$];
  assign m_tready = 1'b1;
  always @(posedge clk)
    if (m_tvalid) begin rx.push_back(m_tdata); rx_port.push_back(m_tport); end

  // ---------------- back-to-back ingress driver
  int     first_cyc, last_cyc, cyc;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic stream(input item_t items[$]);
    foreach (items[i]) begin
      @(negedge clk);
      s_tvalid = 1'b1; s_tdata = items[i].b; s_tkeep = '1; s_tlast = 1'b1; s_tport = 0;
      @(posedge clk);
      while (!s_tready) @(posedge clk);
      if (i == 0) first_cyc = cyc;
      last_cyc = cyc;
    end
    @(negedge clk) s_tvalid = 1'b0;
    repeat (40) @(posedge clk);
  endtask

  function automatic void shuffle(ref item_t q[$]);
    for (int i = q.size() - 1; i > 0; i--) begin
      int j;
      item_t t;
      j = int'($urandom_range(i, 0));
      t = q[i]; q[i] = q[j]; q[j] = t;
    end
  endfunction

  // ---------------- addresses
  localparam logic [31:0] SERVER = 32'h0a00_0050;
  function automatic logic [31:0] client_ip(int m, int c);
    return {16'h0a01, 8'(m + 1), 8'(c)};              // low 16 bits 0x0100..0x0263
  endfunction
  function automatic logic [31:0] flood_ip();
    return {16'($urandom), 1'b1, 15'($urandom)};      // low 16 bits 0x8000..0xffff
  endfunction
  int n_forged_ip = 0;
  function automatic logic [31:0] forged_ip();      // low 16 bits 0x4000..0x7fff, all distinct
    n_forged_ip++;
    return {16'($urandom), 2'b01, 14'(n_forged_ip)};
  endfunction

  logic [31:0] cl_isn[N_CLIENTS], cl_y[N_CLIENTS];

  // mechanism counts
  int n_flood_synack, n_client_synack, n_client_rst, n_forged_drop, n_forged_rst;
  int n_fwd_syn, n_fwd_data, n_clients_ok;

  task automatic add_flood(ref item_t q[$], input int n);
    repeat (n) begin
      item_t it;
      it.b = make_tcp(48'h1, 48'h2, flood_ip(), SERVER, 16'($urandom), 16'd80, $urandom, 0,
                      TCP_SYN, 1'b0, 16'd0);
      it.e = E_SYNACK; it.client = -1;
      q.push_back(it);
    end
  endtask

  // compare the outputs of one round with what its inputs must produce
  task automatic check_round(input item_t items[$], input mode_e md);
    int n_exp;
    n_exp = 0;
    foreach (items[i]) if (items[i].e != E_DROP) n_exp++;
    check(rx.size() == n_exp, $sformatf("round output count %0d, expected %0d", rx.size(), n_exp));
    foreach (items[i]) begin
      beat_t b, p;
      logic [PORT_W-1:0] port;
      logic [31:0] y;
      logic [63:0] h;
      p = items[i].b;
      if (items[i].e == E_DROP) begin
        if (items[i].client < 0) n_forged_drop++;
        continue;
      end
      if (rx.size() == 0) break;
      b = rx.pop_front();
      port = rx_port.pop_front();
      case (items[i].e)
        E_SYNACK: begin
          y = get32(b, 38);
          check(port == 0 && get16(b, 46) == ((get16(p, 46) & 16'hf000) | 16'h0012),
                "SYN/ACK on ingress port with SYN|ACK flags");
          check(get32(b, 26) == get32(p, 30) && get32(b, 30) == get32(p, 26), "SYN/ACK addresses swapped");
          check(get16(b, 34) == get16(p, 36) && get16(b, 36) == get16(p, 34), "SYN/ACK ports swapped");
          check(get32(b, 42) == get32(p, 38) + 1, "SYN/ACK ack = x + 1");
          check(y[31:27] == 5'd0, "cookie timestamp");
          check(y[26:24] == (get_byte(p, 46) == 8'h60 ? 3'd7 : 3'd0), "cookie MSS code");
          if (md == MODE_AUTH_COOKIE) begin
            h = cookie_hash_ref(cookie_key, get32(p, 26), get32(p, 30), get16(p, 34), get16(p, 36), y[31:27]);
            check(y[23:0] == h[23:0], "cookie hash");
          end else
            check(y[23:0] == 24'd0, "Auth_full sequence number has no hash");
          check(tcp_csum_ok(b), "SYN/ACK checksum");
          if (items[i].client >= 0) begin cl_y[items[i].client] = y; n_client_synack++; end
          else n_flood_synack++;
        end
        E_RST: begin
          check(port == 0 && get16(b, 46) == 16'h5004, "RST on ingress port");
          check(get32(b, 38) == get32(p, 42), "RST seq = client's ack");
          check(tcp_csum_ok(b), "RST checksum");
          if (items[i].client >= 0) n_client_rst++; else n_forged_rst++;
        end
        default: begin
          check(port == 1, "forwarded to the server port");
          check(b[DATA_W-1-12*8:0] == p[DATA_W-1-12*8:0], "forwarded frame unchanged after the MACs");
          if ((get16(p, 46) & 16'(TCP_SYN)) != 16'd0) n_fwd_syn++;
          else begin n_fwd_data++; n_clients_ok++; end
        end
      endcase
    end
    rx.delete(); rx_port.delete();
  endtask

  initial begin
    cyc = 0;
    rst_n = 1'b0; s_tvalid = 1'b0; s_tdata = '0; s_tkeep = '0; s_tlast = 1'b0; s_tport = '0;
    mode = MODE_AUTH_FULL; cookie_key = {$urandom, $urandom, $urandom, $urandom};
    cfg_we = 1'b0; cfg_sel = 1'b0; cfg_addr = '0; cfg_data = '0; sweep_req = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    while (!ready_init) @(posedge clk);

    for (int m = 0; m < 2; m++) begin
      item_t q[$];
      real   cpp;
      mode = mode_e'(m);
      n_flood_synack = 0; n_client_synack = 0; n_client_rst = 0; n_forged_drop = 0;
      n_forged_rst = 0; n_fwd_syn = 0; n_fwd_data = 0; n_clients_ok = 0;

      // round 1: client SYNs in a flood; rate measured on a flood-only block first
      q.delete();
      add_flood(q, 200);
      stream(q);
      cpp = real'(last_cyc - first_cyc) / real'(q.size() - 1);
      $display("mode %s: %0.2f cycles per flood SYN = %0.1f Mpps at 200 MHz",
               mode.name(), cpp, 200.0 / cpp);
      check(cpp <= 13.44, $sformatf("%s keeps up with 14.88 Mpps at 200 MHz (%0.2f cycles/SYN)",
                                    mode.name(), cpp));
      check(cpp <= (m == 0 ? 3.0 : 13.0), "cycles per SYN as designed (3 without, 13 with a cookie)");
      check_round(q, mode);

      q.delete();
      for (int c = 0; c < N_CLIENTS; c++) begin
        item_t it;
        cl_isn[c] = $urandom;
        it.b = make_tcp(48'h1, 48'h2, client_ip(m, c), SERVER, 16'(40000 + c), 16'd80, cl_isn[c], 0,
                        TCP_SYN, 1'b1, 16'd1460);
        it.e = E_SYNACK; it.client = c;
        q.push_back(it);
      end
      add_flood(q, N_CLIENTS * FLOOD_PER);
      shuffle(q);
      stream(q);
      check_round(q, mode);

      // round 2: client ACKs, forged ACKs, flood
      q.delete();
      for (int c = 0; c < N_CLIENTS; c++) begin
        item_t it;
        it.b = make_tcp(48'h1, 48'h2, client_ip(m, c), SERVER, 16'(40000 + c), 16'd80, cl_isn[c] + 1,
                        cl_y[c] + 1, TCP_ACK, 1'b0, 16'd0);
        it.e = E_RST; it.client = c;
        q.push_back(it);
        repeat (2) begin
          item_t f;
          f.b = make_tcp(48'h1, 48'h2, forged_ip(), SERVER, 16'($urandom), 16'd80, $urandom, $urandom,
                         TCP_ACK, 1'b0, 16'd0);
          f.e = (mode == MODE_AUTH_FULL) ? E_RST : E_DROP; f.client = -1;
          q.push_back(f);
        end
      end
      add_flood(q, N_CLIENTS * FLOOD_PER);
      shuffle(q);
      stream(q);
      check_round(q, mode);

      // round 3: retried SYN and a data segment per client, flood
      q.delete();
      for (int c = 0; c < N_CLIENTS; c++) begin
        item_t it;
        it.b = make_tcp(48'h1, 48'h2, client_ip(m, c), SERVER, 16'(41000 + c), 16'd80, cl_isn[c] + 7, 0,
                        TCP_SYN, 1'b1, 16'd1460);
        it.e = E_FWD; it.client = c;
        q.push_back(it);
        it.b = make_tcp(48'h1, 48'h2, client_ip(m, c), SERVER, 16'(41000 + c), 16'd80, cl_isn[c] + 8,
                        32'h1234_0000 + c, TCP_ACK | TCP_PSH, 1'b0, 16'd0);
        q.push_back(it);
      end
      add_flood(q, N_CLIENTS * FLOOD_PER);
      shuffle(q);
      stream(q);
      check_round(q, mode);

      $display("mode %s: flood SYN/ACKs %0d, client SYN/ACKs %0d, client RSTs %0d, forged ACKs dropped %0d / answered %0d, forwarded SYNs %0d, data %0d, clients served %0d of %0d",
               mode.name(), n_flood_synack, n_client_synack, n_client_rst, n_forged_drop, n_forged_rst,
               n_fwd_syn, n_fwd_data, n_clients_ok, N_CLIENTS);
      check(n_flood_synack == 200 + 3 * N_CLIENTS * FLOOD_PER, "every flood SYN answered, none forwarded");
      check(n_client_synack == N_CLIENTS && n_client_rst == N_CLIENTS, "every client authenticated");
      check(n_fwd_syn == N_CLIENTS && n_clients_ok == N_CLIENTS, "every client's request served (100 %)");
      if (mode == MODE_AUTH_COOKIE)
        check(n_forged_drop == 2 * N_CLIENTS && n_forged_rst == 0, "forged ACKs dropped");
      else
        check(n_forged_rst == 2 * N_CLIENTS, "forged ACKs accepted by Auth_full");
    end
    check(cnt_cookie_fail == 2 * N_CLIENTS, "cookie failure counter");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
