// tb_syn_proxy_full: the proxy at its default size (whitelist over the full
// IPv4 source address space, 2^32 entries in 2^27 words), run through one
// complete authentication in Auth_cookie mode.
//
// After reset it waits for the clearing pass over all 2^27 whitelist words,
// checking that it takes exactly that many cycles, then: a client SYN is
// answered with a SYN/ACK carrying the expected cookie; the client's ACK is
// answered with a RST; the client's retried SYN is forwarded to the server
// port; a spoofed SYN from an address that differs from the client's only in
// its top bit is answered, not forwarded (no aliasing in the full-size
// bitmap). Expected values are computed here with the reference SipHash and
// a from-scratch TCP checksum.
module tb_syn_proxy_full;
  import syn_pkg::*;
  import tb_util_pkg::*;

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

  syn_proxy_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat ((1 << 27) + 20000) @(posedge clk);
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
  beat_t             rx[$];
  logic [PORT_W-1:0] rx_port[$];

  assign m_tready = 1'b1;
  always @(posedge clk)
    if (m_tvalid && m_tready) begin rx.push_back(m_tdata); rx_port.push_back(m_tport); end

  task automatic send(input beat_t b);
    @(negedge clk);
    s_tvalid = 1'b1; s_tdata = b; s_tkeep = '1; s_tlast = 1'b1; s_tport = 0;
    @(posedge clk);
    while (!s_tready) @(posedge clk);
    #1 s_tvalid = 1'b0;
    repeat (30) @(posedge clk);
  endtask

  localparam logic [31:0] CLIENT = 32'h0c22_3844, SERVER = 32'h0a00_0001;

  initial begin
    beat_t p, b;
    logic [31:0] x, y;
    logic [63:0] h;
    int cyc;
    rst_n = 1'b0; s_tvalid = 1'b0; s_tdata = '0; s_tkeep = '0; s_tlast = 1'b0; s_tport = '0;
    mode = MODE_AUTH_COOKIE;
    cookie_key = 128'h0f0e0d0c_0b0a0908_07060504_03020100;
    cfg_we = 1'b0; cfg_sel = 1'b0; cfg_addr = '0; cfg_data = '0; sweep_req = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    cyc = 0;
    while (!ready_init) begin @(negedge clk); cyc++; end
    check(cyc == (1 << 27) + 1, $sformatf("whitelist clearing took %0d cycles", cyc));

    // SYN -> SYN/ACK with cookie
    x = 32'h1111_2222;
    p = make_tcp(48'h1, 48'h2, CLIENT, SERVER, 16'd43210, 16'd80, x, 0, TCP_SYN, 1'b1, 16'd1460);
    send(p);
    check(rx.size() == 1, "one SYN/ACK");
    b = rx.pop_front();
    check(rx_port.pop_front() == 0, "SYN/ACK on client port");
    y = get32(b, 38);
    h = cookie_hash_ref(cookie_key, CLIENT, SERVER, 16'd43210, 16'd80, y[31:27]);
    check(y[31:27] == 5'd0, "cookie timestamp");
    check(y[26:24] == 3'd7, "cookie MSS code for 1460");
    check(y[23:0] == h[23:0], "cookie hash");
    check(get32(b, 42) == x + 1, "ack = x + 1");
    check(get32(b, 26) == SERVER && get32(b, 30) == CLIENT, "addresses swapped");
    check(tcp_csum_ok(b), "SYN/ACK checksum");

    // ACK -> RST
    p = make_tcp(48'h1, 48'h2, CLIENT, SERVER, 16'd43210, 16'd80, x + 1, y + 1, TCP_ACK, 1'b0, 16'd0);
    send(p);
    check(rx.size() == 1, "one RST");
    b = rx.pop_front();
    void'(rx_port.pop_front());
    check(get16(b, 46) == 16'h5004, "RST flags");
    check(get32(b, 38) == y + 1, "RST seq = y + 1");
    check(tcp_csum_ok(b), "RST checksum");

    // retried SYN -> forwarded to the server port
    p = make_tcp(48'h1, 48'h2, CLIENT, SERVER, 16'd43211, 16'd80, x + 5, 0, TCP_SYN, 1'b1, 16'd1460);
    send(p);
    check(rx.size() == 1, "retried SYN forwarded");
    b = rx.pop_front();
    check(rx_port.pop_front() == 1, "forwarded to server port");
    check(b[DATA_W-1-12*8:0] == p[DATA_W-1-12*8:0], "forwarded headers unchanged after the MACs");

    // spoofed source differing in bit 31 only is not whitelisted
    p = make_tcp(48'h1, 48'h2, CLIENT ^ 32'h8000_0000, SERVER, 16'd43212, 16'd80, x, 0, TCP_SYN, 1'b0, 16'd0);
    send(p);
    check(rx.size() == 1, "spoofed SYN answered");
    b = rx.pop_front();
    check(rx_port.pop_front() == 0 && get16(b, 46) == 16'h5012, "spoofed SYN gets a SYN/ACK");
    check(cnt_synack == 2 && cnt_rst == 1 && cnt_forward == 1, "counters");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
