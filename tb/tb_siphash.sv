// tb_siphash: checks the SipHash-2-4 unit against the published test vector
// (key 00..0f, message 00..0e -> a129ca6149be45e5) and against a reference
// model for random keys, messages and lengths 0..16, including the latency of
// (len/8+1)*2 + 4 + 1 clock edges from start to done.
module tb_siphash;
  import tb_util_pkg::*;

  logic             clk = 1'b0;
  logic             rst_n;
  logic             start;
  logic [127:0]     key;
  logic [15:0][7:0] msg;
  logic [4:0]       len;
  logic             busy, done;
  logic [63:0]      hash;
  int checks = 0, failures = 0;

  siphash dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [127:0] k, input byte unsigned m[$]);
    logic [63:0] exp;
    int cyc, lat;
    key = k;
    msg = '0;
    foreach (m[i]) msg[i] = m[i];
    len = 5'(m.size());
    exp = sip_ref(k, m);
    lat = (m.size() / 8 + 1) * 2 + 4 + 1;
    @(negedge clk); start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    msg = '1;   // inputs are only sampled at start
    cyc = 1;
    while (!done) begin @(posedge clk); #1 cyc++; end
    checks++;
    if (hash !== exp) begin
      failures++;
      $display("FAIL len=%0d hash=%h exp=%h", m.size(), hash, exp);
    end
    checks++;
    if (cyc != lat) begin
      failures++;
      $display("FAIL len=%0d latency %0d expected %0d", m.size(), cyc, lat);
    end
  endtask

  initial begin
    byte unsigned m[$];
    logic [127:0] k;
    rst_n = 1'b0; start = 1'b0; key = '0; msg = '0; len = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // published vector
    for (int i = 0; i < 16; i++) k[8*i +: 8] = 8'(i);
    m = {};
    for (int i = 0; i < 15; i++) m.push_back(byte'(i));
    run(k, m);
    checks++;
    if (hash !== 64'ha129ca6149be45e5) begin
      failures++;
      $display("FAIL published vector: %h", hash);
    end
    // random
    for (int t = 0; t < 200; t++) begin
      k = {$urandom, $urandom, $urandom, $urandom};
      m = {};
      for (int i = 0; i < int'(t % 17); i++) m.push_back(byte'($urandom));
      run(k, m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
