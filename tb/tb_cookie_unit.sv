// tb_cookie_unit: checks cookie generation (timestamp | MSS code | 24-bit hash)
// against the reference SipHash, and verification: accepted for the right
// tuple at age 0 and MAX_AGE, rejected for a wrong hash, another tuple, or a
// timestamp older than MAX_AGE (also across the 5-bit wrap). Also checks the
// 10-cycle request-to-response latency.
module tb_cookie_unit;
  import syn_pkg::*;
  import tb_util_pkg::*;

  logic         clk = 1'b0;
  logic         rst_n;
  logic [127:0] key;
  logic         req_valid, req_verify;
  tuple_t       tuple;
  logic [4:0]   ts_now;
  logic [2:0]   mss_code;
  logic [31:0]  cookie_in;
  logic         ready, resp_valid, cookie_ok;
  logic [31:0]  cookie_out;
  logic [2:0]   mss_code_out;
  int checks = 0, failures = 0;

  cookie_unit #(.MAX_AGE(1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic request(input bit verify, input logic [31:0] cin, output int lat);
    @(negedge clk);
    req_verify = verify;
    cookie_in  = cin;
    req_valid  = 1'b1;
    @(posedge clk); #1 req_valid = 1'b0;
    lat = 1;
    while (!resp_valid) begin @(posedge clk); #1 lat++; end
  endtask

  initial begin
    int lat;
    logic [31:0] c, exp;
    logic [63:0] h;
    rst_n = 1'b0; req_valid = 1'b0; req_verify = 1'b0; cookie_in = '0;
    key = {$urandom, $urandom, $urandom, $urandom};
    tuple = '0; ts_now = '0; mss_code = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      tuple    = {$urandom, $urandom, $urandom};
      ts_now   = 5'($urandom);
      mss_code = 3'($urandom);
      h   = cookie_hash_ref(key, tuple.saddr, tuple.daddr, tuple.sport, tuple.dport, ts_now);
      exp = {ts_now, mss_code, h[23:0]};
      request(1'b0, '0, lat);
      c = cookie_out;
      check(c == exp, $sformatf("generate %h exp %h", c, exp));
      check(lat == 10, $sformatf("latency %0d", lat));
      // verify at age 0
      request(1'b1, c, lat);
      check(cookie_ok, "verify age 0");
      check(mss_code_out == mss_code, "mss code returned");
      // age 1 (MAX_AGE), possibly across the wrap
      ts_now = ts_now + 5'd1;
      request(1'b1, c, lat);
      check(cookie_ok, "verify age 1");
      // age 2: too old
      ts_now = ts_now + 5'd1;
      request(1'b1, c, lat);
      check(!cookie_ok, "reject age 2");
      ts_now = ts_now - 5'd2;
      // corrupted hash bit
      request(1'b1, c ^ (32'd1 << ($urandom % 24)), lat);
      check(!cookie_ok, "reject corrupted hash");
      // other tuple
      tuple.sport = tuple.sport ^ 16'h0001;
      request(1'b1, c, lat);
      check(!cookie_ok, "reject other tuple");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
