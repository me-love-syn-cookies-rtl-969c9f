// cookie_unit: computes and verifies the 32-bit SYN cookie.
//
// Cookie layout (bit 31 first): 5-bit timestamp | 3-bit MSS code | 24-bit hash.
// The hash is the low 24 bits of SipHash-2-4 over 13 bytes: source address,
// destination address, source port, destination port (network byte order)
// and the 5-bit timestamp in the last byte. The MSS code is not hashed.
//
// A request (req_valid, accepted when ready) either generates a cookie for
// tuple/ts_now/mss_code, or verifies cookie_in against tuple and ts_now: the
// cookie's timestamp must be at most MAX_AGE steps old (modulo 32) and the
// hash recomputed with that timestamp must match. resp_valid pulses 10
// cycles after the request; cookie_out, cookie_ok and mss_code_out are then
// valid and hold until the next response.
//
// The field widths and what the hash covers follow the paper; the field order,
// MAX_AGE and the byte order of the hashed message are this design's choices.
module cookie_unit
  import syn_pkg::*;
#(
  parameter int unsigned MAX_AGE = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [127:0] key,
  input  logic         req_valid,
  input  logic         req_verify,   // 0: generate, 1: verify
  input  tuple_t       tuple,
  input  logic [4:0]   ts_now,
  input  logic [2:0]   mss_code,
  input  logic [31:0]  cookie_in,
  output logic         ready,
  output logic         resp_valid,
  output logic [31:0]  cookie_out,
  output logic         cookie_ok,
  output logic [2:0]   mss_code_out
);
  logic             busy, done, pending;
  logic [63:0]      hash;
  logic [15:0][7:0] msg;
  logic [4:0]       ts_sel;
  logic             verify_q;
  logic [31:0]      cookie_q;
  logic [2:0]       mss_q;
  logic [4:0]       ts_q, now_q;

  assign ts_sel = req_verify ? cookie_in[31:27] : ts_now;
  assign ready  = !busy && !pending;

  always_comb begin
    logic [103:0] m;
    m = {tuple.saddr, tuple.daddr, tuple.sport, tuple.dport, 3'b000, ts_sel};
    msg = '0;
    for (int i = 0; i < 13; i++) msg[i] = m[103 - 8*i -: 8];
  end

  siphash u_hash (
    .clk, .rst_n,
    .start (req_valid && ready),
    .key,
    .msg,
    .len   (5'd13),
    .busy,
    .done,
    .hash
  );

  logic [4:0] age;
  assign age = now_q - cookie_q[31:27];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending      <= 1'b0;
      verify_q     <= 1'b0;
      cookie_q     <= '0;
      mss_q        <= '0;
      ts_q         <= '0;
      now_q        <= '0;
      resp_valid   <= 1'b0;
      cookie_out   <= '0;
      cookie_ok    <= 1'b0;
      mss_code_out <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (req_valid && ready) begin
        pending  <= 1'b1;
        verify_q <= req_verify;
        cookie_q <= cookie_in;
        mss_q    <= mss_code;
        ts_q     <= ts_now;
        now_q    <= ts_now;
      end
      if (pending && done) begin
        pending    <= 1'b0;
        resp_valid <= 1'b1;
        if (verify_q) begin
          cookie_out   <= cookie_q;
          cookie_ok    <= (hash[23:0] == cookie_q[23:0]) && (32'(age) <= MAX_AGE);
          mss_code_out <= cookie_q[26:24];
        end else begin
          cookie_out   <= {ts_q, mss_q, hash[23:0]};
          cookie_ok    <= 1'b1;
          mss_code_out <= mss_q;
        end
      end
    end
  end
endmodule
