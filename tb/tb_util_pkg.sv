// tb_util_pkg: reference models and packet helpers shared by the testbenches.
//
// sip_ref    straight-line SipHash-2-4 over a byte queue, written from the
//            algorithm's definition, independent of the RTL's round sequencing.
// make_tcp   builds a first beat (byte 0 in bits [511:504]) holding an
//            Ethernet/IPv4/TCP SYN/ACK/... segment with an optional MSS option
//            and a correct TCP checksum (header-only segment).
// tcp_csum_ok recomputes the full TCP checksum of such a beat from scratch.
package tb_util_pkg;

  function automatic logic [63:0] rotl(logic [63:0] x, int b);
    return (x << b) | (x >> (64 - b));
  endfunction

  function automatic logic [63:0] sip_ref(logic [127:0] key, byte unsigned m[$]);
    logic [63:0] k0, k1, v0, v1, v2, v3, w;
    int n, nb;
    k0 = key[63:0];
    k1 = key[127:64];
    v0 = k0 ^ 64'h736f6d6570736575;
    v1 = k1 ^ 64'h646f72616e646f6d;
    v2 = k0 ^ 64'h6c7967656e657261;
    v3 = k1 ^ 64'h7465646279746573;
    n  = m.size();
    nb = n / 8 + 1;
    for (int b = 0; b < nb; b++) begin
      w = '0;
      for (int i = 0; i < 8; i++) begin
        int j;
        j = 8 * b + i;
        if (j < n) w[8*i +: 8] = m[j];
      end
      if (b == nb - 1) w[63:56] = 8'(n);
      v3 ^= w;
      repeat (2) begin
        v0 += v1; v1 = rotl(v1, 13); v1 ^= v0; v0 = rotl(v0, 32);
        v2 += v3; v3 = rotl(v3, 16); v3 ^= v2;
        v0 += v3; v3 = rotl(v3, 21); v3 ^= v0;
        v2 += v1; v1 = rotl(v1, 17); v1 ^= v2; v2 = rotl(v2, 32);
      end
      v0 ^= w;
    end
    v2 ^= 64'hff;
    repeat (4) begin
      v0 += v1; v1 = rotl(v1, 13); v1 ^= v0; v0 = rotl(v0, 32);
      v2 += v3; v3 = rotl(v3, 16); v3 ^= v2;
      v0 += v3; v3 = rotl(v3, 21); v3 ^= v0;
      v2 += v1; v1 = rotl(v1, 17); v1 ^= v2; v2 = rotl(v2, 32);
    end
    return v0 ^ v1 ^ v2 ^ v3;
  endfunction

  // cookie hash input: saddr, daddr, sport, dport, timestamp
  function automatic logic [63:0] cookie_hash_ref(logic [127:0] key, logic [31:0] sa,
                                                  logic [31:0] da, logic [15:0] sp,
                                                  logic [15:0] dp, logic [4:0] ts);
    byte unsigned m[$];
    for (int i = 3; i >= 0; i--) m.push_back(sa[8*i +: 8]);
    for (int i = 3; i >= 0; i--) m.push_back(da[8*i +: 8]);
    m.push_back(sp[15:8]); m.push_back(sp[7:0]);
    m.push_back(dp[15:8]); m.push_back(dp[7:0]);
    m.push_back({3'b000, ts});
    return sip_ref(key, m);
  endfunction

  function automatic logic [7:0] get_byte(logic [511:0] beat, int k);
    return beat[511 - 8*k -: 8];
  endfunction

  function automatic logic [511:0] put_byte(logic [511:0] beat, int k, logic [7:0] v);
    beat[511 - 8*k -: 8] = v;
    return beat;
  endfunction

  function automatic logic [511:0] put16(logic [511:0] beat, int k, logic [15:0] v);
    beat = put_byte(beat, k, v[15:8]);
    return put_byte(beat, k + 1, v[7:0]);
  endfunction

  function automatic logic [511:0] put32(logic [511:0] beat, int k, logic [31:0] v);
    beat = put16(beat, k, v[31:16]);
    return put16(beat, k + 2, v[15:0]);
  endfunction

  function automatic logic [15:0] get16(logic [511:0] beat, int k);
    return {get_byte(beat, k), get_byte(beat, k + 1)};
  endfunction

  function automatic logic [31:0] get32(logic [511:0] beat, int k);
    return {get16(beat, k), get16(beat, k + 2)};
  endfunction

  // one's-complement sum of the TCP pseudo header and a header-only segment
  function automatic logic [15:0] tcp_sum(logic [511:0] beat);
    int unsigned s;
    int tl;
    tl = 4 * int'(get_byte(beat, 46) >> 4);
    s = 0;
    s += get16(beat, 26) + get16(beat, 28) + get16(beat, 30) + get16(beat, 32);
    s += 6 + tl;
    for (int k = 0; k < tl; k += 2) s += get16(beat, 34 + k);
    while (s > 32'hffff) s = (s & 32'hffff) + (s >> 16);
    return 16'(s);
  endfunction

  function automatic bit tcp_csum_ok(logic [511:0] beat);
    return tcp_sum(beat) == 16'hffff;
  endfunction

  function automatic logic [511:0] make_tcp(logic [47:0] dmac, logic [47:0] smac,
                                           logic [31:0] sa, logic [31:0] da,
                                           logic [15:0] sp, logic [15:0] dp,
                                           logic [31:0] seq, logic [31:0] ack,
                                           logic [8:0] flags, bit with_mss,
                                           logic [15:0] mss);
    logic [511:0] b;
    int doff;
    doff = with_mss ? 6 : 5;
    b = '0;
    for (int i = 0; i < 6; i++) b = put_byte(b, i, dmac[8*(5-i) +: 8]);
    for (int i = 0; i < 6; i++) b = put_byte(b, 6 + i, smac[8*(5-i) +: 8]);
    b = put16(b, 12, 16'h0800);
    b = put_byte(b, 14, 8'h45);
    b = put16(b, 16, 16'(20 + 4 * doff));
    b = put_byte(b, 22, 8'd64);
    b = put_byte(b, 23, 8'd6);
    b = put32(b, 26, sa);
    b = put32(b, 30, da);
    b = put16(b, 34, sp);
    b = put16(b, 36, dp);
    b = put32(b, 38, seq);
    b = put32(b, 42, ack);
    b = put16(b, 46, {4'(doff), 3'b000, flags});
    b = put16(b, 48, 16'd65535);
    if (with_mss) begin
      b = put_byte(b, 54, 8'd2);
      b = put_byte(b, 55, 8'd4);
      b = put16(b, 56, mss);
    end
    b = put16(b, 50, 16'h0000);
    b = put16(b, 50, ~tcp_sum(b));
    return b;
  endfunction

endpackage
