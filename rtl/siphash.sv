// siphash: iterative SipHash-c-d keyed hash (SipHash-2-4 by default) of a
// message of 0 to 16 bytes.
//
// SipHash keeps four 64-bit state words. The message is cut into 8-byte
// little-endian words; the last word carries the leftover bytes and the
// message length in its top byte. Each word is XORed into v3, C_ROUNDS
// SipRounds are applied, and the word is XORed into v0. Finalisation XORs 0xff
// into v2, applies D_ROUNDS SipRounds and outputs v0^v1^v2^v3.
//
// This unit performs one SipRound per clock. A hash of a message with n full
// words takes (n+1)*C_ROUNDS + D_ROUNDS rounds, i.e. 8 for the 13-byte cookie
// input. done pulses, and hash becomes valid, on the clock edge after the last
// round: (n+1)*C_ROUNDS + D_ROUNDS + 1 edges after the edge that accepted
// start (9 for a 13-byte message); hash holds until the next result.
// start is ignored while busy.
//
// Interface: key byte i is key[8i+7:8i]; message byte i is msg[i].
// The algorithm is the published SipHash; the paper only names it as the
// hash for cookies. The one-round-per-cycle structure is this design's choice.
module siphash #(
  parameter int unsigned C_ROUNDS = 2,
  parameter int unsigned D_ROUNDS = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [127:0]     key,
  input  logic [15:0][7:0] msg,
  input  logic [4:0]       len,     // 0..16
  output logic             busy,
  output logic             done,
  output logic [63:0]      hash
);
  typedef struct packed {
    logic [63:0] v0, v1, v2, v3;
  } sip_state_t;

  function automatic logic [63:0] rotl(input logic [63:0] x, input int unsigned b);
    return (x << b) | (x >> (64 - b));
  endfunction

  function automatic sip_state_t sipround(input sip_state_t s);
    sip_state_t r;
    r = s;
    r.v0 = r.v0 + r.v1; r.v1 = rotl(r.v1, 13); r.v1 ^= r.v0; r.v0 = rotl(r.v0, 32);
    r.v2 = r.v2 + r.v3; r.v3 = rotl(r.v3, 16); r.v3 ^= r.v2;
    r.v0 = r.v0 + r.v3; r.v3 = rotl(r.v3, 21); r.v3 ^= r.v0;
    r.v2 = r.v2 + r.v1; r.v1 = rotl(r.v1, 17); r.v1 ^= r.v2; r.v2 = rotl(r.v2, 32);
    return r;
  endfunction

  localparam int unsigned RW = (C_ROUNDS > D_ROUNDS) ? $clog2(C_ROUNDS + 1) : $clog2(D_ROUNDS + 1);

  sip_state_t      v;
  logic [2:0][63:0] blk;        // message words, last one with the length byte
  logic [1:0]      blk_idx, blk_last;
  logic [RW-1:0]   rnd;
  logic            finalising;

  // Message words as SipHash defines them for this length
  logic [2:0][63:0] blk_in;
  always_comb begin
    logic [23:0][7:0] b;
    b = '0;
    for (int i = 0; i < 16; i++)
      if (5'(i) < len) b[i] = msg[i];
    // length byte goes into the top byte of the word that holds the tail
    b[{len[4:3], 3'b111}] = {3'b000, len};
    for (int w = 0; w < 3; w++)
      for (int i = 0; i < 8; i++)
        blk_in[w][8*i +: 8] = b[8*w + i];
  end

  sip_state_t v_in, v_out;
  always_comb begin
    v_in = v;
    if (!finalising && rnd == '0) v_in.v3 = v.v3 ^ blk[blk_idx];
    if (finalising && rnd == '0)  v_in.v2 = v.v2 ^ 64'hff;
    v_out = sipround(v_in);
    if (!finalising && rnd == RW'(C_ROUNDS - 1)) v_out.v0 = v_out.v0 ^ blk[blk_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v          <= '0;
      blk        <= '0;
      blk_idx    <= '0;
      blk_last   <= '0;
      rnd        <= '0;
      finalising <= 1'b0;
      busy       <= 1'b0;
      done       <= 1'b0;
      hash       <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          v.v0       <= key[63:0]   ^ 64'h736f6d6570736575;
          v.v1       <= key[127:64] ^ 64'h646f72616e646f6d;
          v.v2       <= key[63:0]   ^ 64'h6c7967656e657261;
          v.v3       <= key[127:64] ^ 64'h7465646279746573;
          blk        <= blk_in;
          blk_idx    <= '0;
          blk_last   <= len[4:3];
          rnd        <= '0;
          finalising <= 1'b0;
          busy       <= 1'b1;
        end
      end else begin
        v <= v_out;
        if (!finalising) begin
          if (rnd == RW'(C_ROUNDS - 1)) begin
            rnd <= '0;
            if (blk_idx == blk_last) finalising <= 1'b1;
            else                     blk_idx    <= blk_idx + 2'd1;
          end else begin
            rnd <= rnd + 1'b1;
          end
        end else if (rnd == RW'(D_ROUNDS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          hash <= v_out.v0 ^ v_out.v1 ^ v_out.v2 ^ v_out.v3;
        end else begin
          rnd <= rnd + 1'b1;
        end
      end
    end
  end
endmodule
