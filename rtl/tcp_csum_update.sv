// tcp_csum_update: incremental update of the TCP checksum.
//
// When a header rewrite changes only some 16-bit words of the segment, the
// new checksum follows from the old one without touching the payload
// (RFC 1624, eqn. 3): HC' = ~(~HC + sum(~m_i) + sum(m_i')), all sums in
// one's-complement arithmetic. The proxy changes the sequence number, the
// acknowledgement number and the data-offset/flags word, i.e. N_WORDS = 5.
// Swapping the IP addresses or the ports leaves the checksum unchanged, since
// one's-complement addition is commutative. Purely combinational.
//
// The paper states that only a TCP checksum update is needed; computing it
// incrementally is this design's choice.
module tcp_csum_update #(
  parameter int unsigned N_WORDS = 5
) (
  input  logic [15:0]              csum_old,
  input  logic [N_WORDS-1:0][15:0] words_old,
  input  logic [N_WORDS-1:0][15:0] words_new,
  output logic [15:0]              csum_new
);
  function automatic logic [15:0] oc_add(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[15:0] + {15'd0, s[16]};
  endfunction

  always_comb begin
    logic [15:0] acc;
    acc = ~csum_old;
    for (int i = 0; i < N_WORDS; i++) begin
      acc = oc_add(acc, ~words_old[i]);
      acc = oc_add(acc, words_new[i]);
    end
    csum_new = ~acc;
  end
endmodule
