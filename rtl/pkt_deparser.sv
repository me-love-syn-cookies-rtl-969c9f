// pkt_deparser: writes a header vector back over the first beat of a packet.
//
// The Ethernet, IPv4 and TCP headers of the header vector replace the top 432
// bits of the beat (bytes 0..53 of the frame); all later bytes, TCP options and
// payload included, are passed on unchanged. Purely combinational and the
// exact inverse of pkt_parser's header overlay.
module pkt_deparser
  import syn_pkg::*;
(
  input  logic [DATA_W-1:0] beat_in,
  input  hdr_t              hdr,
  output logic [DATA_W-1:0] beat_out
);
  always_comb begin
    beat_out = beat_in;
    beat_out[DATA_W-1 -: HDR_BITS] = {hdr.eth, hdr.ip, hdr.tcp};
  end
endmodule
