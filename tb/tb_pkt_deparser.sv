// tb_pkt_deparser: writes random header vectors into random beats and checks
// byte by byte that bytes 0..53 carry the new header fields in wire order and
// bytes 54..63 are unchanged.
module tb_pkt_deparser;
  import syn_pkg::*;
  import tb_util_pkg::*;

  logic [DATA_W-1:0] beat_in, beat_out;
  hdr_t              hdr;
  int checks = 0, failures = 0;

  pkt_deparser dut (.beat_in, .hdr, .beat_out);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int w = 0; w < 16; w++) beat_in[32*w +: 32] = $urandom;
      for (int w = 0; w < 15; w++) hdr[32*w +: 32] = $urandom;
      #1;
      check(get16(beat_out, 12) == hdr.eth.ethertype, "ethertype");
      check(get_byte(beat_out, 0) == hdr.eth.dst[47:40], "dst mac byte 0");
      check(get_byte(beat_out, 11) == hdr.eth.src[7:0], "src mac byte 5");
      check(get_byte(beat_out, 22) == hdr.ip.ttl, "ttl");
      check(get32(beat_out, 26) == hdr.ip.src && get32(beat_out, 30) == hdr.ip.dst, "ip addresses");
      check(get16(beat_out, 34) == hdr.tcp.sport && get16(beat_out, 36) == hdr.tcp.dport, "ports");
      check(get32(beat_out, 38) == hdr.tcp.seq && get32(beat_out, 42) == hdr.tcp.ack, "seq/ack");
      check(get16(beat_out, 46) == {hdr.tcp.data_off, hdr.tcp.reserved, hdr.tcp.flags}, "offset/flags");
      check(get16(beat_out, 50) == hdr.tcp.csum && get16(beat_out, 52) == hdr.tcp.urg, "csum/urg");
      for (int k = 54; k < 64; k++)
        check(get_byte(beat_out, k) == get_byte(beat_in, k), $sformatf("byte %0d kept", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
