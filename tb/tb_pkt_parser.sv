// tb_pkt_parser: builds frames byte by byte and checks every parsed field,
// the TCP classification (IPv4 with IHL 5 and protocol 6 only) and the
// detection of a leading MSS option.
module tb_pkt_parser;
  import syn_pkg::*;
  import tb_util_pkg::*;

  logic [DATA_W-1:0] beat;
  hdr_t              hdr;
  int checks = 0, failures = 0;

  pkt_parser dut (.beat, .hdr);

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
    logic [47:0] dm, sm;
    logic [31:0] sa, da, sq, ak;
    logic [15:0] sp, dp, mss;
    logic [8:0]  fl;
    bit with_mss;
    for (int t = 0; t < 300; t++) begin
      dm = {$urandom, $urandom}; sm = {$urandom, $urandom};
      sa = $urandom; da = $urandom; sp = 16'($urandom); dp = 16'($urandom);
      sq = $urandom; ak = $urandom; fl = 9'($urandom); mss = 16'($urandom);
      with_mss = $urandom % 2;
      beat = make_tcp(dm, sm, sa, da, sp, dp, sq, ak, fl, with_mss, mss);
      case (t % 5)
        1: beat = put16(beat, 12, 16'h86dd);              // not IPv4
        2: beat = put_byte(beat, 23, 8'd17);             // UDP
        3: beat = put_byte(beat, 14, 8'h46);             // IP options
        default: ;
      endcase
      #1;
      check(hdr.eth.dst == dm && hdr.eth.src == sm, "MACs");
      check(hdr.ip.src == sa && hdr.ip.dst == da, "IP addresses");
      check(hdr.tcp.sport == sp && hdr.tcp.dport == dp, "ports");
      check(hdr.tcp.seq == sq && hdr.tcp.ack == ak, "seq/ack");
      check(hdr.tcp.flags == fl, "flags");
      check(hdr.tcp.csum == get16(beat, 50), "checksum field");
      check(hdr.is_tcp == (t % 5 == 0 || t % 5 == 4), $sformatf("is_tcp case %0d", t % 5));
      check(hdr.mss_valid == (hdr.is_tcp && with_mss), "mss_valid");
      if (hdr.mss_valid) check(hdr.mss == mss, "mss value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
