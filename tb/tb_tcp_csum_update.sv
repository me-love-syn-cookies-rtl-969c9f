// tb_tcp_csum_update: builds segments with a correct checksum, replaces the
// sequence, acknowledgement and flags words, applies the incremental update,
// and recomputes the checksum of the result from scratch.
module tb_tcp_csum_update;
  import tb_util_pkg::*;

  logic [15:0]      csum_old, csum_new;
  logic [4:0][15:0] words_old, words_new;
  int checks = 0, failures = 0;

  tcp_csum_update #(.N_WORDS(5)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [511:0] b, b2;
    logic [31:0] ns, na;
    logic [8:0] nf;
    logic [7:0] ob;
    for (int t = 0; t < 500; t++) begin
      b = make_tcp({$urandom, $urandom}, {$urandom, $urandom}, $urandom, $urandom,
                   16'($urandom), 16'($urandom), $urandom, $urandom, 9'($urandom),
                   ($urandom % 2) == 1, 16'($urandom));
      ns = $urandom; na = (t % 7 == 0) ? 32'd0 : $urandom; nf = 9'($urandom);
      b2 = put32(b, 38, ns);
      b2 = put32(b2, 42, na);
      ob = get_byte(b, 46);
      b2 = put16(b2, 46, {ob[7:4], 3'b000, nf});
      csum_old  = get16(b, 50);
      words_old = {get16(b, 38), get16(b, 40), get16(b, 42), get16(b, 44), get16(b, 46)};
      words_new = {get16(b2, 38), get16(b2, 40), get16(b2, 42), get16(b2, 44), get16(b2, 46)};
      #1;
      b2 = put16(b2, 50, csum_new);
      checks++;
      if (!tcp_csum_ok(b2)) begin
        failures++;
        $display("FAIL checksum %h sum %h", csum_new, tcp_sum(b2));
      end
      // swapping addresses and ports needs no update
      b2 = put32(put32(b2, 26, get32(b2, 30)), 30, get32(b2, 26));
      b2 = put16(put16(b2, 34, get16(b2, 36)), 36, get16(b2, 34));
      checks++;
      if (!tcp_csum_ok(b2)) begin failures++; $display("FAIL after swap"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
