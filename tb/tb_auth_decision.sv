// tb_auth_decision: enumerates all TCP flag combinations of interest for
// client- and server-side traffic, whitelisted or not, in both modes and with
// both cookie results, and compares action, whitelist insert and cookie
// request with a table written from the SYN-authentication exchange.
module tb_auth_decision;
  import syn_pkg::*;

  hdr_t    hdr;
  logic    client_side, whitelisted, cookie_ok, need_cookie, cookie_verify, wl_insert;
  mode_e   mode;
  action_e action;
  int checks = 0, failures = 0;

  auth_decision dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    action_e exp_act;
    bit exp_ins, exp_need, syn, ack, rst;
    hdr = '0;
    for (int f = 0; f < 512; f += 1) begin
      for (int v = 0; v < 32; v++) begin
        hdr.is_tcp     = v[0];
        client_side    = v[1];
        whitelisted    = v[2];
        mode           = mode_e'(v[3]);
        cookie_ok      = v[4];
        hdr.tcp.flags  = 9'(f);
        syn = f[1]; ack = f[4]; rst = f[2];
        exp_ins  = 1'b0;
        exp_need = 1'b0;
        if (!v[0] || !v[1] || v[2]) exp_act = ACT_FORWARD;
        else if (syn && !ack && !rst) begin exp_act = ACT_SYNACK; exp_need = v[3]; end
        else if (ack && !syn && !rst) begin
          exp_need = v[3];
          if (!v[3] || v[4]) begin exp_act = ACT_RST; exp_ins = 1'b1; end
          else exp_act = ACT_DROP;
        end else exp_act = ACT_DROP;
        #1;
        checks++;
        if (action != exp_act || wl_insert != exp_ins || need_cookie != exp_need) begin
          failures++;
          if (failures < 10)
            $display("FAIL flags=%03h v=%0d act=%0d/%0d ins=%0d need=%0d", f, v, action, exp_act, wl_insert, need_cookie);
        end
        if (exp_need) begin
          checks++;
          if (cookie_verify != ack) begin failures++; $display("FAIL verify flag"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
