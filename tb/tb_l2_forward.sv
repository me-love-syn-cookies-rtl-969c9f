// tb_l2_forward: checks the reset contents of the port table, then writes
// random port and MAC entries and checks every lookup against a model.
module tb_l2_forward;
  import syn_pkg::*;

  logic              clk = 1'b0;
  logic              rst_n;
  logic              cfg_we, cfg_sel;
  logic [PORT_W-1:0] cfg_addr, in_port, fwd_port, out_port;
  logic [95:0]       cfg_data;
  logic              client_side;
  logic [47:0]       src_mac, dst_mac;
  int checks = 0, failures = 0;
  logic [2:0]  m_port [4];
  logic [95:0] m_mac  [4];

  l2_forward dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int p = 0; p < 4; p++) begin
      in_port = PORT_W'(p); out_port = PORT_W'(3 - p);
      #1;
      check({client_side, fwd_port} == m_port[p], $sformatf("port entry %0d", p));
      check({src_mac, dst_mac} == m_mac[3 - p], $sformatf("mac entry %0d", 3 - p));
    end
  endtask

  initial begin
    rst_n = 1'b0; cfg_we = 1'b0; cfg_sel = 1'b0; cfg_addr = '0; cfg_data = '0;
    in_port = '0; out_port = '0;
    for (int p = 0; p < 4; p++) begin
      m_port[p] = {(p % 2 == 0) ? 1'b1 : 1'b0, 2'(p ^ 1)};
      m_mac[p]  = '0;
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check_all();
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      cfg_we   = 1'b1;
      cfg_sel  = $urandom % 2;
      cfg_addr = PORT_W'($urandom);
      cfg_data = {$urandom, $urandom, $urandom};
      if (cfg_sel) m_mac[cfg_addr]  = cfg_data;
      else         m_port[cfg_addr] = cfg_data[2:0];
      @(negedge clk);
      cfg_we = 1'b0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
