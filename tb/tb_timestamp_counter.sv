// tb_timestamp_counter: with a 7-cycle step, checks that the timestamp
// advances exactly every TICK_CYCLES clocks, that tick pulses with each
// advance, and that the 5-bit value wraps after 32 steps.
module tb_timestamp_counter;
  localparam int TICK = 7;
  logic       clk = 1'b0;
  logic       rst_n;
  logic [4:0] ts;
  logic       tick;
  int checks = 0, failures = 0;

  timestamp_counter #(.TICK_CYCLES(64'(TICK))) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    rst_n = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    checks++; if (ts != 0) failures++;
    cyc = 0;
    for (int s = 1; s <= 40; s++) begin
      int n;
      n = 0;
      do begin @(negedge clk); n++; end while (!tick);
      checks++;
      if (n != TICK) begin failures++; $display("FAIL step %0d after %0d cycles", s, n); end
      checks++;
      if (ts != 5'(s)) begin failures++; $display("FAIL ts %0d exp %0d", ts, 5'(s)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
