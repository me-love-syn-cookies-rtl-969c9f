// timestamp_counter: coarse 5-bit timestamp for SYN cookies.
//
// A prescaler counts TICK_CYCLES clock cycles per timestamp step; the 5-bit
// timestamp then wraps every 32 steps. With the defaults (a 200 MHz clock and
// a 64 s step) one step is 12.8e9 cycles and the timestamp wraps after about
// 34 minutes. The step length of 64 s and the 5-bit width follow the paper's
// cookie layout; the clock frequency is this design's assumption. ts changes
// one cycle after the prescaler reaches TICK_CYCLES-1; tick pulses with it.
module timestamp_counter #(
  parameter longint unsigned TICK_CYCLES = 64'd12_800_000_000  // 64 s at 200 MHz
) (
  input  logic       clk,
  input  logic       rst_n,
  output logic [4:0] ts,
  output logic       tick
);
  logic [63:0] presc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      presc <= '0;
      ts    <= '0;
      tick  <= 1'b0;
    end else if (presc == TICK_CYCLES - 1) begin
      presc <= '0;
      ts    <= ts + 5'd1;
      tick  <= 1'b1;
    end else begin
      presc <= presc + 64'd1;
      tick  <= 1'b0;
    end
  end
endmodule
