// watchdog: power-cycles the board if the DSP stops toggling its watchdog
// line.
//
// Every change of the (synchronised) wdt_toggle input restarts a counter.
// If TIMEOUT clocks pass without a change, power_off is held high for
// OFF_TIME clocks, cutting all supplies, after which the counter restarts
// from zero so the DSP can boot. 'cycles' counts the power cycles. The
// timeout and off time are this design's choices (about 1 s and 0.1 s at
// 80 MHz): the description gives only the behaviour.
module watchdog #(
  parameter int unsigned TIMEOUT  = 80_000_000,
  parameter int unsigned OFF_TIME = 8_000_000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wdt_toggle,
  output logic        power_off,
  output logic [7:0]  cycles
);
  localparam int unsigned CW = $clog2((TIMEOUT > OFF_TIME ? TIMEOUT : OFF_TIME) + 1);
  logic [2:0]    s;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s         <= '0;
      cnt       <= '0;
      power_off <= 1'b0;
      cycles    <= '0;
    end else begin
      s <= {s[1:0], wdt_toggle};
      if (power_off) begin
        if (cnt == CW'(OFF_TIME - 1)) begin
          power_off <= 1'b0;
          cnt       <= '0;
        end else cnt <= cnt + 1'b1;
      end else if (s[2] != s[1]) begin
        cnt <= '0;
      end else if (cnt == CW'(TIMEOUT - 1)) begin
        power_off <= 1'b1;
        cycles    <= cycles + 1'b1;
        cnt       <= '0;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
