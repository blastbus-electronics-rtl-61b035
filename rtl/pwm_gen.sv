// pwm_gen: pulse-width modulated outputs for heaters and square-wave bias.
//
// N_CH outputs share one period counter, advanced on each tick (the node uses
// one bus clock), running over 'period' ticks
// (period = 0 stops the counter at zero, outputs low). Output i is high while
// the counter is below duty[i], so duty = 0 is always off and duty >= period
// always on; new settings take effect at once. Used for coarse power control
// of relay-switched heaters and, with duty = period/2, for a square-wave LED
// bias. Counter width and the shared period are this design's choices.
module pwm_gen #(
  parameter int unsigned N_CH = 8,
  parameter int unsigned CW   = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          tick,
  input  logic [CW-1:0] period,
  input  logic [CW-1:0] duty [N_CH],
  output logic [N_CH-1:0] pwm
);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (tick) cnt <= (period == '0 || cnt >= period - 1'b1) ? '0 : cnt + 1'b1;
  end

  always_comb begin
    for (int i = 0; i < N_CH; i++) pwm[i] = (period != '0) && (cnt < duty[i]);
  end
endmodule
