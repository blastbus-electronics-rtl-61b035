// tb_pwm_gen: self-checking test of the PWM outputs.
//
// Eight channels with duties 0, 1, 25, 50, 99, 100, 150 and 37 over a period
// of 100 clocks. Over several whole periods each output's high time must be
// exactly min(duty, 100) per period and the period must repeat every 100
// clocks; period 0 must hold all outputs low.
module tb_pwm_gen;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;
  logic [15:0] period = 100;
  logic [15:0] duty [8] = '{16'd0, 16'd1, 16'd25, 16'd50, 16'd99, 16'd100, 16'd150, 16'd37};
  logic [7:0] pwm;
  pwm_gen dut (.clk, .rst_n, .tick(1'b1), .period, .duty, .pwm);

  int high [8];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // align to a period start
    @(posedge clk iff dut.cnt == 16'd99);
    @(negedge clk);
    for (int i = 0; i < 8; i++) high[i] = 0;
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < 8; i++) if (pwm[i]) high[i]++;
      if (t % 100 == 0) begin
        checks++;
        if (dut.cnt != 0) begin failures++; $display("FAIL period alignment at %0d", t); end
      end
      @(negedge clk);
    end
    for (int i = 0; i < 8; i++) begin
      int e;
      e = (duty[i] > 100 ? 100 : int'(duty[i])) * 5;
      checks++;
      if (high[i] != e) begin failures++; $display("FAIL ch %0d high %0d expected %0d", i, high[i], e); end
    end
    period = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (pwm != 0) begin failures++; $display("FAIL period 0 not off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
