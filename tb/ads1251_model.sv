// ads1251_model: behavioural model of a 24-bit sigma-delta ADC as read by
// adc_reader (not synthesizable design; testbench use only).
//
// Every PERIOD bus clocks ('tick') the model takes 'value' as its new result,
// raises drdy for one tick and puts the result's most significant bit on
// dout. Each falling edge of sclk moves the next bit onto dout. The analog
// front end, digital filter and noise of the real converter are not modelled.
module ads1251_model #(
  parameter int unsigned PERIOD = 384,
  parameter int unsigned PHASE  = 0
) (
  input  logic        clk,
  input  logic        tick,
  input  logic        sclk,
  input  logic [23:0] value,
  output logic        dout,
  output logic        drdy
);
  int unsigned cnt = PHASE;
  logic [23:0] sh = '0;
  logic sclk_q = 1'b0;
  initial begin dout = 1'b0; drdy = 1'b0; end
  always @(posedge clk) begin
    sclk_q <= sclk;
    if (tick) begin
      drdy <= 1'b0;
      if (cnt == PERIOD - 1) begin
        cnt  <= 0;
        sh   <= value;
        dout <= value[23];
        drdy <= 1'b1;
      end else begin
        cnt <= cnt + 1;
      end
    end
    if (sclk_q && !sclk) begin
      sh   <= {sh[22:0], 1'b0};
      dout <= sh[22];
    end
  end
endmodule
