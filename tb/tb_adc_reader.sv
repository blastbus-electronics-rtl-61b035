// tb_adc_reader: self-checking test of the parallel ADC readout.
//
// Three converter models (ads1251_model) with a 384-tick conversion period
// are read by one adc_reader; 'tick' comes every second clock. Each
// conversion gets new random 24-bit values, and the testbench checks that
// every sample set matches them, that sample sets arrive exactly 384 ticks
// apart, and that each arrives 97 ticks after the converters' drdy
// (one tick to see drdy, then 24 bits of four ticks). A second reader fed by
// a converter that is too fast (period 50 ticks) must count missed data.
module tb_adc_reader;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;
  logic tick = 0;
  int ticks = 0;
  always @(posedge clk) begin
    tick <= !tick;
    if (tick) ticks <= ticks + 1;
  end

  localparam int N = 3;
  logic [23:0] val [N];
  logic [N-1:0] dout, drdy;
  logic sclk, sv;
  logic signed [23:0] smp [N];
  logic [15:0] missed;

  for (genvar i = 0; i < N; i++) begin : g_adc
    ads1251_model #(.PERIOD(384)) u_adc (.clk, .tick, .sclk, .value(val[i]), .dout(dout[i]), .drdy(drdy[i]));
  end

  adc_reader #(.N_ADC(N)) dut (.clk, .rst_n, .tick, .drdy(drdy[0]), .dout, .sclk,
                               .samples(smp), .sample_valid(sv), .missed);

  // too-fast converter
  logic f_dout, f_drdy, f_sclk, f_sv;
  logic signed [23:0] f_smp [1];
  logic [15:0] f_missed;
  ads1251_model #(.PERIOD(50)) u_fast (.clk, .tick, .sclk(f_sclk), .value(24'h123456), .dout(f_dout), .drdy(f_drdy));
  adc_reader #(.N_ADC(1)) dut_f (.clk, .rst_n, .tick, .drdy(f_drdy), .dout(f_dout), .sclk(f_sclk),
                                 .samples(f_smp), .sample_valid(f_sv), .missed(f_missed));

  logic [23:0] expv [N];
  int drdy_tick = -1, last_sv_tick = -1, nsv = 0;
  always @(posedge clk) begin
    if (tick && drdy[0] && drdy_tick != ticks) begin
      drdy_tick <= ticks;
      for (int i = 0; i < N; i++) expv[i] <= val[i];
    end
    if (sv) begin
      nsv <= nsv + 1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (smp[i] != $signed(expv[i])) begin
          failures++; $display("FAIL adc %0d got %h expected %h", i, smp[i], expv[i]);
        end
      end
      checks++;
      if (ticks - drdy_tick != 97) begin failures++; $display("FAIL latency %0d ticks", ticks - drdy_tick); end
      if (last_sv_tick >= 0) begin
        checks++;
        if (ticks - last_sv_tick != 384) begin failures++; $display("FAIL period %0d", ticks - last_sv_tick); end
      end
      last_sv_tick <= ticks;
      for (int i = 0; i < N; i++) val[i] <= 24'($urandom);
    end
  end

  initial begin
    for (int i = 0; i < N; i++) val[i] = 24'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (nsv == 8);
    repeat (4) @(posedge clk);
    checks++;
    if (missed != 0) begin failures++; $display("FAIL missed %0d", missed); end
    checks++;
    if (f_missed == 0) begin failures++; $display("FAIL fast converter not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
