// tb_bbus_node: self-checking test of one motherboard node through its bus.
//
// The node runs with 4 ADC channels, quadrature lock-in, short filter
// lengths (5/4/3/2, decimation 4) and a short watchdog. The testbench is the
// bus master (words shifted on the bus clock, one bit per bus clock, bus
// clock = clk/8) and provides four converter models and a DAC-system
// receiver. Checked through bus reads and pins:
//   register write/read-back; raw ADC samples; the lock-in result for a DC
//   input with a constant reference (phase_inc = 0, offset a quarter cycle,
//   so ref_i = 32767 and ref_q = 0): I = (V * 32767 * 120) >> 16 and Q = 0;
//   digital group direction, outputs and inputs; the quadrature count; PWM
//   on group 5; DAC values and the sine bias on DAC 0 arriving at the DAC
//   system; the frame counter; a watchdog power cycle.
module tb_bbus_node;
  import bb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;
  logic bus_clk = 0;
  always #40 bus_clk = !bus_clk;

  localparam int NA = 4;
  logic rx = 0, tx, oe;
  logic sclk, drdy;
  logic [NA-1:0] dout, drdy_v;
  logic [DIO_GROUPS-1:0][7:0] din = '0, dout_p, doe;
  logic [7:0] dac_grp;
  logic wdt = 0, poff;

  bbus_node #(.NODE_ID(3'd4), .N_ADC(NA), .QUAD(1'b1), .LEN0(5), .LEN1(4), .LEN2(3), .LEN3(2), .DECIM(4),
              .WDT_TIMEOUT(3000), .WDT_OFF(100)) dut (
    .clk, .rst_n, .bus_clk, .bus_rx(rx), .bus_tx(tx), .bus_oe(oe),
    .adc_sclk(sclk), .adc_drdy(drdy), .adc_dout(dout),
    .dio_in(din), .dio_out(dout_p), .dio_oe(doe), .dac_grp, .wdt_toggle(wdt), .power_off(poff));

  logic [23:0] adc_val [NA];
  for (genvar i = 0; i < NA; i++) begin : g_adc
    ads1251_model #(.PERIOD(384)) u (.clk, .tick(dut.tick), .sclk, .value(adc_val[i]), .dout(dout[i]), .drdy(drdy_v[i]));
  end
  assign drdy = drdy_v[0];

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  task automatic send(bus_word_t w);
    for (int b = 31; b >= 0; b--) begin @(posedge bus_clk); rx = w[b]; end
    @(posedge bus_clk); rx = 0;
  endtask
  task automatic wr(logic [9:0] a, logic [15:0] d, logic fs = 1'b0);
    send('{start: 1, frame_sync: fs, rd: 0, node: 4, addr: a, data: d});
    @(posedge bus_clk);
  endtask
  task automatic rd(logic [9:0] a, output logic [15:0] d);
    bus_word_t w;
    int n;
    send('{start: 1, frame_sync: 0, rd: 1, node: 4, addr: a, data: 0});
    n = 0;
    do begin @(posedge bus_clk); n++; end while (!(oe && tx) && n < 10);
    w = '0; w[31] = 1;
    for (int b = 30; b >= 0; b--) begin @(posedge bus_clk); w[b] = tx; end
    @(posedge bus_clk);
    d = w.data;
  endtask
  task automatic rd32(logic [9:0] a, output logic [31:0] v);
    logic [15:0] h, l;
    rd(a, h); rd(a + 1, l);
    v = {h, l};
  endtask

  // DAC-system receiver
  logic [7:0] g_q = 0;
  logic [15:0] dac_rx [32];
  int dd = -1, nib = 0, dac_updates = 0;
  always @(posedge clk) begin
    g_q <= dac_grp;
    if (dac_grp[7] && !g_q[7]) begin
      if (dac_grp[6]) begin dd = 0; nib = 0; end
      if (dd >= 0 && dd < 32) begin
        dac_rx[dd] = {dac_rx[dd][11:0], dac_grp[3:0]};
        nib++;
        if (nib == 4) begin nib = 0; dd++; if (dd == 32) dac_updates++; end
      end
    end
  end

  initial begin
    logic [15:0] d;
    logic [31:0] v;
    int vdc;
    vdc = 1234567;
    for (int i = 0; i < NA; i++) adc_val[i] = 24'(vdc * (i + 1) - (i == 3 ? 9000000 : 0));
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge bus_clk);
    // watchdog kept alive by the "DSP"
    fork forever begin repeat (100) @(posedge clk); wdt = !wdt; end join_none
    // configuration and read-back
    wr(10'h301, 16'h0000); wr(10'h302, 16'h0000);   // phase_inc = 0
    wr(10'h303, 16'd256);                            // quarter-cycle offset
    rd(10'h303, d); expect_eq("phase_ofs readback", d, 256);
    wr(10'h343, 16'h7abc);
    rd(10'h343, d); expect_eq("dac3 readback", d, 16'h7abc);
    // frames
    wr(10'h300, 16'h0002, 1'b1);                     // bias onto DAC 0, with frame sync
    wr(10'h304, 16'h8000, 1'b1);                     // bias amplitude 1.0, frame sync
    rd(10'h305, d); expect_eq("frames", d, 2);
    // digital groups
    wr(10'h312, 16'h00f0); wr(10'h31a, 16'h00a5);
    @(posedge clk);
    expect_eq("dio_oe g2", doe[2], 8'hf0);
    expect_eq("dio_out g2", dout_p[2], 8'ha5);
    din[4] = 8'h3c;
    rd(10'h324, d); expect_eq("dio_in g4", d, 16'h003c);
    // quadrature: 10 forward steps, 3 back
    for (int s = 1; s <= 10; s++) begin
      din[0][1:0] = (s % 4 == 1) ? 2'b10 : (s % 4 == 2) ? 2'b11 : (s % 4 == 3) ? 2'b01 : 2'b00;  // {B, A}
      repeat (4) @(posedge clk);
    end
    for (int s = 9; s >= 7; s--) begin
      din[0][1:0] = (s % 4 == 1) ? 2'b10 : (s % 4 == 2) ? 2'b11 : (s % 4 == 3) ? 2'b01 : 2'b00;  // {B, A}
      repeat (4) @(posedge clk);
    end
    rd32(10'h328, v); expect_eq("quad count", v, 7);
    // PWM on group 5 bit 0: period 40, duty 10, counted in bus clocks.
    // Any 400 consecutive bus clocks hold ten whole periods.
    wr(10'h330, 16'd40); wr(10'h338, 16'd10); wr(10'h331, 16'h0001);
    begin
      int hi;
      hi = 0;
      repeat (400) begin @(posedge bus_clk); if (dout_p[5][0]) hi++; end
      expect_eq("pwm high bus clocks", hi, 100);
    end
    // wait for the lock-in to fill and produce results
    wait (dut.n_results >= 5);
    repeat (20) @(posedge clk);
    for (int c = 0; c < NA; c++) begin
      longint e;
      e = (longint'($signed(adc_val[c])) * 32767 * 120) >>> 16;
      rd32(10'(2 * c), v);
      expect_eq($sformatf("lock-in I ch%0d", c), longint'($signed(v)), e);
      rd32(10'h100 + 10'(2 * c), v);
      expect_eq($sformatf("lock-in Q ch%0d", c), v, 0);
      rd32(10'h200 + 10'(2 * c), v);
      expect_eq($sformatf("raw ADC ch%0d", c), v, {adc_val[c], 8'h00});
    end
    rd(10'h307, d); expect_eq("missed ADC data", d, 0);
    // DAC system: DAC 3 value and the bias on DAC 0
    expect_eq("dac updates seen", dac_updates > 3, 1);
    expect_eq("dac3 at DAC system", dac_rx[3], 16'h7abc);
    expect_eq("dac0 carries bias", dac_rx[0], 16'(dut.bias));
    expect_eq("bias is zero at phase 0 (phase_inc 0 -> sin 0)", dac_rx[0], 0);
    // watchdog: stop toggling
    disable fork;
    wait (poff);
    wait (!poff);
    rd(10'h309, d); expect_eq("watchdog cycles", d, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
