// tb_housekeeping_quadrature: full-quadrature lock-in of 50 thermistor channels.
//
// Housekeeping configuration: one node of 50 channels with QUAD = 1 and the
// full filter (208/165/131/104, decimation 104), on a bus at 4 MHz from an
// 80 MHz clock. The reference runs at its reset rate, two cycles per frame,
// locked to frames. Every converter sees a sine at the reference frequency,
// amplitude A = 3,000,000 counts, channel i shifted by 2*pi*i/50. Without any
// phase tuning the node must return, for every channel, a magnitude
// sqrt(I^2 + Q^2) = A * 32767/2 * 208*165*131*104 / 2^39 (within 0.1 %), and
// a phase atan2(Q, I) that trails channel 0 by 2*pi*i/50 (within 0.01 rad).
// The host frame reads I and Q of all channels (200 reads) each frame; the
// values checked are those of frame 9, long after the filter has filled.
module tb_housekeeping_quadrature;
  import bb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #6.25 clk = !clk;   // 80 MHz

  localparam int NA = 50, NE = 256;
  localparam real PI = 3.14159265358979;
  localparam real A = 3.0e6;
  logic ext_sel = 0, ext_clk = 0, bus_clk;
  logic enable = 0, tbl_we = 0;
  logic [8:0] frame_len = 0;
  logic [31:0] frame_period = 39936;
  logic [7:0] tbl_addr = 0, resp_addr = 0;
  bus_word_t tbl_wdata = '0;
  logic [15:0] resp_data, timeouts, overruns, dl_ovf;
  logic resp_ok, frame_done, biphase;
  logic [31:0] frames;
  logic [0:0] sclk, drdy, wdt = '0, poff;
  logic [0:0][NA-1:0] dout;
  logic [0:0][DIO_GROUPS-1:0][7:0] din = '0, dio_out, dio_oe;
  logic [0:0][7:0] dac_grp;

  bbus_system #(.N_NODES(1), .QUAD(1'b1)) dut (
    .clk, .rst_n, .ext_clk_sel(ext_sel), .ext_clk, .bus_clk,
    .enable, .frame_len, .frame_period, .tbl_we, .tbl_addr, .tbl_wdata, .resp_addr, .resp_data, .resp_ok,
    .frame_done, .frames, .timeouts, .overruns, .biphase, .downlink_overflows(dl_ovf),
    .adc_sclk(sclk), .adc_drdy(drdy), .adc_dout(dout), .dio_in(din), .dio_out, .dio_oe, .dac_grp,
    .wdt_toggle(wdt), .power_off(poff));

  // Converter inputs: after every conversion the next value of each sine.
  logic [23:0] val [NA];
  logic [NA-1:0] drdy_v;
  int conv = 0;
  function automatic logic [23:0] wave(int c, int i);
    return 24'($rtoi(A * $sin(2.0 * PI * c / 52.0 - 2.0 * PI * i / NA)));
  endfunction
  initial for (int i = 0; i < NA; i++) val[i] = wave(0, i);
  logic drdy_q = 0;
  always @(posedge clk) drdy_q <= drdy_v[0];
  always @(posedge clk) if (drdy_v[0] && !drdy_q) begin
    conv <= conv + 1;
    for (int i = 0; i < NA; i++) val[i] <= wave(conv + 1, i);
  end
  for (genvar i = 0; i < NA; i++) begin : g_a
    ads1251_model #(.PERIOD(384)) u (.clk, .tick(dut.g_node[0].u_node.tick), .sclk(sclk[0]),
                                     .value(val[i]), .dout(dout[0][i]), .drdy(drdy_v[i]));
  end
  assign drdy[0] = drdy_v[0];
  always #5000000 wdt = !wdt;

  task automatic check(string what, bit ok, real got, real exp);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s: got %f expected %f", what, got, exp); end
  endtask

  bus_word_t tbl [NE];
  int n_ent = 0;
  initial begin
    real g, mag0, ph0;
    g = A * 32767.0 / 2.0 * (208.0 * 165.0 * 131.0 * 104.0) / (2.0 ** 39);
    tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 0, node: NODE_BROADCAST, addr: 10'h300, data: 1};
    for (int c = 0; c < NA; c++) begin
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 0, addr: 10'(2 * c), data: 0};
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 0, addr: 10'(2 * c + 1), data: 0};
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 0, addr: 10'h100 + 10'(2 * c), data: 0};
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 0, addr: 10'h100 + 10'(2 * c + 1), data: 0};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < n_ent; e++) begin
      @(posedge clk); tbl_we <= 1; tbl_addr <= 8'(e); tbl_wdata <= tbl[e];
    end
    @(posedge clk); tbl_we <= 0;
    frame_len <= 9'(n_ent);
    enable <= 1;
    repeat (9) @(posedge frame_done);
    @(posedge clk);
    for (int c = 0; c < NA; c++) begin
      logic [15:0] w [4];
      real vi, vq, mag, ph, dph;
      for (int k = 0; k < 4; k++) begin
        resp_addr <= 8'(1 + 4 * c + k); #1; w[k] = resp_data;
        if (!resp_ok) begin checks++; failures++; $display("FAIL entry %0d not answered", 1 + 4 * c + k); end
      end
      vi = real'($signed({w[0], w[1]}));
      vq = real'($signed({w[2], w[3]}));
      mag = $sqrt(vi * vi + vq * vq);
      ph = $atan2(vq, vi);
      if (c == 0) begin mag0 = mag; ph0 = ph; end
      check($sformatf("ch%0d magnitude", c), mag > 0.999 * g && mag < 1.001 * g, mag, g);
      dph = ph0 - ph - 2.0 * PI * c / NA;
      while (dph > PI) dph -= 2.0 * PI;
      while (dph < -PI) dph += 2.0 * PI;
      check($sformatf("ch%0d phase vs ch0", c), dph < 0.01 && dph > -0.01, dph, 0.0);
    end
    check("no timeouts", timeouts == 0, timeouts, 0);
    check("no overruns", overruns == 0, overruns, 0);
    $display("magnitude of ch0 %f, expected %f", mag0, g);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #150ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
