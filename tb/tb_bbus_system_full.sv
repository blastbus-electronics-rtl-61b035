// tb_bbus_system_full: the crate at its default size, end to end.
//
// Six nodes of 50 channels each (300 converter models), 80 MHz clk divided
// by 20 for the 4 MHz bus clock, full filter lengths 208/165/131/104 and
// decimation 104, so one frame is 104 * 384 = 39936 bus clocks. The host
// frame broadcasts the lock-in setup (reference locked to frames, phase
// increment 0, quarter-cycle offset: ref_i = 32767) and reads, from every
// node, the in-phase results of channels 0 and 49 and the raw sample of
// channel 17. The converters hold DC values. After enough frames for the
// filter to fill with the constant reference, the responses of the last
// frame must equal I = (V * 32767 * 208*165*131*104) >> 39 (the top 32 of
// the 71 result bits) and the raw values.
module tb_bbus_system_full;
  import bb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #6.25 clk = !clk;   // 80 MHz

  localparam int NN = 6, NA = 50, NE = 256;
  logic ext_sel = 0, ext_clk = 0, bus_clk;
  logic enable = 0, tbl_we = 0;
  logic [8:0] frame_len = 0;
  logic [31:0] frame_period = 39936;
  logic [7:0] tbl_addr = 0, resp_addr = 0;
  bus_word_t tbl_wdata = '0;
  logic [15:0] resp_data, timeouts, overruns, dl_ovf;
  logic resp_ok, frame_done, biphase;
  logic [31:0] frames;
  logic [NN-1:0] sclk, drdy, wdt = '0, poff;
  logic [NN-1:0][NA-1:0] dout;
  logic [NN-1:0][DIO_GROUPS-1:0][7:0] din = '0, dio_out, dio_oe;
  logic [NN-1:0][7:0] dac_grp;

  bbus_system dut (
    .clk, .rst_n, .ext_clk_sel(ext_sel), .ext_clk, .bus_clk,
    .enable, .frame_len, .frame_period, .tbl_we, .tbl_addr, .tbl_wdata, .resp_addr, .resp_data, .resp_ok,
    .frame_done, .frames, .timeouts, .overruns, .biphase, .downlink_overflows(dl_ovf),
    .adc_sclk(sclk), .adc_drdy(drdy), .adc_dout(dout), .dio_in(din), .dio_out, .dio_oe, .dac_grp,
    .wdt_toggle(wdt), .power_off(poff));

  function automatic logic [23:0] dc(int n, int i);
    return 24'((i * 7919 + n * 104729) % 8000000 - 4000000);
  endfunction

  logic [NA-1:0] drdy_v [NN];
  for (genvar n = 0; n < NN; n++) begin : g_n
    for (genvar i = 0; i < NA; i++) begin : g_a
      ads1251_model #(.PERIOD(384)) u (.clk, .tick(dut.g_node[n].u_node.tick), .sclk(sclk[n]),
                                       .value(dc(n, i)), .dout(dout[n][i]), .drdy(drdy_v[n][i]));
    end
    assign drdy[n] = drdy_v[n][0];
  end

  always #5000000 wdt = !wdt;   // the DSPs keep the watchdogs alive

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  function automatic longint lockin_i(logic [23:0] v);
    logic signed [95:0] p;
    p = 96'(signed'(v)) * 96'(32767) * 96'(208 * 165 * 131 * 104);
    return longint'(p >>> 39);
  endfunction

  bus_word_t tbl [NE];
  int n_ent = 0;
  localparam int NFRAMES = 8;

  initial begin
    tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 0, node: NODE_BROADCAST, addr: 10'h300, data: 1};
    tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 0, node: NODE_BROADCAST, addr: 10'h301, data: 0};
    tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 0, node: NODE_BROADCAST, addr: 10'h302, data: 0};
    tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 0, node: NODE_BROADCAST, addr: 10'h303, data: 256};
    for (int n = 0; n < NN; n++) begin
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 3'(n), addr: 10'h000, data: 0};
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 3'(n), addr: 10'h001, data: 0};
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 3'(n), addr: 10'h062, data: 0};
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 3'(n), addr: 10'h063, data: 0};
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 3'(n), addr: 10'h222, data: 0};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < n_ent; e++) begin
      @(posedge clk); tbl_we <= 1; tbl_addr <= 8'(e); tbl_wdata <= tbl[e];
    end
    @(posedge clk); tbl_we <= 0;
    frame_len <= 9'(n_ent);
    enable <= 1;
    for (int f = 0; f < NFRAMES; f++) begin
      @(posedge frame_done);
      $display("frame %0d done at %0t", frames, $time);
    end
    @(posedge clk);
    for (int n = 0; n < NN; n++) begin
      logic [15:0] h, l;
      int e;
      e = 4 + 5 * n;
      resp_addr <= 8'(e);     #1; h = resp_data; expect_eq("resp ok", resp_ok, 1);
      resp_addr <= 8'(e + 1); #1; l = resp_data;
      expect_eq($sformatf("node %0d ch0 I", n), longint'($signed({h, l})), lockin_i(dc(n, 0)));
      resp_addr <= 8'(e + 2); #1; h = resp_data;
      resp_addr <= 8'(e + 3); #1; l = resp_data;
      expect_eq($sformatf("node %0d ch49 I", n), longint'($signed({h, l})), lockin_i(dc(n, 49)));
      resp_addr <= 8'(e + 4); #1;
      expect_eq($sformatf("node %0d ch17 raw", n), resp_data, dc(n, 17) >> 8);
    end
    expect_eq("timeouts", timeouts, 0);
    expect_eq("overruns", overruns, 0);
    expect_eq("missed ADC data node 0", dut.g_node[0].u_node.adc_missed, 0);
    expect_eq("lock-in results node 5", dut.g_node[5].u_node.n_results >= 7, 1);
    expect_eq("watchdog quiet", poff, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #120ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
