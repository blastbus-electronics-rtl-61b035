// tb_bbus_system: end-to-end test of a small crate.
//
// Two nodes with three ADC channels each, filter lengths 5/4/3/2 and
// decimation 4, bus clock = clk/8, a 4-entry downlink queue and a radio bit
// of 64 clocks, so that the queue overflows. Converter models supply DC
// values; the host loads a frame that broadcasts the lock-in setup
// (constant reference, ref_i = 32767), then reads every node's lock-in and
// raw ADC registers and one register of an absent node (6).
// Checked: the response table against values computed here
// (I = (V * 32767 * 120) >> 16, raw = V), a timeout for the absent node, the
// first words of the biphase downlink against the responses, and, at the
// end, that every mechanism happened at least once: frames, read responses,
// timeouts, frame overruns (short period), the external-clock mode switch,
// downlink queue overflow, lock-in results, DAC updates and a watchdog
// power cycle.
module tb_bbus_system;
  import bb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;

  localparam int NN = 2, NA = 3, NE = 16;
  // ENTRIES: 4 broadcast writes, 5 reads per node, 1 read of an absent node
  logic ext_sel = 0, ext_clk = 0, bus_clk;
  logic enable = 0, tbl_we = 0;
  logic [4:0] frame_len = 0;
  logic [31:0] frame_period = 2000;
  logic [3:0] tbl_addr = 0, resp_addr = 0;
  bus_word_t tbl_wdata = '0;
  logic [15:0] resp_data, timeouts, overruns, dl_ovf;
  logic resp_ok, frame_done, biphase;
  logic [31:0] frames;
  logic [NN-1:0] sclk, drdy, wdt = '0, poff;
  logic [NN-1:0][NA-1:0] dout;
  logic [NN-1:0][DIO_GROUPS-1:0][7:0] din = '0, dio_out, dio_oe;
  logic [NN-1:0][7:0] dac_grp;

  bbus_system #(.N_NODES(NN), .N_ADC(NA), .N_ENTRIES(NE), .CLK_DIV(8), .BIT_CLKS(64), .FIFO_DEPTH(4),
                .LEN0(5), .LEN1(4), .LEN2(3), .LEN3(2), .DECIM(4), .WDT_TIMEOUT(20000), .WDT_OFF(50)) dut (
    .clk, .rst_n, .ext_clk_sel(ext_sel), .ext_clk, .bus_clk,
    .enable, .frame_len, .frame_period, .tbl_we, .tbl_addr, .tbl_wdata, .resp_addr, .resp_data, .resp_ok,
    .frame_done, .frames, .timeouts, .overruns, .biphase, .downlink_overflows(dl_ovf),
    .adc_sclk(sclk), .adc_drdy(drdy), .adc_dout(dout), .dio_in(din), .dio_out, .dio_oe, .dac_grp,
    .wdt_toggle(wdt), .power_off(poff));

  logic [23:0] val [NN][NA];
  logic [NA-1:0] drdy_v [NN];
  for (genvar n = 0; n < NN; n++) begin : g_n
    for (genvar i = 0; i < NA; i++) begin : g_a
      ads1251_model #(.PERIOD(384)) u (.clk, .tick(dut.g_node[n].u_node.tick), .sclk(sclk[n]),
                                       .value(val[n][i]), .dout(dout[n][i]), .drdy(drdy_v[n][i]));
    end
    assign drdy[n] = drdy_v[n][0];
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  // ---- mechanism counters ----
  int n_results = 0, n_dac_updates = 0, n_poff = 0, n_mode_switch = 0;
  logic [NN-1:0] poff_q = '0;
  logic [NN-1:0] g6_q = '0;
  always @(posedge clk) begin
    if (dut.g_node[0].u_node.li_valid) n_results++;
    poff_q <= poff;
    for (int n = 0; n < NN; n++) begin
      g6_q[n] <= dac_grp[n][6];
      if (dac_grp[n][6] && !g6_q[n] && dac_grp[n][7] == 1'b0) n_dac_updates++;
      if (poff[n] && !poff_q[n]) n_poff++;
    end
  end

  // ---- biphase downlink decoder (cells of 64 clocks) ----
  logic dl_bits [$];
  always @(posedge clk) if (rst_n) begin
    logic l1;
    if (dut.u_biphase.c == 6'd16) l1 = biphase;
    if (dut.u_biphase.c == 6'd48) dl_bits.push_back(l1 != biphase);
  end

  // words entering the downlink queue, and where each leaves in the bit stream
  logic [15:0] rsp_words [$];
  int dl_start [$];
  always @(posedge clk) begin
    if (dut.rsp_valid) rsp_words.push_back(dut.rsp_data);
    if (dut.q_valid && dut.q_ready) dl_start.push_back(dl_bits.size());
  end

  // ---- frame table ----
  bus_word_t tbl [NE];
  int n_ent;
  initial begin
    n_ent = 0;
    tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 0, node: NODE_BROADCAST, addr: 10'h300, data: 1};  // lock to frames
    tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 0, node: NODE_BROADCAST, addr: 10'h301, data: 0};
    tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 0, node: NODE_BROADCAST, addr: 10'h302, data: 0};
    tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 0, node: NODE_BROADCAST, addr: 10'h303, data: 256};
    for (int n = 0; n < NN; n++) begin
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 3'(n), addr: 10'h000, data: 0};  // ch0 I hi
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 3'(n), addr: 10'h001, data: 0};  // ch0 I lo
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 3'(n), addr: 10'h004, data: 0};  // ch2 I hi
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 3'(n), addr: 10'h005, data: 0};  // ch2 I lo
      tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 3'(n), addr: 10'h202, data: 0};  // ch1 raw hi
    end
    tbl[n_ent++] = '{start: 0, frame_sync: 0, rd: 1, node: 3'd6, addr: 10'h000, data: 0};    // absent
  end

  function automatic longint lockin_i(logic [23:0] v);
    return (longint'($signed(v)) * 32767 * 120) >>> 16;
  endfunction

  initial begin
    for (int n = 0; n < NN; n++) for (int i = 0; i < NA; i++)
      val[n][i] = 24'((n + 1) * 1000003 * (i + 1) * ((i == 2) ? -1 : 1));
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      forever begin repeat (200) @(posedge clk); wdt = ~wdt; end
    join_none
    for (int e = 0; e < n_ent; e++) begin
      @(posedge clk); tbl_we <= 1; tbl_addr <= 4'(e); tbl_wdata <= tbl[e];
    end
    @(posedge clk); tbl_we <= 0;
    frame_len <= 5'(n_ent);
    enable <= 1;
    // let the lock-in fill: results every 4 samples of 384 bus clocks
    wait (n_results >= 6 * NA);
    wait (frame_done);
    wait (frame_done);
    @(posedge clk);
    // response table
    begin
      int e;
      longint iv;
      e = 4;
      for (int n = 0; n < NN; n++) begin
        logic [15:0] h, l;
        resp_addr <= 4'(e); #1; h = resp_data; expect_eq("resp ok", resp_ok, 1);
        resp_addr <= 4'(e + 1); #1; l = resp_data;
        iv = lockin_i(val[n][0]);
        expect_eq($sformatf("node %0d ch0 I", n), longint'($signed({h, l})), iv);
        resp_addr <= 4'(e + 2); #1; h = resp_data;
        resp_addr <= 4'(e + 3); #1; l = resp_data;
        iv = lockin_i(val[n][2]);
        expect_eq($sformatf("node %0d ch2 I", n), longint'($signed({h, l})), iv);
        resp_addr <= 4'(e + 4); #1;
        expect_eq($sformatf("node %0d ch1 raw", n), resp_data, val[n][1][23:8]);
        e += 5;
      end
      resp_addr <= 4'(e); #1; expect_eq("absent node not ok", resp_ok, 0);
    end
    checks++;
    if (timeouts == 0) begin failures++; $display("FAIL no timeout"); end
    // downlink: the first queued words leave as the first biphase words
    for (int k = 0; k < 4; k++) begin
      logic [15:0] w;
      for (int b = 0; b < 16; b++) w[15-b] = (dl_start[k] + b < dl_bits.size()) ? dl_bits[dl_start[k] + b] : 1'b0;
      expect_eq($sformatf("downlink word %0d", k), w, rsp_words[k]);
    end
    // overrun: frame period shorter than the frame
    frame_period <= 300;
    repeat (3) @(posedge frame_done);
    frame_period <= 2000;
    // mode switch to the external bus clock (strongly synchronised)
    ext_sel <= 1;
    begin : ext_mode
    int f0;
    f0 = frames;
    fork
      begin repeat (4000) begin ext_clk <= 1; repeat (4) @(posedge clk); ext_clk <= 0; repeat (5) @(posedge clk); end end
      begin @(posedge frame_done); @(posedge frame_done); end
    join_any
    checks++;
    if (frames - f0 < 1 || dut.u_master.clk_sel != 1'b1) begin failures++; $display("FAIL no frame on the external clock"); end
    else n_mode_switch++;
    end
    ext_sel <= 0;
    // watchdog: stop toggling
    disable fork;
    repeat (25000) @(posedge clk);
    // ---- mechanism coverage ----
    $display("mechanisms: frames=%0d timeouts=%0d overruns=%0d mode_switch=%0d downlink_overflow=%0d results=%0d dac_updates=%0d power_cycles=%0d",
             frames, timeouts, overruns, n_mode_switch, dl_ovf, n_results, n_dac_updates, n_poff);
    checks++; if (frames == 0)        begin failures++; $display("FAIL no frames"); end
    checks++; if (timeouts == 0)      begin failures++; $display("FAIL no timeouts"); end
    checks++; if (overruns == 0)      begin failures++; $display("FAIL no overruns"); end
    checks++; if (n_mode_switch == 0) begin failures++; $display("FAIL no mode switch"); end
    checks++; if (dl_ovf == 0)        begin failures++; $display("FAIL no downlink overflow"); end
    checks++; if (n_results == 0)     begin failures++; $display("FAIL no lock-in results"); end
    checks++; if (n_dac_updates == 0) begin failures++; $display("FAIL no DAC updates"); end
    checks++; if (n_poff == 0)        begin failures++; $display("FAIL no watchdog power cycle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
