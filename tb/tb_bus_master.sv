// tb_bus_master: self-checking test of the bus master's frame sequencer.
//
// CLK_DIV = 4, so one bus tick every fourth clock. The testbench decodes
// the line itself and plays two nodes: node 2 answers every read with
// data = addr ^ 16'h5A5A on the tick after the master releases the line, node 5 never answers.
// The frame holds a write, two reads of node 2 and a read of node 5.
// Checked: the words on the line in order, frame_sync only on the first
// word, the stored and streamed responses, the timeout count, the frame
// start interval (frame_period ticks), the duration of a read (64 ticks from
// the request's first bit to the end of the response: 16 data bits per 64
// bus clocks), an overrun when
// frame_period is shorter than the frame, and the external clock mode.
module tb_bus_master;
  import bb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;

  logic ext_sel = 0, ext_clk = 0, bus_clk, tick;
  logic m_tx, m_oe, n_tx = 0, n_oe = 0, line;
  logic enable = 0, tbl_we = 0;
  logic [4:0] frame_len = 0;
  logic [31:0] frame_period = 600;
  logic [3:0] tbl_addr = 0, resp_addr = 0, rsp_idx;
  bus_word_t tbl_wdata = '0;
  logic [15:0] resp_data, rsp_data, timeouts, overruns;
  logic resp_ok, rsp_valid, frame_start, frame_done;
  logic [31:0] frames;

  assign line = m_oe ? m_tx : (n_oe & n_tx);

  bus_master #(.N_ENTRIES(16), .CLK_DIV(4), .RESP_TIMEOUT(8)) dut (
    .clk, .rst_n, .ext_clk_sel(ext_sel), .ext_clk, .bus_clk, .tick, .bus_rx(line), .bus_tx(m_tx), .bus_oe(m_oe),
    .enable, .frame_len, .frame_period, .tbl_we, .tbl_addr, .tbl_wdata, .resp_addr, .resp_data, .resp_ok,
    .rsp_valid, .rsp_idx, .rsp_data, .frame_start, .frame_done, .frames, .timeouts, .overruns);

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  // ---- node models and line decoder, sampling on the master's tick ----
  bus_word_t seen [$];
  int tickn = 0, word_t0 [$], resp_end [$];
  always @(posedge clk) if (tick) tickn <= tickn + 1;

  // Clocked model: decodes the master's words and answers reads of node 2.
  logic [31:0] sh_m = 0, sh_r = 0;
  int bitc = 0, rbit = -1, wait_r = -1, t0 = 0;
  always @(posedge clk) if (tick) begin
    if (bitc == 0 && m_oe && m_tx) begin
      bitc <= 1; sh_m <= 32'd1; t0 <= tickn;
    end else if (bitc > 0) begin
      if (bitc == 31) begin
        bus_word_t w;
        w = bus_word_t'({sh_m[30:0], m_tx});
        seen.push_back(w);
        word_t0.push_back(t0);
        bitc <= 0;
        if (w.rd && w.node == 3'd2) begin
          sh_r <= {1'b1, 1'b0, 1'b1, 3'd2, w.addr, 16'(w.addr) ^ 16'h5A5A};
          rbit <= 32;
        end
      end else begin
        sh_m <= {sh_m[30:0], m_tx};
        bitc <= bitc + 1;
      end
    end
    if (rbit > 0) begin
      n_oe <= 1; n_tx <= sh_r[31]; sh_r <= {sh_r[30:0], 1'b0}; rbit <= rbit - 1;
    end else if (rbit == 0) begin
      n_oe <= 0; n_tx <= 0; rbit <= -1; resp_end.push_back(tickn);
    end
  end

  bus_word_t frame [4];
  int rsp_n = 0;
  logic [15:0] rsp_seen [8];
  always @(posedge clk) if (rsp_valid) begin rsp_seen[rsp_n] = rsp_data; rsp_n++; end
  int fs_tick [$];
  always @(posedge clk) if (frame_start) fs_tick.push_back(tickn);

  initial begin
    frame[0] = '{start: 0, frame_sync: 0, rd: 0, node: 2, addr: 10'h301, data: 16'h1234};
    frame[1] = '{start: 0, frame_sync: 0, rd: 1, node: 2, addr: 10'h010, data: 16'h0};
    frame[2] = '{start: 0, frame_sync: 0, rd: 1, node: 5, addr: 10'h011, data: 16'h0};
    frame[3] = '{start: 0, frame_sync: 0, rd: 1, node: 2, addr: 10'h2AB, data: 16'h0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      @(posedge clk); tbl_we <= 1; tbl_addr <= 4'(i); tbl_wdata <= frame[i];
    end
    @(posedge clk); tbl_we <= 0;
    frame_len <= 4; enable <= 1;
    wait (frames == 3);
    enable <= 0;
    repeat (50) @(posedge clk);
    // words on the line
    expect_eq("word count", seen.size(), 12);
    for (int i = 0; i < 12; i++) begin
      bus_word_t e;
      e = frame[i % 4];
      e.start = 1; e.frame_sync = (i % 4 == 0);
      expect_eq($sformatf("word %0d", i), seen[i], e);
    end
    // responses
    resp_addr <= 1; #1; expect_eq("resp 1", resp_data, 16'h0010 ^ 16'h5A5A); expect_eq("ok 1", resp_ok, 1);
    resp_addr <= 2; #1; expect_eq("ok 2 (timeout)", resp_ok, 0);
    resp_addr <= 3; #1; expect_eq("resp 3", resp_data, 16'h02AB ^ 16'h5A5A); expect_eq("ok 3", resp_ok, 1);
    expect_eq("streamed responses", rsp_n, 6);
    expect_eq("streamed 0", rsp_seen[0], 16'h0010 ^ 16'h5A5A);
    expect_eq("timeouts", timeouts, 3);
    expect_eq("frame interval", fs_tick[1] - fs_tick[0], 600);
    expect_eq("read duration", resp_end[0] - word_t0[1], 64);
    expect_eq("no overrun yet", overruns, 0);
    // frame period shorter than the frame: overrun
    frame_period <= 100; enable <= 1;
    wait (frames == 5);
    enable <= 0;
    checks++;
    if (overruns == 0) begin failures++; $display("FAIL overrun not counted"); end
    // external clock: ticks follow ext_clk edges
    repeat (300) @(posedge clk);
    ext_sel <= 1;
    begin
      int t0;
      t0 = tickn;
      repeat (10) begin ext_clk <= 1; repeat (3) @(posedge clk); ext_clk <= 0; repeat (4) @(posedge clk); end
      repeat (4) @(posedge clk);
      expect_eq("external clock ticks", tickn - t0, 10);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
