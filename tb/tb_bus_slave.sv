// tb_bus_slave: self-checking test of the node's bus interface.
//
// The testbench plays the bus master: it shifts 32-bit words onto the line,
// one bit per tick (every fourth clock), and listens for responses. A small
// register array in the testbench answers the register port. Checked: a
// write to this node (3) and a broadcast write reach the register port with
// the right address and data, a write or read for another node does not, a
// read returns the addressed register in a well-formed response that starts
// on the second tick after the request and drives the line for exactly 32
// ticks, and frame_sync pulses once for each word that carries it.
module tb_bus_slave;
  import bb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;
  logic tick = 0;
  int tc = 0;
  always @(posedge clk) begin
    tc <= (tc + 1) % 4;
    tick <= (tc == 3);
  end

  logic rx = 0, tx, oe, we, re, fs;
  logic [9:0] addr;
  logic [15:0] wdata, rdata = 0;
  bus_slave #(.NODE_ID(3'd3)) dut (.clk, .rst_n, .tick, .bus_rx(rx), .bus_tx(tx), .bus_oe(oe),
    .reg_we(we), .reg_re(re), .reg_addr(addr), .reg_wdata(wdata), .reg_rdata(rdata), .frame_sync(fs));

  logic [15:0] regs [1024];
  int n_we = 0, n_fs = 0, oe_ticks = 0;
  logic [9:0] last_we_addr;
  logic [15:0] last_we_data;
  always @(posedge clk) begin
    if (re) rdata <= regs[addr];
    if (we) begin n_we++; last_we_addr = addr; last_we_data = wdata; regs[addr] <= wdata; end
    if (fs) n_fs++;
    if (tick && oe) oe_ticks++;
  end

  task automatic send(bus_word_t w);
    for (int b = 31; b >= 0; b--) begin
      @(posedge clk iff tick);
      rx <= w[b];
    end
    @(posedge clk iff tick);
    rx <= 0;
  endtask

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  // Receive a response; returns the word and the ticks waited for the start bit.
  task automatic receive(output bus_word_t w, output int waited);
    waited = 0;
    w = '0;
    while (1) begin
      @(posedge clk iff tick);
      if (tx && oe) break;
      waited++;
      if (waited > 20) return;
    end
    w[31] = 1'b1;
    for (int b = 30; b >= 0; b--) begin
      @(posedge clk iff tick);
      w[b] = tx;
    end
  endtask

  initial begin
    bus_word_t r;
    int waited, base;
    for (int i = 0; i < 1024; i++) regs[i] = 16'(i * 7 + 1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // write to this node, with frame sync
    send('{start: 1, frame_sync: 1, rd: 0, node: 3, addr: 10'h123, data: 16'hBEEF});
    repeat (4) @(posedge clk);
    expect_eq("writes", n_we, 1);
    expect_eq("write addr", last_we_addr, 10'h123);
    expect_eq("write data", last_we_data, 16'hBEEF);
    expect_eq("frame sync", n_fs, 1);
    // write to another node: ignored, frame sync still seen
    send('{start: 1, frame_sync: 1, rd: 0, node: 2, addr: 10'h124, data: 16'h1111});
    repeat (4) @(posedge clk);
    expect_eq("other node write", n_we, 1);
    expect_eq("frame sync 2", n_fs, 2);
    // broadcast write
    send('{start: 1, frame_sync: 0, rd: 0, node: NODE_BROADCAST, addr: 10'h200, data: 16'h0042});
    repeat (4) @(posedge clk);
    expect_eq("broadcast write", n_we, 2);
    expect_eq("broadcast addr", last_we_addr, 10'h200);
    // read of the register written first
    base = oe_ticks;
    send('{start: 1, frame_sync: 0, rd: 1, node: 3, addr: 10'h123, data: 16'h0});
    receive(r, waited);
    expect_eq("response data", r.data, 16'hBEEF);
    expect_eq("response addr", r.addr, 10'h123);
    expect_eq("response node", r.node, 3);
    expect_eq("response rd", r.rd, 1);
    expect_eq("response turnaround", waited, 1);
    repeat (12) @(posedge clk);
    expect_eq("line driven ticks", oe_ticks - base, 32);
    expect_eq("line released", oe, 0);
    // several reads of untouched registers
    for (int k = 0; k < 5; k++) begin
      logic [9:0] a;
      a = 10'($urandom);
      send('{start: 1, frame_sync: 0, rd: 1, node: 3, addr: a, data: 16'h0});
      receive(r, waited);
      expect_eq("read data", r.data, regs[a]);
      repeat (8) @(posedge clk);
    end
    // read of another node: no answer
    base = oe_ticks;
    send('{start: 1, frame_sync: 0, rd: 1, node: 1, addr: 10'h5, data: 16'h0});
    repeat (200) @(posedge clk);
    expect_eq("no answer for other node", oe_ticks - base, 0);
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
