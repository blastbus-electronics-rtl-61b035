// tb_dac_link: self-checking test of the DAC-system link.
//
// A receiver model in the testbench watches the 8-bit group, takes a nibble
// on each rising edge of the strobe bit and rebuilds the 32 16-bit values of
// each update, using the start bit to find DAC 0. Each update carries new
// random values, which must all arrive intact. Also checked: an update takes
// 8 ticks per DAC (256 for 32 DACs) and an update offered while busy is
// dropped and counted.
module tb_dac_link;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;
  logic tick = 0;
  always @(posedge clk) tick <= !tick;

  logic update = 0;
  logic signed [15:0] vals [32];
  logic [7:0] grp;
  logic busy;
  logic [15:0] dropped;
  dac_link dut (.clk, .rst_n, .tick, .update, .values(vals), .grp, .busy, .dropped);

  // receiver
  logic [7:0] g_q = 0;
  logic [15:0] rx [32];
  int d = -1, nib = 0, updates_rx = 0;
  always @(posedge clk) begin
    g_q <= grp;
    if (grp[7] && !g_q[7]) begin
      if (grp[6]) begin d = 0; nib = 0; end
      if (d >= 0 && d < 32) begin
        checks++;
        if (grp[5:4] != 2'(3 - nib)) begin failures++; $display("FAIL nibble index"); end
        rx[d] = {rx[d][11:0], grp[3:0]};
        nib++;
        if (nib == 4) begin
          nib = 0; d++;
          if (d == 32) updates_rx++;
        end
      end
    end
  end

  logic signed [15:0] sent [32];
  initial begin
    int t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < 4; u++) begin
      for (int i = 0; i < 32; i++) begin vals[i] = 16'($urandom); sent[i] = vals[i]; end
      @(posedge clk); update <= 1; @(posedge clk); update <= 0;
      t0 = $time;
      wait (busy);
      if (u == 0) begin
        @(posedge clk); update <= 1; @(posedge clk); update <= 0;   // while busy: dropped
      end
      wait (!busy);
      t1 = $time;
      checks++;
      if ((t1 - t0) / 20 < 256 || (t1 - t0) / 20 > 258) begin failures++; $display("FAIL duration %0d ticks", (t1 - t0) / 20); end
      repeat (8) @(posedge clk);
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (rx[i] != sent[i]) begin failures++; $display("FAIL update %0d dac %0d got %h expected %h", u, i, rx[i], sent[i]); end
      end
    end
    checks++;
    if (updates_rx != 4) begin failures++; $display("FAIL updates received %0d", updates_rx); end
    checks++;
    if (dropped != 1) begin failures++; $display("FAIL dropped %0d", dropped); end
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
