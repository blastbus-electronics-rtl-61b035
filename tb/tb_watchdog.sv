// tb_watchdog: self-checking test of the supply watchdog.
//
// TIMEOUT = 100 and OFF_TIME = 20 clocks. While the line toggles every 50
// clocks no power cycle may occur. When toggling stops, power_off must rise
// exactly TIMEOUT clocks after the last change was seen (plus the 2-clock
// synchroniser and edge detect), stay high for OFF_TIME clocks, and recur
// while the line stays quiet; the cycles counter must count each.
module tb_watchdog;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;
  logic wdt = 0, poff;
  logic [7:0] cyc;
  watchdog #(.TIMEOUT(100), .OFF_TIME(20)) dut (.clk, .rst_n, .wdt_toggle(wdt), .power_off(poff), .cycles(cyc));

  int n = 0, rise = -1, fall = -1, last_toggle = 0;
  always @(posedge clk) begin
    n <= n + 1;
    if (poff && rise < 0) rise <= n;
    if (!poff && rise >= 0 && fall < 0) fall <= n;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      repeat (50) @(posedge clk);
      wdt <= !wdt;
    end
    last_toggle = n;
    checks++;
    if (cyc != 0 || poff) begin failures++; $display("FAIL power cycle while toggling"); end
    wait (fall >= 0);
    checks++;
    if (rise - last_toggle < 101 || rise - last_toggle > 104) begin failures++; $display("FAIL timeout %0d", rise - last_toggle); end
    checks++;
    if (fall - rise != 20) begin failures++; $display("FAIL off time %0d", fall - rise); end
    repeat (130) @(posedge clk);
    checks++;
    if (cyc != 2) begin failures++; $display("FAIL cycles %0d", cyc); end
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
