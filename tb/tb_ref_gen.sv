// tb_ref_gen: self-checking test of the reference wave generator.
//
// Runs the generator at the nominal setting (52 samples per period, twice
// the frame rate) with a phase offset and an amplitude of one half. The
// testbench keeps its own phase accumulator and computes every expected
// output with $sin; it checks bias, ref_i and ref_q after each sample, that
// the wave repeats after 52 samples, and that frame_sync with frame_lock
// set returns the phase to zero while frame_sync alone does not.
module tb_ref_gen;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;

  logic tick = 0, fsync = 0, flock = 0;
  logic [31:0] inc = 32'd82595525;
  logic [9:0]  ofs = 10'd100;
  logic [15:0] amp = 16'h4000;
  logic signed [15:0] bias, ref_i, ref_q;

  ref_gen dut (.clk, .rst_n, .sample_tick(tick), .frame_sync(fsync), .frame_lock(flock),
               .phase_inc(inc), .phase_ofs(ofs), .amplitude(amp), .bias, .ref_i, .ref_q);

  function automatic int s(int idx);
    return $rtoi($floor(32767.0 * $sin(6.283185307179586 * real'(idx % 1024) / 1024.0) + 0.5));
  endfunction

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  logic [31:0] acc = 0;
  int first_bias [52];

  task automatic step(int n);
    int th;
    th = int'(acc[31:22]);
    tick <= 1;
    @(posedge clk);
    tick <= 0;
    acc = acc + inc;
    @(posedge clk);
    expect_eq("bias", int'(bias), (s(th) * 16384) >>> 15);
    expect_eq("ref_i", int'(ref_i), s(th + int'(ofs)));
    expect_eq("ref_q", int'(ref_q), s(th + int'(ofs) + 256));
    if (n < 52) first_bias[n] = int'(bias);
    else if (n < 104) begin
      checks++;
      if (int'(bias) - first_bias[n - 52] > 1 || first_bias[n - 52] - int'(bias) > 1) begin
        failures++;
        $display("FAIL period: sample %0d differs from sample %0d", n, n - 52);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 130; n++) step(n);
    // frame_sync without lock: nothing happens
    fsync <= 1; @(posedge clk); fsync <= 0;
    step(200);
    // with lock: phase returns to zero
    flock <= 1; fsync <= 1; @(posedge clk); fsync <= 0; flock <= 0;
    acc = 0;
    #1;
    checks++;
    if (dut.acc != 0) begin failures++; $display("FAIL frame lock"); end
    for (int n = 0; n < 10; n++) step(300 + n);
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
