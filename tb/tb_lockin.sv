// tb_lockin: self-checking test of the multi-channel digital lock-in.
//
// Instance A (4 channels, quadrature, small filter lengths 5/4/3/2,
// decimation 4) gets random samples and references. The testbench multiplies
// and filters them itself by direct summation and compares every decimated
// in-phase and quadrature result, plus the 6-clock latency from the sample
// to channel 0's result.
// Instance B (default lengths 208/165/131/104, decimation 104, quadrature)
// gets channel 0 in phase with the reference and channel 1 shifted by a
// quarter period, with the reference at 52 samples per period (twice the
// output rate). After the filter has filled, channel 0 must give
// I = A*R/2 * gain and Q = 0 and channel 1 the reverse, to 1e-3, with the
// 2f mixer product suppressed so that successive results agree to 1e-4.
module tb_lockin;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- instance A ----------------
  localparam int NA = 4, DA = 4, NS = 48;
  localparam int LA [4] = '{5, 4, 3, 2};
  logic a_sv = 0;
  logic signed [23:0] a_smp [NA];
  logic signed [15:0] a_ri = 0, a_rq = 0;
  logic a_ov, a_busy;
  logic [1:0] a_och;
  logic signed [40+3+2+2+1-1:0] a_oi, a_oq;

  lockin #(.N_CH(NA), .QUAD(1'b1), .LEN0(5), .LEN1(4), .LEN2(3), .LEN3(2), .DECIM(DA)) dut_a (
    .clk, .rst_n, .resync(1'b0), .sample_valid(a_sv), .samples(a_smp), .ref_i(a_ri), .ref_q(a_rq),
    .out_valid(a_ov), .out_ch(a_och), .out_i(a_oi), .out_q(a_oq), .busy(a_busy));

  longint pi_ [5][NA][NS], pq_ [5][NA][NS];
  int a_time [NS];
  logic signed [23:0] a_v [NS][NA];
  logic signed [15:0] a_rv_i [NS], a_rv_q [NS];
  int a_outs = 0;

  task automatic model_a();
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < NA; c++)
        for (int n = 0; n < NS; n++) begin
          pi_[s+1][c][n] = 0; pq_[s+1][c][n] = 0;
          for (int k = 0; k < LA[s]; k++) if (n - k >= 0) begin
            pi_[s+1][c][n] += pi_[s][c][n-k];
            pq_[s+1][c][n] += pq_[s][c][n-k];
          end
        end
  endtask

  always @(posedge clk) if (a_ov) begin
    int n;
    n = (a_outs / NA) * DA + DA - 1;
    checks += 2;
    if (longint'(a_oi) != pi_[4][a_och][n] || longint'(a_oq) != pq_[4][a_och][n]) begin
      failures++;
      $display("FAIL A n=%0d ch=%0d I %0d/%0d Q %0d/%0d", n, a_och, a_oi, pi_[4][a_och][n], a_oq, pq_[4][a_och][n]);
    end
    if (a_och == 0) begin
      checks++;
      if (cyc - a_time[n] != 6) begin failures++; $display("FAIL A latency %0d", cyc - a_time[n]); end
    end
    a_outs++;
  end

  // ---------------- instance B ----------------
  logic b_sv = 0;
  logic signed [23:0] b_smp [2];
  logic signed [15:0] b_ri = 0, b_rq = 0;
  logic b_ov, b_busy;
  logic b_och;
  logic signed [40+31-1:0] b_oi, b_oq;
  lockin #(.N_CH(2), .QUAD(1'b1)) dut_b (
    .clk, .rst_n, .resync(1'b0), .sample_valid(b_sv), .samples(b_smp), .ref_i(b_ri), .ref_q(b_rq),
    .out_valid(b_ov), .out_ch(b_och), .out_i(b_oi), .out_q(b_oq), .busy(b_busy));

  localparam real TWO_PI = 6.283185307179586;
  localparam real AMP = 4000000.0, RAMP = 32767.0;
  real gain = 208.0 * 165.0 * 131.0 * 104.0;
  int  b_n = 0, b_outs = 0;
  real prev_i0 = 0.0;

  always @(posedge clk) if (b_ov && b_n > 700) begin
    real ei, eq, gi, gq;
    ei = AMP * RAMP / 2.0 * gain;
    gi = real'(b_oi); gq = real'(b_oq);
    checks += 2;
    if (b_och == 1'b0) begin
      if ((gi - ei) / ei > 1e-3 || (ei - gi) / ei > 1e-3 || gq / ei > 1e-3 || -gq / ei > 1e-3) begin
        failures++; $display("FAIL B ch0 I=%e Q=%e expected %e", gi, gq, ei);
      end
      if (b_outs > 0) begin
        checks++;
        if ((gi - prev_i0) / ei > 1e-4 || (prev_i0 - gi) / ei > 1e-4) begin
          failures++; $display("FAIL B 2f residue %e", (gi - prev_i0) / ei);
        end
      end
      prev_i0 = gi;
      b_outs++;
    end else begin
      if ((gq - ei) / ei > 1e-3 || (ei - gq) / ei > 1e-3 || gi / ei > 1e-3 || -gi / ei > 1e-3) begin
        failures++; $display("FAIL B ch1 I=%e Q=%e expected Q %e", gi, gq, ei);
      end
    end
  end

  initial begin
    for (int c = 0; c < NA; c++) a_smp[c] = '0;
    b_smp[0] = '0; b_smp[1] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // A: random data, modelled before it is driven
    for (int n = 0; n < NS; n++) begin
      a_rv_i[n] = 16'($urandom); a_rv_q[n] = 16'($urandom);
      for (int c = 0; c < NA; c++) begin
        a_v[n][c] = 24'($urandom);
        pi_[0][c][n] = longint'(a_v[n][c]) * longint'(a_rv_i[n]);
        pq_[0][c][n] = longint'(a_v[n][c]) * longint'(a_rv_q[n]);
      end
    end
    model_a();
    for (int n = 0; n < NS; n++) begin
      a_sv <= 1; a_ri <= a_rv_i[n]; a_rq <= a_rv_q[n];
      for (int c = 0; c < NA; c++) a_smp[c] <= a_v[n][c];
      a_time[n] = cyc + 1;
      @(posedge clk);
      a_sv <= 0;
      repeat (NA + 2 + $urandom_range(0, 3)) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    checks++;
    if (a_outs != NA * NS / DA) begin failures++; $display("FAIL A outputs %0d", a_outs); end
    // B: sinusoids
    for (int n = 0; n < 1040; n++) begin
      real ph;
      ph = TWO_PI * real'(n) / 52.0;
      b_n <= n;
      b_sv <= 1;
      b_smp[0] <= 24'($rtoi(AMP * $sin(ph)));
      b_smp[1] <= 24'($rtoi(AMP * $cos(ph)));
      b_ri <= 16'($rtoi(RAMP * $sin(ph)));
      b_rq <= 16'($rtoi(RAMP * $cos(ph)));
      @(posedge clk);
      b_sv <= 0;
      repeat (5) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    checks++;
    if (b_outs != 4) begin failures++; $display("FAIL B result count %0d", b_outs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
