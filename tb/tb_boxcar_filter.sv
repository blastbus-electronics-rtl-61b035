// tb_boxcar_filter: self-checking test of the 4-stage decimating boxcar filter.
//
// Instance A (small lengths 5/4/3/2, decimation 4, three channels) is fed
// random samples; a reference model in the testbench forms the four cascaded
// moving sums by direct summation over the sample history and the outputs
// are compared at every decimated sample, including the 4-clock latency.
// Instance B uses the default lengths 208/165/131/104 and decimation 104 and
// is fed a constant; once all stages are full its output must equal the
// input times the DC gain 208*165*131*104, and exactly one output per 104
// samples must appear.
module tb_boxcar_filter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;

  localparam int NA = 3, WA = 12, DA = 4;
  localparam int LA [4] = '{5, 4, 3, 2};
  localparam int NSAMP = 60;

  logic                a_valid = 0, a_last = 0;
  logic [1:0]          a_ch = 0;
  logic signed [WA-1:0] a_data = 0;
  logic                ao_valid, ao_last;
  logic [1:0]          ao_ch;
  logic signed [WA+3+2+2+1-1:0] ao_data;

  boxcar_filter #(.N_CH(NA), .IN_W(WA), .LEN0(5), .LEN1(4), .LEN2(3), .LEN3(2), .DECIM(DA)) dut_a (
    .clk, .rst_n, .resync(1'b0), .in_valid(a_valid), .in_ch(a_ch), .in_last(a_last), .in_data(a_data),
    .out_valid(ao_valid), .out_ch(ao_ch), .out_last(ao_last), .out_data(ao_data));

  // Instance B: the full lengths 208/165/131/104.
  logic b_valid = 0;
  logic signed [15:0] b_data = 16'sd1000;
  logic bo_valid, bo_last, bo_ch;
  logic signed [16+31-1:0] bo_data;
  boxcar_filter #(.N_CH(2), .IN_W(16)) dut_b (
    .clk, .rst_n, .resync(1'b0), .in_valid(b_valid), .in_ch(1'b0), .in_last(1'b1), .in_data(b_data),
    .out_valid(bo_valid), .out_ch(bo_ch), .out_last(bo_last), .out_data(bo_data));

  longint x [NA][NSAMP];
  longint st [5][NA][NSAMP];
  int     a_out_samples = 0;
  int     a_in_time [NSAMP];
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // reference model
  initial begin
    for (int c = 0; c < NA; c++)
      for (int n = 0; n < NSAMP; n++) begin
        x[c][n] = longint'($signed(12'($urandom)));
        st[0][c][n] = x[c][n];
      end
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < NA; c++)
        for (int n = 0; n < NSAMP; n++) begin
          st[s+1][c][n] = 0;
          for (int k = 0; k < LA[s]; k++) if (n - k >= 0) st[s+1][c][n] += st[s][c][n-k];
        end
  end

  // check A outputs
  always @(posedge clk) if (ao_valid) begin
    int n;
    n = a_out_samples * DA + DA - 1;
    checks++;
    if (longint'(ao_data) != st[4][ao_ch][n]) begin
      failures++;
      $display("FAIL A sample %0d ch %0d: got %0d expected %0d", n, ao_ch, ao_data, st[4][ao_ch][n]);
    end
    if (ao_ch == 0) begin
      checks++;
      if (cyc - a_in_time[n] != 4) begin
        failures++;
        $display("FAIL A latency %0d", cyc - a_in_time[n]);
      end
    end
    if (ao_last) a_out_samples++;
  end

  int b_outs = 0, b_in = 0;
  always @(posedge clk) if (bo_valid) begin
    b_outs++;
    if (b_in > 700) begin
      checks++;
      if (longint'(bo_data) != 1000 * 208 * 165 * 131 * 104) begin
        failures++;
        $display("FAIL B DC gain: got %0d", bo_data);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < NSAMP; n++) begin
      for (int c = 0; c < NA; c++) begin
        a_valid <= 1; a_ch <= 2'(c); a_last <= (c == NA - 1); a_data <= WA'(x[c][n]);
        if (c == 0) a_in_time[n] = cyc + 1;
        @(posedge clk);
      end
      begin
        int gap;
        gap = $urandom_range(0, 3);
        if (gap > 0) begin
          a_valid <= 0; a_last <= 0;
          repeat (gap) @(posedge clk);
        end
      end
    end
    a_valid <= 0; a_last <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (a_out_samples != NSAMP / DA) begin
      failures++;
      $display("FAIL A output count %0d", a_out_samples);
    end
    for (int n = 0; n < 1040; n++) begin
      b_valid <= 1; b_in <= n;
      @(posedge clk);
      b_valid <= 0;
      @(posedge clk);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (b_outs != 10) begin
      failures++;
      $display("FAIL B decimation: %0d outputs for 1040 samples", b_outs);
    end
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
