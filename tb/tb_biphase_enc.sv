// tb_biphase_enc: self-checking test of the biphase encoder.
//
// BIT_CLKS = 8. A decoder in the testbench samples the line a quarter and
// three quarters into each bit cell: equal levels mean 0, different levels
// mean 1, and every cell must start with a transition. Ten random words are
// offered back to back; the decoded bit stream must contain them in order,
// each 16 bits long, after the zeros of the idle pattern.
module tb_biphase_enc;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;
  logic valid = 0, ready, line;
  logic [15:0] data = 0;
  logic [31:0] sent;
  biphase_enc #(.BIT_CLKS(8)) dut (.clk, .rst_n, .in_valid(valid), .in_ready(ready), .in_data(data),
                                   .line, .words_sent(sent));

  logic bits [$];
  int  no_transition = 0;
  logic prev_end = 0;
  always @(posedge clk) if (rst_n) begin
    logic l1, l3;
    if (dut.c == 3'd2) l1 = line;
    if (dut.c == 3'd6) begin
      l3 = line;
      bits.push_back(l1 != l3);
    end
    if (dut.c == 3'd1 && bits.size() > 0 && line == prev_end) no_transition++;
    if (dut.c == 3'd7) prev_end = line;
  end

  logic [15:0] words [10];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (40) @(posedge clk);
    for (int i = 0; i < 10; i++) begin
      words[i] = 16'($urandom) | 16'h8000;
      valid <= 1; data <= words[i];
      @(posedge clk iff ready);
    end
    valid <= 0;
    repeat (8 * 20) @(posedge clk);
    begin
      int st;
      st = 0;
      while (st < bits.size() && bits[st] == 0) st++;
      for (int i = 0; i < 10; i++) begin
        logic [15:0] w;
        for (int b = 0; b < 16; b++) w[15-b] = (st + 16*i + b < bits.size()) ? bits[st + 16*i + b] : 1'b0;
        checks++;
        if (w != words[i]) begin failures++; $display("FAIL word %0d got %h expected %h", i, w, words[i]); end
      end
    end
    checks++;
    if (no_transition != 0) begin failures++; $display("FAIL %0d cells without a leading transition", no_transition); end
    checks++;
    if (sent != 10) begin failures++; $display("FAIL words_sent %0d", sent); end
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
