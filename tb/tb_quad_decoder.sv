// tb_quad_decoder: self-checking test of the quadrature decoder.
//
// Drives an encoder model: a random walk of single Gray-code steps (forward is
// (A,B) = 00, 01, 11, 10), each held for a few clocks, and keeps its own position.
// The decoder's count must follow it exactly; a few illegal double changes
// must be counted as errors without moving the count.
module tb_quad_decoder;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  always #5 clk = !clk;
  logic a = 0, b = 0;
  logic signed [31:0] count;
  logic [15:0] errors;
  quad_decoder dut (.clk, .rst_n, .a, .b, .count, .errors);

  int pos = 0, state = 0;   // state 0..3 -> (a,b) = 00,01,11,10 ... forward order
  function automatic logic [1:0] ab(int st);
    case (st & 3) 0: return 2'b00; 1: return 2'b01; 2: return 2'b11; default: return 2'b10; endcase
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      int dir;
      dir = ($urandom_range(0, 9) < 6) ? 1 : -1;
      state = state + dir;
      pos = pos + dir;
      {a, b} = ab(state);
      repeat ($urandom_range(2, 5)) @(posedge clk);
      if (i % 50 == 49) begin
        repeat (3) @(posedge clk);
        checks++;
        if (count != pos) begin failures++; $display("FAIL count %0d expected %0d", count, pos); end
      end
    end
    // illegal: both change
    for (int k = 0; k < 3; k++) begin
      state = state + 2;
      {a, b} = ab(state);
      repeat (4) @(posedge clk);
      state = state - 2;
      {a, b} = ab(state);
      repeat (4) @(posedge clk);
    end
    repeat (4) @(posedge clk);
    checks++;
    if (errors != 6) begin failures++; $display("FAIL errors %0d", errors); end
    checks++;
    if (count != pos) begin failures++; $display("FAIL count moved by errors %0d vs %0d", count, pos); end
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
