// biphase_enc: biphase (bi-phase mark) encoder for the line-of-sight radio
// transmitter stream.
//
// 16-bit words are accepted with a valid/ready handshake and sent most
// significant bit first, one bit per BIT_CLKS clocks. A word is taken only
// at the end of a bit cell (in_ready is high for that one clock), so its
// first bit fills the next whole cell. The line level toggles
// at the start of every bit and toggles again in the middle of a '1' bit, so
// the signal carries its own clock and has no DC component. When no word is
// waiting the encoder sends zeros, keeping the transitions going. BIT_CLKS
// must be even. The mark convention and the idle pattern are this design's
// choices; the description only says that a biphase signal is generated for
// the transmitter.
module biphase_enc #(
  parameter int unsigned BIT_CLKS = 80
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [15:0] in_data,
  output logic        line,
  output logic [31:0] words_sent
);
  localparam int unsigned CW = $clog2(BIT_CLKS);
  logic [CW-1:0] c;
  logic [15:0]   sh;
  logic [3:0]    nb;
  logic          have;

  assign in_ready = (c == CW'(BIT_CLKS - 1)) && (!have || nb == 4'd15);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c          <= '0;
      sh         <= '0;
      nb         <= '0;
      have       <= 1'b0;
      line       <= 1'b0;
      words_sent <= '0;
    end else begin
      c <= (c == CW'(BIT_CLKS - 1)) ? '0 : c + 1'b1;
      if (c == '0) line <= !line;
      else if (c == CW'(BIT_CLKS / 2) && have && sh[15]) line <= !line;
      if (c == CW'(BIT_CLKS - 1)) begin
        if (have) begin
          sh <= {sh[14:0], 1'b0};
          nb <= nb + 1'b1;
          if (nb == 4'd15) begin
            have       <= 1'b0;
            words_sent <= words_sent + 1'b1;
          end
        end
      end
      if (in_valid && in_ready) begin
        sh   <= in_data;
        nb   <= '0;
        have <= 1'b1;
      end
    end
  end

  initial assert (BIT_CLKS >= 2 && BIT_CLKS % 2 == 0) else $error("biphase_enc: BIT_CLKS must be even");
endmodule
