// quad_decoder: quadrature encoder decoding on two digital inputs.
//
// Channels A and B are synchronised with two flip-flops and compared with
// their previous state on every clock (x4 decoding). The sequence
// (A,B) = 00, 01, 11, 10 increments 'count', the reverse decrements it, and a
// change of both inputs at once, which a valid encoder never makes, is
// counted in 'errors' without moving the position. The inputs must change
// no faster than once per two clocks. The x4 decoder and error counter are
// this design's choice; the system description only says that such decoders
// exist as firmware modules for the digital inputs.
module quad_decoder #(
  parameter int unsigned CNT_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    a,
  input  logic                    b,
  output logic signed [CNT_W-1:0] count,
  output logic [15:0]             errors
);
  logic [1:0] a_s, b_s;
  logic [1:0] prev, cur;

  assign cur = {a_s[1], b_s[1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_s    <= '0;
      b_s    <= '0;
      prev   <= '0;
      count  <= '0;
      errors <= '0;
    end else begin
      a_s  <= {a_s[0], a};
      b_s  <= {b_s[0], b};
      prev <= cur;
      unique case ({prev, cur})
        4'b00_01, 4'b01_11, 4'b11_10, 4'b10_00: count <= count + 1'b1;
        4'b00_10, 4'b10_11, 4'b11_01, 4'b01_00: count <= count - 1'b1;
        4'b00_11, 4'b11_00, 4'b01_10, 4'b10_01: errors <= errors + 1'b1;
        default: ;
      endcase
    end
  end
endmodule
