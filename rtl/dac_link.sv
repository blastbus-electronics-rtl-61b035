// dac_link: drives the digital daughter board's extra 8-bit group that
// commands an external DAC output system of up to 32 16-bit DACs.
//
// On every 'update' (once per ADC sample, so the DACs update at the analog
// input sample rate and stay synchronous to the bus clock) all N_DAC values
// are latched and sent in order, DAC 0 first, as four nibbles each, most
// significant nibble first. Each nibble occupies two ticks on the group:
//   grp[7]   strobe, 0 in the first tick and 1 in the second (the receiver
//            takes the nibble on the rising edge of the strobe)
//   grp[6]   start of update: 1 for the first nibble of DAC 0
//   grp[5:4] nibble index, 3 = most significant
//   grp[3:0] nibble
// An update takes 8 * N_DAC ticks (256 for 32 DACs, within the 384-tick
// sample period); 'busy' is high meanwhile and an update that arrives while
// busy is dropped and counted. The byte layout is this design's choice: the
// system description gives only the group width, the DAC count and
// resolution and the update rate.
module dac_link #(
  parameter int unsigned N_DAC = 32,
  parameter int unsigned DAC_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    tick,
  input  logic                    update,
  input  logic signed [DAC_W-1:0] values [N_DAC],
  output logic [7:0]              grp,
  output logic                    busy,
  output logic [15:0]             dropped
);
  localparam int unsigned NIB  = DAC_W / 4;
  localparam int unsigned D_W  = (N_DAC > 1) ? $clog2(N_DAC) : 1;

  logic signed [DAC_W-1:0] held [N_DAC];
  logic [D_W-1:0]          d;
  logic [1:0]              n;      // nibble index, counts down
  logic                    half;
  logic                    pend;
  logic [3:0]              nib;

  assign nib = held[d][4*n +: 4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      pend    <= 1'b0;
      d       <= '0;
      n       <= '0;
      half    <= 1'b0;
      grp     <= '0;
      dropped <= '0;
      for (int i = 0; i < N_DAC; i++) held[i] <= '0;
    end else begin
      if (update) begin
        if (busy || pend) dropped <= dropped + 1'b1;
        else begin
          held <= values;
          pend <= 1'b1;
        end
      end
      if (tick) begin
        if (!busy) begin
          grp <= '0;
          if (pend) begin
            pend <= 1'b0;
            busy <= 1'b1;
            d    <= '0;
            n    <= 2'(NIB - 1);
            half <= 1'b0;
          end
        end else begin
          grp  <= {half, (d == '0 && n == 2'(NIB - 1)), n, nib};
          half <= !half;
          if (half) begin
            if (n == '0) begin
              n <= 2'(NIB - 1);
              if (d == D_W'(N_DAC - 1)) busy <= 1'b0;
              else d <= d + 1'b1;
            end else begin
              n <= n - 1'b1;
            end
          end
        end
      end
    end
  end

  initial assert (DAC_W == 16) else $error("dac_link: nibble framing assumes 16-bit DACs");
endmodule
