// adc_reader: bit-level readout of the analog daughter boards' ADCs.
//
// All N_ADC 24-bit sigma-delta converters run from the bus clock and convert
// together, one result every 384 bus clocks (10.4 kHz at 4 MHz), so one
// shared serial clock reads them all in parallel. 'tick' marks one bus clock
// period in the fast clk domain. When the converters flag new data (drdy,
// from the first converter) the reader clocks out 24 bits, most significant
// first: each bit lasts four ticks, SCLK high for the first two and low for
// the last two, and DOUT is sampled in the second tick of the high phase. The
// converter presents the next bit after SCLK falls. After the 24th bit the
// samples appear on 'samples' with a one-clock sample_valid, 96 ticks after
// drdy. A drdy that arrives while a readout is still running is counted in
// 'missed' and otherwise ignored.
//
// The conversion period and word length follow the system description; the
// serial timing (4 ticks per bit, separate data-ready flag) is this design's
// choice and is matched by the converter model used in the testbenches.
module adc_reader #(
  parameter int unsigned N_ADC = 50,
  parameter int unsigned ADC_W = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    tick,
  input  logic                    drdy,
  input  logic [N_ADC-1:0]        dout,
  output logic                    sclk,
  output logic signed [ADC_W-1:0] samples [N_ADC],
  output logic                    sample_valid,
  output logic [15:0]             missed
);
  localparam int unsigned BIT_W = $clog2(ADC_W + 1);

  logic                   active;
  logic [1:0]             phase;
  logic [BIT_W-1:0]       nbit;
  logic [ADC_W-1:0]       shreg [N_ADC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active       <= 1'b0;
      phase        <= '0;
      nbit         <= '0;
      sclk         <= 1'b0;
      sample_valid <= 1'b0;
      missed       <= '0;
      for (int i = 0; i < N_ADC; i++) begin
        shreg[i]   <= '0;
        samples[i] <= '0;
      end
    end else begin
      sample_valid <= 1'b0;
      if (tick) begin
        if (!active) begin
          if (drdy) begin
            active <= 1'b1;
            phase  <= '0;
            nbit   <= '0;
          end
        end else begin
          if (drdy) missed <= missed + 1'b1;
          phase <= phase + 1'b1;
          unique case (phase)
            2'd0: sclk <= 1'b1;
            2'd1: for (int i = 0; i < N_ADC; i++) shreg[i] <= {shreg[i][ADC_W-2:0], dout[i]};
            2'd2: sclk <= 1'b0;
            2'd3: begin
              if (nbit == BIT_W'(ADC_W - 1)) begin
                active       <= 1'b0;
                sample_valid <= 1'b1;
                for (int i = 0; i < N_ADC; i++) samples[i] <= $signed(shreg[i]);
              end
              nbit <= nbit + 1'b1;
            end
          endcase
        end
      end
    end
  end
endmodule
