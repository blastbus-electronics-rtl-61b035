// boxcar_stage: one moving-sum (boxcar) stage shared by N_CH channels.
//
// Each channel keeps the running sum of its last LEN inputs. For every input
// the stage adds the new value and subtracts the value that entered LEN
// samples earlier, read from a per-channel delay line (a circular buffer of
// LEN entries). The channels arrive as a stream, channel 0 first, and in_last
// marks the final channel of a sample; all channels share one write pointer,
// which advances after in_last. Until the buffer has wrapped once the old
// value is taken as zero, so the delay memory needs no reset.
//
// Only additions and subtractions are used, as in the described filter; the
// delay line is why it needs more memory than a CIC. The output is registered:
// out_* follow in_* by one clock. OUT_W = IN_W + clog2(LEN) holds the sum
// without overflow. The single-cycle read-modify-write of the delay line is
// this design's choice (an asynchronous-read array).
module boxcar_stage #(
  parameter int unsigned N_CH = 4,
  parameter int unsigned IN_W = 16,
  parameter int unsigned LEN  = 8,
  localparam int unsigned OUT_W = IN_W + $clog2(LEN),
  localparam int unsigned CH_W  = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [CH_W-1:0]         in_ch,
  input  logic                    in_last,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  output logic [CH_W-1:0]         out_ch,
  output logic                    out_last,
  output logic signed [OUT_W-1:0] out_data
);
  localparam int unsigned PTR_W = (LEN > 1) ? $clog2(LEN) : 1;

  logic signed [IN_W-1:0]  dly [N_CH][LEN];
  logic signed [OUT_W-1:0] acc [N_CH];
  logic [PTR_W-1:0]        ptr;
  logic                    filled;
  logic signed [IN_W-1:0]  old;
  logic signed [OUT_W-1:0] nxt;

  always_comb begin
    old = filled ? dly[in_ch][ptr] : '0;
    nxt = acc[in_ch] + OUT_W'(in_data) - OUT_W'(old);
  end

  always_ff @(posedge clk) begin
    if (in_valid) dly[in_ch][ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CH; c++) acc[c] <= '0;
      ptr       <= '0;
      filled    <= 1'b0;
      out_valid <= 1'b0;
      out_ch    <= '0;
      out_last  <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        acc[in_ch] <= nxt;
        out_ch     <= in_ch;
        out_last   <= in_last;
        out_data   <= nxt;
        if (in_last) begin
          if (ptr == PTR_W'(LEN - 1)) begin
            ptr    <= '0;
            filled <= 1'b1;
          end else begin
            ptr <= ptr + 1'b1;
          end
        end
      end
    end
  end

  initial assert (N_CH >= 1 && LEN >= 1) else $error("boxcar_stage: bad parameters");
endmodule
