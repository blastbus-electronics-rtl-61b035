// boxcar_filter: 4-stage boxcar anti-aliasing filter with decimation.
//
// Four boxcar_stage moving sums in cascade, lengths LEN0..LEN3, followed by a
// decimator that passes one sample in DECIM. With the defaults (208, 165, 131,
// 104 and DECIM = 104) the first nulls of the stages sit at 1/2, 2^(-2/3),
// 2^(-1/3) and 1 times the decimated rate, spaced logarithmically between its
// Nyquist frequency and the rate itself, which gives a flatter pass band and
// lower side lobes than a 4-stage CIC. The last stage, 104 samples long, has
// nulls at every multiple of the output rate, so a reference at twice the
// frame rate and its 2f mixer product are removed.
//
// Interface: a stream of channels (in_ch = 0..N_CH-1, in_last on the final
// one) per input sample. Every stage adds one clock, so the output stream of
// a decimated sample follows its input by 4 clocks. out_valid is raised only
// for the input sample at which the sample counter reaches DECIM-1; the
// counter restarts at zero on 'resync' (frame alignment, optional). The
// output is the raw sum, with a DC gain of LEN0*LEN1*LEN2*LEN3, and wide
// enough never to overflow.
module boxcar_filter
  import bb_pkg::*;
#(
  parameter int unsigned N_CH  = 4,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned LEN0  = BOX_LEN0,
  parameter int unsigned LEN1  = BOX_LEN1,
  parameter int unsigned LEN2  = BOX_LEN2,
  parameter int unsigned LEN3  = BOX_LEN3,
  parameter int unsigned DECIM = DECIMATION,
  localparam int unsigned W1 = IN_W + $clog2(LEN0),
  localparam int unsigned W2 = W1 + $clog2(LEN1),
  localparam int unsigned W3 = W2 + $clog2(LEN2),
  localparam int unsigned OUT_W = W3 + $clog2(LEN3),
  localparam int unsigned CH_W  = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    resync,
  input  logic                    in_valid,
  input  logic [CH_W-1:0]         in_ch,
  input  logic                    in_last,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  output logic [CH_W-1:0]         out_ch,
  output logic                    out_last,
  output logic signed [OUT_W-1:0] out_data
);
  localparam int unsigned DEC_W = (DECIM > 1) ? $clog2(DECIM) : 1;

  logic v1, v2, v3, v4, l1, l2, l3, l4;
  logic [CH_W-1:0] c1, c2, c3, c4;
  logic signed [W1-1:0] d1;
  logic signed [W2-1:0] d2;
  logic signed [W3-1:0] d3;
  logic signed [OUT_W-1:0] d4;

  boxcar_stage #(.N_CH(N_CH), .IN_W(IN_W), .LEN(LEN0)) u_s0 (
    .clk, .rst_n, .in_valid, .in_ch, .in_last, .in_data,
    .out_valid(v1), .out_ch(c1), .out_last(l1), .out_data(d1));
  boxcar_stage #(.N_CH(N_CH), .IN_W(W1), .LEN(LEN1)) u_s1 (
    .clk, .rst_n, .in_valid(v1), .in_ch(c1), .in_last(l1), .in_data(d1),
    .out_valid(v2), .out_ch(c2), .out_last(l2), .out_data(d2));
  boxcar_stage #(.N_CH(N_CH), .IN_W(W2), .LEN(LEN2)) u_s2 (
    .clk, .rst_n, .in_valid(v2), .in_ch(c2), .in_last(l2), .in_data(d2),
    .out_valid(v3), .out_ch(c3), .out_last(l3), .out_data(d3));
  boxcar_stage #(.N_CH(N_CH), .IN_W(W3), .LEN(LEN3)) u_s3 (
    .clk, .rst_n, .in_valid(v3), .in_ch(c3), .in_last(l3), .in_data(d3),
    .out_valid(v4), .out_ch(c4), .out_last(l4), .out_data(d4));

  // Decimation counter, advanced at the end of each sample leaving the cascade.
  logic [DEC_W-1:0] dec_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dec_cnt <= '0;
    else if (resync) dec_cnt <= '0;
    else if (v4 && l4) dec_cnt <= (dec_cnt == DEC_W'(DECIM - 1)) ? '0 : dec_cnt + 1'b1;
  end

  assign out_valid = v4 && (dec_cnt == DEC_W'(DECIM - 1));
  assign out_ch    = c4;
  assign out_last  = l4;
  assign out_data  = d4;
endmodule
