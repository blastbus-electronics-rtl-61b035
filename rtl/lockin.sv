// lockin: multi-channel digital lock-in amplifier.
//
// On sample_valid the N_CH ADC samples and the current references are
// latched; the channels are then streamed one per clock through a mixer
// (sample * ref_i, and sample * ref_q when QUAD = 1) into the 4-stage boxcar
// anti-aliasing filter, which leaves only the DC mixer output and decimates
// it to the frame rate. All of this uses only multiplication by the reference,
// addition and subtraction.
//
// QUAD = 0 is the bolometer configuration: only the in-phase component is
// kept and the reference phase is tuned to maximise it, because the bus has
// no room for both components of hundreds of channels. QUAD = 1 keeps both
// components (full quadrature lock-in, as used for a few tens of thermistor
// channels).
//
// Timing: the channel stream takes N_CH clocks and must end before the next
// sample_valid (checked by an assertion). A decimated result leaves on
// out_valid/out_ch, one channel per clock, 6 clocks after its channel entered
// the mixer (latch, multiply, 4 filter stages). The time multiplexing of one
// mixer and one filter over all channels is this design's choice; in the
// described system this processing ran on the board's DSP.
module lockin
  import bb_pkg::BOX_LEN0, bb_pkg::BOX_LEN1, bb_pkg::BOX_LEN2, bb_pkg::BOX_LEN3,
         bb_pkg::DECIMATION;
#(
  parameter int unsigned N_CH  = 50,
  parameter int unsigned IN_W  = 24,
  parameter int unsigned REF_W = 16,
  parameter bit          QUAD  = 1'b0,
  parameter int unsigned LEN0  = BOX_LEN0,
  parameter int unsigned LEN1  = BOX_LEN1,
  parameter int unsigned LEN2  = BOX_LEN2,
  parameter int unsigned LEN3  = BOX_LEN3,
  parameter int unsigned DECIM = DECIMATION,
  localparam int unsigned MIX_W = IN_W + REF_W,
  localparam int unsigned OUT_W = MIX_W + $clog2(LEN0) + $clog2(LEN1) + $clog2(LEN2) + $clog2(LEN3),
  localparam int unsigned CH_W  = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    resync,
  input  logic                    sample_valid,
  input  logic signed [IN_W-1:0]  samples [N_CH],
  input  logic signed [REF_W-1:0] ref_i,
  input  logic signed [REF_W-1:0] ref_q,
  output logic                    out_valid,
  output logic [CH_W-1:0]         out_ch,
  output logic signed [OUT_W-1:0] out_i,
  output logic signed [OUT_W-1:0] out_q,
  output logic                    busy
);
  logic signed [IN_W-1:0]  held [N_CH];
  logic signed [REF_W-1:0] ri, rq;
  logic [CH_W-1:0]         ch;
  logic                    run;

  // Channel sequencer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      ch  <= '0;
      ri  <= '0;
      rq  <= '0;
    end else if (sample_valid) begin
      run <= 1'b1;
      ch  <= '0;
      ri  <= ref_i;
      rq  <= ref_q;
    end else if (run) begin
      if (ch == CH_W'(N_CH - 1)) run <= 1'b0;
      else ch <= ch + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (sample_valid) held <= samples;
  end

  // Mixer, one registered multiply per channel.
  logic                    m_valid, m_last;
  logic [CH_W-1:0]         m_ch;
  logic signed [MIX_W-1:0] m_i, m_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_last  <= 1'b0;
      m_ch    <= '0;
      m_i     <= '0;
      m_q     <= '0;
    end else begin
      m_valid <= run;
      m_last  <= (ch == CH_W'(N_CH - 1));
      m_ch    <= ch;
      m_i     <= held[ch] * ri;
      m_q     <= held[ch] * rq;
    end
  end

  logic f_valid, f_last;
  boxcar_filter #(.N_CH(N_CH), .IN_W(MIX_W), .LEN0(LEN0), .LEN1(LEN1), .LEN2(LEN2),
                  .LEN3(LEN3), .DECIM(DECIM)) u_filt_i (
    .clk, .rst_n, .resync, .in_valid(m_valid), .in_ch(m_ch), .in_last(m_last), .in_data(m_i),
    .out_valid(f_valid), .out_ch(out_ch), .out_last(f_last), .out_data(out_i));

  if (QUAD) begin : g_quad
    logic q_valid, q_last;
    logic [CH_W-1:0] q_ch;
    boxcar_filter #(.N_CH(N_CH), .IN_W(MIX_W), .LEN0(LEN0), .LEN1(LEN1), .LEN2(LEN2),
                    .LEN3(LEN3), .DECIM(DECIM)) u_filt_q (
      .clk, .rst_n, .resync, .in_valid(m_valid), .in_ch(m_ch), .in_last(m_last), .in_data(m_q),
      .out_valid(q_valid), .out_ch(q_ch), .out_last(q_last), .out_data(out_q));
  end else begin : g_noquad
    assign out_q = '0;
  end

  assign out_valid = f_valid;
  assign busy      = run || m_valid;

  // A new sample must not arrive while the previous one is still streaming.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) sample_valid |-> !run)
    else $error("lockin: sample arrived before the channel stream finished");
endmodule
