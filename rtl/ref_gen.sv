// ref_gen: reference wave generator for the lock-in readout.
//
// A PHASE_W-bit phase accumulator advances by phase_inc once per ADC sample
// (sample_tick). Its top TABLE_AW bits index a sine table that is computed at
// elaboration: entry i = round((2^(OUT_W-1)-1) * sin(2*pi*i/2^TABLE_AW)).
// Three outputs are produced from it, all registered and valid one clock
// after sample_tick:
//   bias   sin(theta) scaled by the unsigned Q1.15 'amplitude', sent to the
//          bias DAC (the bias amplitude is set per detector array);
//   ref_i  sin(theta + phi) and ref_q = cos(theta + phi), the mixer
//          references, where phi = phase_ofs is the commanded lock-in phase.
// With frame_lock set, the accumulator returns to zero on every frame_sync,
// which keeps a reference at an integer multiple of the frame rate exactly
// locked to the frames; for a freely chosen (commandable) frequency, as in
// thermistor readout, frame_lock is left clear.
//
// The nominal setting is a reference at twice the frame rate: 52 samples per
// period, phase_inc = round(2^32 / 52) = 82595525. The DDS structure, table
// size and Q1.15 amplitude are this design's choices.
module ref_gen #(
  parameter int unsigned PHASE_W  = 32,
  parameter int unsigned TABLE_AW = 10,
  parameter int unsigned OUT_W    = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sample_tick,
  input  logic                    frame_sync,
  input  logic                    frame_lock,
  input  logic [PHASE_W-1:0]      phase_inc,
  input  logic [TABLE_AW-1:0]     phase_ofs,
  input  logic [15:0]             amplitude,
  output logic signed [OUT_W-1:0] bias,
  output logic signed [OUT_W-1:0] ref_i,
  output logic signed [OUT_W-1:0] ref_q
);
  localparam int unsigned N = 2 ** TABLE_AW;
  typedef logic signed [OUT_W-1:0] table_t [N];

  function automatic table_t make_table();
    table_t t;
    real full;
    full = real'((2 ** (OUT_W - 1)) - 1);
    for (int i = 0; i < N; i++)
      t[i] = OUT_W'($rtoi($floor(full * $sin(6.283185307179586 * real'(i) / real'(N)) + 0.5)));
    return t;
  endfunction

  localparam table_t SINE = make_table();

  logic [PHASE_W-1:0]  acc;
  logic [TABLE_AW-1:0] th, thr;
  logic signed [OUT_W+16:0] scaled;

  assign th  = acc[PHASE_W-1 -: TABLE_AW];
  assign thr = th + phase_ofs;
  assign scaled = $signed({1'b0, amplitude}) * SINE[th];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      bias  <= '0;
      ref_i <= '0;
      ref_q <= '0;
    end else begin
      if (frame_sync && frame_lock) acc <= '0;
      else if (sample_tick) acc <= acc + phase_inc;
      if (sample_tick) begin
        bias  <= OUT_W'(scaled >>> 15);
        ref_i <= SINE[thr];
        ref_q <= SINE[thr + TABLE_AW'(N / 4)];
      end
    end
  end
endmodule
