// bbus_node: the FPGA of one BLASTbus motherboard.
//
// The node presents its daughter boards to the bus as 16-bit registers. It
// holds the bus interface (bus_slave), the readout of the analog boards'
// 24-bit ADCs (adc_reader), the reference generator and digital lock-in
// (ref_gen, lockin), the six 8-bit optoisolated digital groups with
// per-bit direction, a quadrature decoder on group 0 bits 0/1, PWM outputs
// that can replace the bits of group PWM_GROUP, the extra 8-bit group that
// commands an external DAC system (dac_link) and the supply watchdog.
//
// Clocking: everything runs on clk (80 MHz on the real board). The bus
// clock from the master is synchronised and its rising edges become 'tick',
// one per bus bit. Every ADC sample (once per 384 bus clocks) advances the
// reference, enters the lock-in, and starts a DAC update; DAC 0 can carry the
// sine bias. Lock-in results appear once per 104 samples, i.e. once per frame.
//
// Register map (10-bit word addresses; 32-bit values are read high half
// first, which latches the low half so the pair is consistent):
//   0x000+2c  in-phase lock-in result of channel c (top 32 bits), hi, lo
//   0x100+2c  quadrature result (QUAD = 1 only; else 0)
//   0x200+2c  latest raw ADC sample of channel c: [23:8], then [7:0] << 8
//   0x300     control: [0] lock reference to frames, [1] bias onto DAC 0,
//             [2] realign decimation on frame sync
//   0x301/2   reference phase increment per sample, hi/lo
//   0x303     lock-in phase offset (table steps, 1024 per cycle)
//   0x304     bias amplitude, unsigned Q1.15
//   0x305     frames seen   0x306 lock-in results produced
//   0x307     missed ADC data   0x308 dropped DAC updates
//   0x309     watchdog power cycles
//   0x310+g   direction of group g (1 = output)   0x318+g output value
//   0x320+g   input value (synchronised)
//   0x328/9   quadrature count hi/lo   0x32A quadrature errors
//   0x330     PWM period (bus clocks)   0x331 PWM enable mask   0x338+i duty i
//   0x340+d   DAC d value
// The register map, the shadowing of 32-bit values, the choice of group 0
// for the encoder and PWM_GROUP for PWM are this design's own. Putting the
// lock-in in the FPGA is also a choice: the described boards ran it on the
// DSP, which reads the same ADC data.
module bbus_node
  import bb_pkg::*;
#(
  parameter logic [BUS_NODE_W-1:0] NODE_ID = '0,
  parameter int unsigned N_ADC     = 2 * ADC_PER_BOARD,
  parameter bit          QUAD      = 1'b0,
  parameter int unsigned N_DAC     = DACS_PER_SYSTEM,
  parameter int unsigned PWM_GROUP = 5,
  parameter int unsigned LEN0      = BOX_LEN0,
  parameter int unsigned LEN1      = BOX_LEN1,
  parameter int unsigned LEN2      = BOX_LEN2,
  parameter int unsigned LEN3      = BOX_LEN3,
  parameter int unsigned DECIM     = DECIMATION,
  parameter int unsigned WDT_TIMEOUT = 80_000_000,
  parameter int unsigned WDT_OFF     = 8_000_000
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // BLASTbus
  input  logic                                   bus_clk,
  input  logic                                   bus_rx,
  output logic                                   bus_tx,
  output logic                                   bus_oe,
  // analog daughter boards
  output logic                                   adc_sclk,
  input  logic                                   adc_drdy,
  input  logic [N_ADC-1:0]                       adc_dout,
  // digital daughter board
  input  logic [DIO_GROUPS-1:0][DIO_GROUP_W-1:0] dio_in,
  output logic [DIO_GROUPS-1:0][DIO_GROUP_W-1:0] dio_out,
  output logic [DIO_GROUPS-1:0][DIO_GROUP_W-1:0] dio_oe,
  output logic [7:0]                             dac_grp,
  // supervision
  input  logic                                   wdt_toggle,
  output logic                                   power_off
);
  localparam int unsigned MIX_W = ADC_W + DAC_W;
  localparam int unsigned OUT_W = MIX_W + $clog2(LEN0) + $clog2(LEN1) + $clog2(LEN2) + $clog2(LEN3);
  localparam int unsigned CH_W  = (N_ADC > 1) ? $clog2(N_ADC) : 1;

  // ---------------- bus clock and interface ----------------
  logic [2:0] bclk_s;
  logic       tick;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bclk_s <= '0;
    else        bclk_s <= {bclk_s[1:0], bus_clk};
  end
  assign tick = bclk_s[1] && !bclk_s[2];

  logic                  reg_we, reg_re, fsync;
  logic [BUS_ADDR_W-1:0] reg_addr;
  logic [BUS_DATA_W-1:0] reg_wdata, reg_rdata;

  bus_slave #(.NODE_ID(NODE_ID)) u_bus (
    .clk, .rst_n, .tick, .bus_rx, .bus_tx, .bus_oe,
    .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata, .frame_sync(fsync));

  // ---------------- configuration registers ----------------
  logic [2:0]               ctrl;
  logic [31:0]              phase_inc;
  logic [9:0]               phase_ofs;
  logic [15:0]              bias_amp;
  logic [DIO_GROUP_W-1:0]   dir   [DIO_GROUPS];
  logic [DIO_GROUP_W-1:0]   oreg  [DIO_GROUPS];
  logic [15:0]              pwm_period;
  logic [7:0]               pwm_en;
  logic [15:0]              pwm_duty [8];
  logic signed [DAC_W-1:0]  dac_reg  [N_DAC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl       <= '0;
      phase_inc  <= 32'd82595525;     // 2^32 / 52: twice the frame rate
      phase_ofs  <= '0;
      bias_amp   <= 16'h4000;
      pwm_period <= '0;
      pwm_en     <= '0;
      for (int g = 0; g < DIO_GROUPS; g++) begin
        dir[g]  <= '0;
        oreg[g] <= '0;
      end
      for (int i = 0; i < 8; i++) pwm_duty[i] <= '0;
      for (int d = 0; d < N_DAC; d++) dac_reg[d] <= '0;
    end else if (reg_we) begin
      casez (reg_addr)
        10'h300: ctrl <= reg_wdata[2:0];
        10'h301: phase_inc[31:16] <= reg_wdata;
        10'h302: phase_inc[15:0]  <= reg_wdata;
        10'h303: phase_ofs <= reg_wdata[9:0];
        10'h304: bias_amp  <= reg_wdata;
        10'h31?: begin
          if (reg_addr[3] == 1'b0 && reg_addr[2:0] < 3'(DIO_GROUPS)) dir[reg_addr[2:0]] <= reg_wdata[7:0];
          if (reg_addr[3] == 1'b1 && reg_addr[2:0] < 3'(DIO_GROUPS)) oreg[reg_addr[2:0]] <= reg_wdata[7:0];
        end
        10'h330: pwm_period <= reg_wdata;
        10'h331: pwm_en <= reg_wdata[7:0];
        10'h338, 10'h339, 10'h33a, 10'h33b,
        10'h33c, 10'h33d, 10'h33e, 10'h33f: pwm_duty[reg_addr[2:0]] <= reg_wdata;
        10'b11_010?_????: if (32'(reg_addr[4:0]) < N_DAC) dac_reg[reg_addr[4:0]] <= reg_wdata;
        default: ;
      endcase
    end
  end

  // ---------------- ADC readout ----------------
  logic signed [ADC_W-1:0] samples [N_ADC];
  logic                    sample_valid;
  logic [15:0]             adc_missed;

  adc_reader #(.N_ADC(N_ADC), .ADC_W(ADC_W)) u_adc (
    .clk, .rst_n, .tick, .drdy(adc_drdy), .dout(adc_dout), .sclk(adc_sclk),
    .samples, .sample_valid, .missed(adc_missed));

  // ---------------- reference and lock-in ----------------
  logic signed [DAC_W-1:0] bias, ref_i, ref_q;
  ref_gen #(.PHASE_W(32), .TABLE_AW(10), .OUT_W(DAC_W)) u_ref (
    .clk, .rst_n, .sample_tick(sample_valid), .frame_sync(fsync), .frame_lock(ctrl[0]),
    .phase_inc, .phase_ofs, .amplitude(bias_amp), .bias, .ref_i, .ref_q);

  logic                    li_valid, li_busy;
  logic [CH_W-1:0]         li_ch;
  logic signed [OUT_W-1:0] li_i, li_q;
  lockin #(.N_CH(N_ADC), .IN_W(ADC_W), .REF_W(DAC_W), .QUAD(QUAD), .LEN0(LEN0), .LEN1(LEN1),
           .LEN2(LEN2), .LEN3(LEN3), .DECIM(DECIM)) u_lockin (
    .clk, .rst_n, .resync(fsync && ctrl[2]), .sample_valid, .samples, .ref_i, .ref_q,
    .out_valid(li_valid), .out_ch(li_ch), .out_i(li_i), .out_q(li_q), .busy(li_busy));

  logic [31:0] res_i [N_ADC];
  logic [31:0] res_q [N_ADC];
  logic [15:0] n_results, n_frames;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_results <= '0;
      n_frames  <= '0;
      for (int c = 0; c < N_ADC; c++) begin
        res_i[c] <= '0;
        res_q[c] <= '0;
      end
    end else begin
      if (fsync) n_frames <= n_frames + 1'b1;
      if (li_valid) begin
        res_i[li_ch] <= li_i[OUT_W-1 -: 32];
        res_q[li_ch] <= li_q[OUT_W-1 -: 32];
        if (32'(li_ch) == N_ADC - 1) n_results <= n_results + 1'b1;
      end
    end
  end

  // ---------------- DAC output system ----------------
  logic signed [DAC_W-1:0] dac_val [N_DAC];
  logic [15:0]             dac_dropped;
  logic                    dac_busy;
  always_comb begin
    dac_val = dac_reg;
    if (ctrl[1]) dac_val[0] = bias;
  end
  // The DAC update follows the sample by one clock, so DAC 0 carries the
  // bias value computed for this sample.
  logic sample_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sample_q <= 1'b0;
    else        sample_q <= sample_valid;
  end
  dac_link #(.N_DAC(N_DAC), .DAC_W(DAC_W)) u_dac (
    .clk, .rst_n, .tick, .update(sample_q), .values(dac_val), .grp(dac_grp),
    .busy(dac_busy), .dropped(dac_dropped));

  // ---------------- digital groups, encoder, PWM ----------------
  logic [DIO_GROUP_W-1:0] din_s1 [DIO_GROUPS];
  logic [DIO_GROUP_W-1:0] din_s2 [DIO_GROUPS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < DIO_GROUPS; g++) begin
        din_s1[g] <= '0;
        din_s2[g] <= '0;
      end
    end else begin
      for (int g = 0; g < DIO_GROUPS; g++) begin
        din_s1[g] <= dio_in[g];
        din_s2[g] <= din_s1[g];
      end
    end
  end

  logic signed [31:0] qcount;
  logic [15:0]        qerr;
  quad_decoder #(.CNT_W(32)) u_quad (
    .clk, .rst_n, .a(dio_in[0][0]), .b(dio_in[0][1]), .count(qcount), .errors(qerr));

  logic [7:0] pwm;
  pwm_gen #(.N_CH(8), .CW(16)) u_pwm (
    .clk, .rst_n, .tick, .period(pwm_period), .duty(pwm_duty), .pwm);

  always_comb begin
    for (int g = 0; g < DIO_GROUPS; g++) begin
      dio_oe[g]  = dir[g];
      dio_out[g] = oreg[g];
      if (g == PWM_GROUP) dio_out[g] = (oreg[g] & ~pwm_en) | (pwm & pwm_en);
    end
  end

  // ---------------- watchdog ----------------
  logic [7:0] wdt_cycles;
  watchdog #(.TIMEOUT(WDT_TIMEOUT), .OFF_TIME(WDT_OFF)) u_wdt (
    .clk, .rst_n, .wdt_toggle, .power_off, .cycles(wdt_cycles));

  // ---------------- register read ----------------
  logic [15:0] shadow;
  logic [CH_W-1:0] rch;
  assign rch = CH_W'(reg_addr[7:1]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_rdata <= '0;
      shadow    <= '0;
    end else if (reg_re) begin
      reg_rdata <= '0;
      unique casez (reg_addr[9:8])
        2'b00, 2'b01, 2'b10: begin
          if (32'(reg_addr[7:1]) < N_ADC) begin
            logic [31:0] v;
            if (reg_addr[9:8] == 2'b00)      v = res_i[rch];
            else if (reg_addr[9:8] == 2'b01) v = res_q[rch];
            else                             v = {samples[rch], 8'h00};
            if (!reg_addr[0]) begin
              reg_rdata <= v[31:16];
              shadow    <= v[15:0];
            end else begin
              reg_rdata <= shadow;
            end
          end
        end
        2'b11: begin
          casez (reg_addr[7:0])
            8'h00: reg_rdata <= 16'(ctrl);
            8'h01: reg_rdata <= phase_inc[31:16];
            8'h02: reg_rdata <= phase_inc[15:0];
            8'h03: reg_rdata <= 16'(phase_ofs);
            8'h04: reg_rdata <= bias_amp;
            8'h05: reg_rdata <= n_frames;
            8'h06: reg_rdata <= n_results;
            8'h07: reg_rdata <= adc_missed;
            8'h08: reg_rdata <= dac_dropped;
            8'h09: reg_rdata <= 16'(wdt_cycles);
            8'h1?: if (reg_addr[2:0] < 3'(DIO_GROUPS))
                     reg_rdata <= reg_addr[3] ? 16'(oreg[reg_addr[2:0]]) : 16'(dir[reg_addr[2:0]]);
            8'h20, 8'h21, 8'h22, 8'h23, 8'h24, 8'h25: reg_rdata <= 16'(din_s2[reg_addr[2:0]]);
            8'h28: begin reg_rdata <= qcount[31:16]; shadow <= qcount[15:0]; end
            8'h29: reg_rdata <= shadow;
            8'h2a: reg_rdata <= qerr;
            8'h30: reg_rdata <= pwm_period;
            8'h31: reg_rdata <= 16'(pwm_en);
            8'h38, 8'h39, 8'h3a, 8'h3b, 8'h3c, 8'h3d, 8'h3e, 8'h3f: reg_rdata <= pwm_duty[reg_addr[2:0]];
            8'b010?_????: if (32'(reg_addr[4:0]) < N_DAC) reg_rdata <= dac_reg[reg_addr[4:0]];
            default: ;
          endcase
        end
        default: ;
      endcase
    end
  end

  // The lock-in must finish each sample's channel stream well inside the
  // sample period; the DAC update must too.
  a_lockin_in_time: assert property (@(posedge clk) disable iff (!rst_n) sample_valid |-> !li_busy)
    else $error("bbus_node: lock-in still busy at the next sample");
endmodule
