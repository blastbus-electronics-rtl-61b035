// bbus_system: a BLASTbus crate, the top of this design.
//
// One bus master (the PCI controller's bus logic) and N_NODES motherboard
// nodes share a single half-duplex serial line and the master's bus clock.
// The line is driven by the master while it sends and by the one addressed
// node while it answers a read; otherwise it idles low. The data the master
// collects each frame is queued (sync_fifo) and sent as a biphase stream for
// the line-of-sight radio transmitter. Everything the real crate has outside
// the FPGAs comes out as ports: the host's frame table and response access,
// each node's ADC, digital I/O, DAC-system and watchdog pins, and the radio
// line. The default size is the six-motherboard data acquisition crate, each
// motherboard with two 25-channel analog boards and one digital board.
//
// Timing: with CLK_DIV = 20 an 80 MHz clk gives the nominal 4 MHz bus
// clock; ext_clk_sel switches the bus clock to ext_clk (strongly synchronised
// mode). One frame of 104 ADC samples lasts 104 * 384 = 39936 bus clocks.
module bbus_system
  import bb_pkg::*;
#(
  parameter int unsigned N_NODES   = 6,
  parameter int unsigned N_ADC     = 2 * ADC_PER_BOARD,
  parameter bit          QUAD      = 1'b0,
  parameter int unsigned N_ENTRIES = 256,
  parameter int unsigned CLK_DIV   = 20,
  parameter int unsigned BIT_CLKS  = 80,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned LEN0      = BOX_LEN0,
  parameter int unsigned LEN1      = BOX_LEN1,
  parameter int unsigned LEN2      = BOX_LEN2,
  parameter int unsigned LEN3      = BOX_LEN3,
  parameter int unsigned DECIM     = DECIMATION,
  parameter int unsigned WDT_TIMEOUT = 80_000_000,
  parameter int unsigned WDT_OFF     = 8_000_000,
  localparam int unsigned IDX_W    = $clog2(N_ENTRIES)
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // bus clock selection
  input  logic                                   ext_clk_sel,
  input  logic                                   ext_clk,
  output logic                                   bus_clk,
  // host side of the controller
  input  logic                                   enable,
  input  logic [IDX_W:0]                         frame_len,
  input  logic [31:0]                            frame_period,
  input  logic                                   tbl_we,
  input  logic [IDX_W-1:0]                       tbl_addr,
  input  bus_word_t                              tbl_wdata,
  input  logic [IDX_W-1:0]                       resp_addr,
  output logic [BUS_DATA_W-1:0]                  resp_data,
  output logic                                   resp_ok,
  output logic                                   frame_done,
  output logic [31:0]                            frames,
  output logic [15:0]                            timeouts,
  output logic [15:0]                            overruns,
  // radio downlink
  output logic                                   biphase,
  output logic [15:0]                            downlink_overflows,
  // motherboard pins
  output logic [N_NODES-1:0]                     adc_sclk,
  input  logic [N_NODES-1:0]                     adc_drdy,
  input  logic [N_NODES-1:0][N_ADC-1:0]          adc_dout,
  input  logic [N_NODES-1:0][DIO_GROUPS-1:0][DIO_GROUP_W-1:0] dio_in,
  output logic [N_NODES-1:0][DIO_GROUPS-1:0][DIO_GROUP_W-1:0] dio_out,
  output logic [N_NODES-1:0][DIO_GROUPS-1:0][DIO_GROUP_W-1:0] dio_oe,
  output logic [N_NODES-1:0][7:0]                dac_grp,
  input  logic [N_NODES-1:0]                     wdt_toggle,
  output logic [N_NODES-1:0]                     power_off
);
  logic                  m_tx, m_oe, tick;
  logic [N_NODES-1:0]    n_tx, n_oe;
  logic                  line;
  logic                  rsp_valid, frame_start;
  logic [IDX_W-1:0]      rsp_idx;
  logic [BUS_DATA_W-1:0] rsp_data;

  assign line = m_oe ? m_tx : |(n_tx & n_oe);

  bus_master #(.N_ENTRIES(N_ENTRIES), .CLK_DIV(CLK_DIV)) u_master (
    .clk, .rst_n, .ext_clk_sel, .ext_clk, .bus_clk, .tick,
    .bus_rx(line), .bus_tx(m_tx), .bus_oe(m_oe),
    .enable, .frame_len, .frame_period, .tbl_we, .tbl_addr, .tbl_wdata,
    .resp_addr, .resp_data, .resp_ok, .rsp_valid, .rsp_idx, .rsp_data,
    .frame_start, .frame_done, .frames, .timeouts, .overruns);

  for (genvar n = 0; n < N_NODES; n++) begin : g_node
    bbus_node #(.NODE_ID(BUS_NODE_W'(n)), .N_ADC(N_ADC), .QUAD(QUAD), .LEN0(LEN0), .LEN1(LEN1),
                .LEN2(LEN2), .LEN3(LEN3), .DECIM(DECIM),
                .WDT_TIMEOUT(WDT_TIMEOUT), .WDT_OFF(WDT_OFF)) u_node (
      .clk, .rst_n, .bus_clk, .bus_rx(line), .bus_tx(n_tx[n]), .bus_oe(n_oe[n]),
      .adc_sclk(adc_sclk[n]), .adc_drdy(adc_drdy[n]), .adc_dout(adc_dout[n]),
      .dio_in(dio_in[n]), .dio_out(dio_out[n]), .dio_oe(dio_oe[n]), .dac_grp(dac_grp[n]),
      .wdt_toggle(wdt_toggle[n]), .power_off(power_off[n]));
  end

  // Downlink: every response word collected is queued for the radio.
  logic            q_in_ready, q_valid, q_ready;
  logic [15:0]     q_data;
  logic [31:0]     words_sent;
  sync_fifo #(.W(16), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .in_valid(rsp_valid), .in_ready(q_in_ready), .in_data(rsp_data),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data), .overflows(downlink_overflows));
  biphase_enc #(.BIT_CLKS(BIT_CLKS)) u_biphase (
    .clk, .rst_n, .in_valid(q_valid), .in_ready(q_ready), .in_data(q_data),
    .line(biphase), .words_sent(words_sent));

  // Half duplex: at most one driver on the line.
  a_one_driver: assert property (@(posedge clk) disable iff (!rst_n) $onehot0({m_oe, n_oe}))
    else $error("bbus_system: bus contention");

  initial assert (N_NODES >= 1 && N_NODES <= 7) else $error("bbus_system: 1..7 nodes per bus");
endmodule
