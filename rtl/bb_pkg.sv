// bb_pkg: constants and types shared by the BLASTbus readout-and-control RTL.
//
// Numbers that come straight from the system description: the 32-bit bus word
// carrying 16 data bits, the ADC conversion period of 384 bus clocks, 24-bit
// ADCs, 16-bit DACs, 25 ADCs per analog daughter board, 32 DACs per DAC output
// system, six 8-bit digital I/O groups, a decimation of 104 ADC samples per
// frame and a 4-stage boxcar anti-aliasing filter whose first nulls are spaced
// logarithmically between the frame Nyquist frequency and the frame rate.
//
// The boxcar lengths follow from that last rule. A boxcar of L input samples
// has its first null at f_in / L; with f_in = 104 * f_frame and nulls at
// f_frame * 2^(k/3 - 1), k = 0..3, the lengths are round(104 * 2^(1 - k/3)):
// 208, 165, 131 and 104 samples.
//
// The field layout of the bus word (below) is this design's own choice: the
// description only says that 16 of the 32 bits are data and 16 are addressing
// and synchronisation.
package bb_pkg;

  localparam int unsigned BUS_WORD_W   = 32;
  localparam int unsigned BUS_DATA_W   = 16;
  localparam int unsigned BUS_ADDR_W   = 10;
  localparam int unsigned BUS_NODE_W   = 3;

  localparam int unsigned ADC_W        = 24;
  localparam int unsigned ADC_PERIOD   = 384;   // bus clocks per conversion
  localparam int unsigned ADC_PER_BOARD = 25;
  localparam int unsigned DAC_W        = 16;
  localparam int unsigned DACS_PER_SYSTEM = 32;
  localparam int unsigned DIO_GROUPS   = 6;
  localparam int unsigned DIO_GROUP_W  = 8;

  localparam int unsigned DECIMATION   = 104;   // ADC samples per frame
  localparam int unsigned BOX_LEN0     = 208;   // first null at f_frame/2
  localparam int unsigned BOX_LEN1     = 165;
  localparam int unsigned BOX_LEN2     = 131;
  localparam int unsigned BOX_LEN3     = 104;   // first null at f_frame

  // One word on the bus, most significant bit first on the line.
  //   start      always 1: marks the beginning of a word on the idle-low line
  //   frame_sync set on the first word of every frame
  //   rd         1 = read request (or read response), 0 = write
  //   node       motherboard address, 0..6 (7 = broadcast write)
  //   addr       register address inside the node
  //   data       16 data bits
  typedef struct packed {
    logic                  start;
    logic                  frame_sync;
    logic                  rd;
    logic [BUS_NODE_W-1:0] node;
    logic [BUS_ADDR_W-1:0] addr;
    logic [BUS_DATA_W-1:0] data;
  } bus_word_t;

  localparam logic [BUS_NODE_W-1:0] NODE_BROADCAST = '1;

endpackage
