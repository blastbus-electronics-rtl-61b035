// bus_master: BLASTbus master of the PCI controller board.
//
// Generates the always-running bus clock and cycles a frame of commands.
// The bus clock is clk divided by CLK_DIV (4 MHz from 80 MHz by default) or,
// with ext_clk_sel set, an external clock such as the 5 MHz clock of a
// readout system the bus is to be strongly synchronised with; ext_clk is
// synchronised and its rising edges used. The selection is taken over only
// while no frame is running, so a switch never splits a word. 'tick' marks each bus clock period.
//
// The frame is a table of up to N_ENTRIES commands written by the host
// (tbl_*): writes and read requests, each one bus_word_t. Every frame_period
// ticks, when enabled, the master sends the first frame_len entries in order,
// the first one with frame_sync set, leaving one idle tick after each word.
// After a read request it releases the line and waits up to RESP_TIMEOUT
// ticks for the addressed node's response; the response data and a valid
// flag are stored per entry (resp_*) and also streamed out on rsp_valid.
// A frame that has not finished when the next one is due is skipped and
// counted in overruns; a read without response is counted in timeouts.
//
// Timing: a write takes 33 ticks (32 bits and one idle tick); a read takes
// 64 ticks when the node answers at once, 32 for the request and 32 for the
// response, which is 1 Mbit/s of data at a 4 MHz bus clock.
// The frame table, the counters and the skip-on-overrun rule are this
// design's choices; the description gives the clock rates, the 32-bit word
// and the periodic frame of writes and read requests.
module bus_master
  import bb_pkg::bus_word_t, bb_pkg::BUS_WORD_W, bb_pkg::BUS_DATA_W;
#(
  parameter int unsigned N_ENTRIES    = 256,
  parameter int unsigned CLK_DIV      = 20,
  parameter int unsigned RESP_TIMEOUT = 8,
  localparam int unsigned IDX_W       = $clog2(N_ENTRIES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // bus clock selection
  input  logic                  ext_clk_sel,
  input  logic                  ext_clk,
  output logic                  bus_clk,
  output logic                  tick,
  // bus line
  input  logic                  bus_rx,
  output logic                  bus_tx,
  output logic                  bus_oe,
  // host side
  input  logic                  enable,
  input  logic [IDX_W:0]        frame_len,
  input  logic [31:0]           frame_period,
  input  logic                  tbl_we,
  input  logic [IDX_W-1:0]      tbl_addr,
  input  bus_word_t             tbl_wdata,
  input  logic [IDX_W-1:0]      resp_addr,
  output logic [BUS_DATA_W-1:0] resp_data,
  output logic                  resp_ok,
  output logic                  rsp_valid,
  output logic [IDX_W-1:0]      rsp_idx,
  output logic [BUS_DATA_W-1:0] rsp_data,
  output logic                  frame_start,
  output logic                  frame_done,
  output logic [31:0]           frames,
  output logic [15:0]           timeouts,
  output logic [15:0]           overruns
);
  // ---------------- bus clock ----------------
  localparam int unsigned DIV_W = $clog2(CLK_DIV);
  logic [DIV_W-1:0] div;
  logic int_clk;
  logic [2:0] ext_s;
  logic clk_sel;     // ext_clk_sel, taken over only between frames
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div     <= '0;
      int_clk <= 1'b0;
      ext_s   <= '0;
      tick    <= 1'b0;
    end else begin
      div   <= (div == DIV_W'(CLK_DIV - 1)) ? '0 : div + 1'b1;
      int_clk <= (div < DIV_W'(CLK_DIV / 2));
      ext_s <= {ext_s[1:0], ext_clk};
      tick  <= clk_sel ? (ext_s[1] && !ext_s[2]) : (div == '0);
    end
  end
  assign bus_clk = clk_sel ? ext_s[1] : int_clk;

  // ---------------- frame table and responses ----------------
  bus_word_t             tbl  [N_ENTRIES];
  logic [BUS_DATA_W-1:0] rmem [N_ENTRIES];
  logic [N_ENTRIES-1:0]  rok;

  always_ff @(posedge clk) begin
    if (tbl_we) tbl[tbl_addr] <= tbl_wdata;
  end
  assign resp_data = rmem[resp_addr];
  assign resp_ok   = rok[resp_addr];

  // ---------------- frame sequencer ----------------
  typedef enum logic [2:0] {M_IDLE, M_LOAD, M_SEND, M_WAIT, M_RECV, M_NEXT} mstate_t;
  mstate_t               st;
  logic [31:0]           pcnt;
  logic [IDX_W:0]        idx;
  logic [BUS_WORD_W-1:0] sh;
  logic [5:0]            bcnt;
  logic [7:0]            wcnt;
  bus_word_t             cur;
  logic                  due;

  assign cur = tbl[idx[IDX_W-1:0]];
  assign due = tick && enable && (pcnt == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= M_IDLE;
      clk_sel     <= 1'b0;
      pcnt        <= '0;
      idx         <= '0;
      sh          <= '0;
      bcnt        <= '0;
      wcnt        <= '0;
      bus_tx      <= 1'b0;
      bus_oe      <= 1'b0;
      rok         <= '0;
      rsp_valid   <= 1'b0;
      rsp_idx     <= '0;
      rsp_data    <= '0;
      frame_start <= 1'b0;
      frame_done  <= 1'b0;
      frames      <= '0;
      timeouts    <= '0;
      overruns    <= '0;
    end else begin
      rsp_valid   <= 1'b0;
      frame_start <= 1'b0;
      frame_done  <= 1'b0;
      if (tick) pcnt <= (pcnt >= frame_period - 1) ? '0 : pcnt + 1'b1;
      if (due && st != M_IDLE) overruns <= overruns + 1'b1;
      if (st == M_IDLE) clk_sel <= ext_clk_sel;
      unique case (st)
        M_IDLE: if (due && frame_len != '0) begin
          idx         <= '0;
          st          <= M_LOAD;
          frame_start <= 1'b1;
        end
        M_LOAD: begin
          sh <= {1'b1, (idx == '0), cur.rd, cur.node, cur.addr, cur.data};
          bcnt <= '0;
          st <= M_SEND;
        end
        M_SEND: if (tick) begin
          if (bcnt == 6'(BUS_WORD_W)) begin
            bus_oe <= 1'b0;
            bus_tx <= 1'b0;
            wcnt   <= '0;
            st     <= cur.rd ? M_WAIT : M_NEXT;
          end else begin
            bus_oe <= 1'b1;
            bus_tx <= sh[BUS_WORD_W-1];
            sh     <= {sh[BUS_WORD_W-2:0], 1'b0};
            bcnt   <= bcnt + 1'b1;
          end
        end
        M_WAIT: if (tick) begin
          if (bus_rx) begin
            bcnt <= 6'd1;
            sh   <= {{(BUS_WORD_W-1){1'b0}}, 1'b1};
            st   <= M_RECV;
          end else if (wcnt == 8'(RESP_TIMEOUT)) begin
            rok[idx[IDX_W-1:0]] <= 1'b0;
            timeouts <= timeouts + 1'b1;
            st <= M_NEXT;
          end else begin
            wcnt <= wcnt + 1'b1;
          end
        end
        M_RECV: if (tick) begin
          sh   <= {sh[BUS_WORD_W-2:0], bus_rx};
          bcnt <= bcnt + 1'b1;
          if (bcnt == 6'(BUS_WORD_W - 1)) begin
            rmem[idx[IDX_W-1:0]] <= {sh[BUS_DATA_W-2:0], bus_rx};
            rok[idx[IDX_W-1:0]]  <= 1'b1;
            rsp_valid <= 1'b1;
            rsp_idx   <= idx[IDX_W-1:0];
            rsp_data  <= {sh[BUS_DATA_W-2:0], bus_rx};
            st <= M_NEXT;
          end
        end
        M_NEXT: begin
          if (idx + 1'b1 >= frame_len) begin
            st         <= M_IDLE;
            frame_done <= 1'b1;
            frames     <= frames + 1'b1;
          end else begin
            idx <= idx + 1'b1;
            st  <= M_LOAD;
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
