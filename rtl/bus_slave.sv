// bus_slave: BLASTbus interface of one motherboard node.
//
// The bus is a half-duplex serial line with an always-running clock supplied
// by the master; 'tick' marks one bus clock period. The master sends 32-bit
// words (bb_pkg::bus_word_t, most significant bit first, idle line low, the
// leading start bit always 1). A word addressed to NODE_ID, or a write to the
// broadcast address, is carried out on the node's memory-mapped register
// port: a write pulses reg_we with reg_addr/reg_wdata; a read request pulses
// reg_re, takes reg_rdata on the following clock and, from the next tick on,
// drives a 32-bit response word (start = 1, rd = 1, own node and address, the
// read data) with bus_oe high for exactly 32 ticks, then releases the line.
// Every received word whose frame_sync bit is set raises frame_sync for one
// clock, whichever node it addresses.
//
// A read therefore costs a 32-bit request plus a 32-bit response for 16 data
// bits, i.e. 1 Mbit/s of data at a 4 MHz bus clock, as in the system
// description. Field layout, start bit and the one-tick turnaround are this
// design's choices.
module bus_slave
  import bb_pkg::bus_word_t, bb_pkg::BUS_WORD_W, bb_pkg::BUS_ADDR_W, bb_pkg::BUS_DATA_W,
         bb_pkg::BUS_NODE_W, bb_pkg::NODE_BROADCAST;
#(
  parameter logic [BUS_NODE_W-1:0] NODE_ID = '0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  tick,
  input  logic                  bus_rx,
  output logic                  bus_tx,
  output logic                  bus_oe,
  output logic                  reg_we,
  output logic                  reg_re,
  output logic [BUS_ADDR_W-1:0] reg_addr,
  output logic [BUS_DATA_W-1:0] reg_wdata,
  input  logic [BUS_DATA_W-1:0] reg_rdata,
  output logic                  frame_sync
);
  typedef enum logic [2:0] {S_IDLE, S_RECV, S_REQ, S_READ, S_SEND} state_t;

  state_t                 state;
  logic [BUS_WORD_W-1:0]  sh;
  logic [5:0]             cnt;
  bus_word_t              w;

  assign w = bus_word_t'({sh[BUS_WORD_W-2:0], bus_rx});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      sh         <= '0;
      cnt        <= '0;
      bus_tx     <= 1'b0;
      bus_oe     <= 1'b0;
      reg_we     <= 1'b0;
      reg_re     <= 1'b0;
      reg_addr   <= '0;
      reg_wdata  <= '0;
      frame_sync <= 1'b0;
    end else begin
      reg_we     <= 1'b0;
      reg_re     <= 1'b0;
      frame_sync <= 1'b0;
      unique case (state)
        S_IDLE: if (tick && bus_rx) begin
          sh    <= {{(BUS_WORD_W-1){1'b0}}, 1'b1};
          cnt   <= 6'd1;
          state <= S_RECV;
        end
        S_RECV: if (tick) begin
          sh  <= {sh[BUS_WORD_W-2:0], bus_rx};
          cnt <= cnt + 1'b1;
          if (cnt == 6'(BUS_WORD_W - 1)) begin
            state      <= S_IDLE;
            frame_sync <= w.frame_sync;
            reg_addr   <= w.addr;
            reg_wdata  <= w.data;
            if (w.rd && w.node == NODE_ID) begin
              reg_re <= 1'b1;
              state  <= S_REQ;
            end else if (!w.rd && (w.node == NODE_ID || w.node == NODE_BROADCAST)) begin
              reg_we <= 1'b1;
            end
          end
        end
        S_REQ: state <= S_READ;   // reg_re is high during this clock
        S_READ: begin
          // reg_rdata is valid in the clock after reg_re.
          sh    <= bus_word_t'{start: 1'b1, frame_sync: 1'b0, rd: 1'b1, node: NODE_ID,
                               addr: reg_addr, data: reg_rdata};
          cnt   <= '0;
          state <= S_SEND;
        end
        S_SEND: if (tick) begin
          if (cnt == 6'(BUS_WORD_W)) begin
            bus_oe <= 1'b0;
            bus_tx <= 1'b0;
            state  <= S_IDLE;
          end else begin
            bus_oe <= 1'b1;
            bus_tx <= sh[BUS_WORD_W-1];
            sh     <= {sh[BUS_WORD_W-2:0], 1'b0};
            cnt    <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end


  // The response must last exactly one word.
  a_oe_only_when_sending: assert property (@(posedge clk) disable iff (!rst_n) bus_oe |-> state == S_SEND)
    else $error("bus_slave: line driven outside a response");
endmodule
