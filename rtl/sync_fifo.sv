// sync_fifo: single-clock FIFO with valid/ready on both sides.
//
// DEPTH entries of W bits in a circular buffer. in_ready is low when full; a
// word offered while full is dropped and counted in 'overflows' (the writer
// here, the bus master's response stream, cannot wait). out_valid is high
// while the FIFO holds data; out_data is the oldest entry (read is
// combinational from the array).
module sync_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [15:0]  overflows
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;
  logic         full, empty;

  assign full      = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign empty     = (wp == rp);
  assign in_ready  = !full;
  assign out_valid = !empty;
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && !full) mem[wp[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp        <= '0;
      rp        <= '0;
      overflows <= '0;
    end else begin
      if (in_valid && !full) wp <= wp + 1'b1;
      if (in_valid && full)  overflows <= overflows + 1'b1;
      if (out_ready && !empty) rp <= rp + 1'b1;
    end
  end

  initial assert (DEPTH == 2 ** AW) else $error("sync_fifo: DEPTH must be a power of two");
endmodule
