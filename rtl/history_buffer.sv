// history_buffer: the aggregation results of the last N+1 messages of every
// ring, kept so that a retransmitted packet of an already aggregated column
// can be answered without aggregating again.
//
// One 64-byte beat per (ring, column, beat index); a column's result stays
// until the column's slot is reused by message i+N+1. The Aggregator writes a
// result beat as soon as it is summed and reads it back for replays. The read
// is synchronous: data is valid the cycle after rd_en.
// The buffer and its use are the paper's; the layout is this design's.
module history_buffer
  import nr_pkg::*;
#(
  parameter int RINGS     = 8,
  parameter int COLS      = 510,
  parameter int PAY_BYTES = 1024
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [7:0]        wr_ring,
  input  logic [15:0]       wr_col,
  input  logic [4:0]        wr_beat,
  input  logic [BEAT_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [7:0]        rd_ring,
  input  logic [15:0]       rd_col,
  input  logic [4:0]        rd_beat,
  output logic [BEAT_W-1:0] rd_data
);
  localparam int BEATS = PAY_BYTES / BEAT_BYTES;
  localparam int WORDS = RINGS * COLS * BEATS;
  localparam int AW    = $clog2(WORDS);

  logic [BEAT_W-1:0] mem [WORDS];

  function automatic logic [AW-1:0] addr(input logic [7:0] r, input logic [15:0] c, input logic [4:0] b);
    return AW'((int'(r) * COLS + int'(c)) * BEATS + int'(b));
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[addr(wr_ring, wr_col, wr_beat)] <= wr_data;
    if (rd_en) rd_data <= mem[addr(rd_ring, rd_col, rd_beat)];
  end

endmodule
