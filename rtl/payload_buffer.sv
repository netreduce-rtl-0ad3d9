// payload_buffer: holds the payload of every packet waiting for its column
// to complete, so that the Aggregator can sum all hosts' payloads at once.
//
// One 64-byte beat per (ring, column, host, beat index), PAY_BYTES/64 beats
// per packet (16 for the paper's 1 KB payload). Payload beats are stored
// already realigned by the Separator: beat 0 starts at the first payload byte.
// The read is synchronous: data is valid the cycle after rd_en.
// The paper names this buffer and says the Aggregator waits for all packets
// of a column; the layout is this design's.
module payload_buffer
  import nr_pkg::*;
#(
  parameter int RINGS     = 8,
  parameter int HOSTS     = 6,
  parameter int COLS      = 510,
  parameter int PAY_BYTES = 1024
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [7:0]        wr_ring,
  input  logic [15:0]       wr_col,
  input  logic [7:0]        wr_host,
  input  logic [4:0]        wr_beat,
  input  logic [BEAT_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [7:0]        rd_ring,
  input  logic [15:0]       rd_col,
  input  logic [7:0]        rd_host,
  input  logic [4:0]        rd_beat,
  output logic [BEAT_W-1:0] rd_data
);
  localparam int BEATS = PAY_BYTES / BEAT_BYTES;
  localparam int WORDS = RINGS * COLS * HOSTS * BEATS;
  localparam int AW    = $clog2(WORDS);

  logic [BEAT_W-1:0] mem [WORDS];

  function automatic logic [AW-1:0] addr(input logic [7:0] r, input logic [15:0] c,
                                         input logic [7:0] h, input logic [4:0] b);
    return AW'(((int'(r) * COLS + int'(c)) * HOSTS + int'(h)) * BEATS + int'(b));
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[addr(wr_ring, wr_col, wr_host, wr_beat)] <= wr_data;
    if (rd_en) rd_data <= mem[addr(rd_ring, rd_col, rd_host, rd_beat)];
  end

endmodule
