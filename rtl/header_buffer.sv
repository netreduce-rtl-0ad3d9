// header_buffer: holds the header record of every packet waiting for its
// column to complete.
//
// One hdr_rec_t (the packet's 54 or 70 header bytes, their length, the
// payload length and the ingress port) per (ring, column, host), where the
// column is slot*MAX_MSG_LEN + offset as in the State Manager. The Separator
// writes a record when it has seen the whole packet; the Combinator reads the
// records of all hosts of a column when it sends the aggregation result out.
// The read is synchronous: data is valid the cycle after rd_en.
// The paper only names this buffer; the addressing is this design's.
module header_buffer
  import nr_pkg::*;
#(
  parameter int RINGS = 8,
  parameter int HOSTS = 6,
  parameter int COLS  = 510
) (
  input  logic        clk,
  input  logic        wr_en,
  input  logic [7:0]  wr_ring,
  input  logic [15:0] wr_col,
  input  logic [7:0]  wr_host,
  input  hdr_rec_t    wr_data,
  input  logic        rd_en,
  input  logic [7:0]  rd_ring,
  input  logic [15:0] rd_col,
  input  logic [7:0]  rd_host,
  output hdr_rec_t    rd_data
);
  localparam int WORDS = RINGS * COLS * HOSTS;
  localparam int AW    = $clog2(WORDS);

  hdr_rec_t mem [WORDS];

  function automatic logic [AW-1:0] addr(input logic [7:0] r, input logic [15:0] c, input logic [7:0] h);
    return AW'((int'(r) * COLS + int'(c)) * HOSTS + int'(h));
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[addr(wr_ring, wr_col, wr_host)] <= wr_data;
    if (rd_en) rd_data <= mem[addr(rd_ring, rd_col, rd_host)];
  end

endmodule
