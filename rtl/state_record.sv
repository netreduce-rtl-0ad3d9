// state_record: the arrival-state memory of the State Manager.
//
// One word of HOSTS bits per (ring, column), where a column is one packet
// position of one of the N+1 message slots: column = slot * MAX_MSG_LEN +
// offset. Bit h of a word says whether host h's packet for that position has
// arrived (the bitmap of the paper's Fig. 6, stored column-wise so that a
// whole column is read at once). Two combinational read ports and two write
// ports serve the State Manager's read-modify-write of the current column and
// the clearing of the same position in the next slot; if both writes hit the
// same word, port 0 wins. clear zeroes the memory one word per cycle
// (RINGS*COLS cycles, busy is high meanwhile); reset starts that sweep too.
module state_record #(
  parameter int RINGS = 8,
  parameter int HOSTS = 6,
  parameter int COLS  = 510   // (WINDOW+1) * MAX_MSG_LEN
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  output logic             busy,
  input  logic [7:0]       rd0_ring,
  input  logic [15:0]      rd0_col,
  output logic [HOSTS-1:0] rd0_bits,
  input  logic [7:0]       rd1_ring,
  input  logic [15:0]      rd1_col,
  output logic [HOSTS-1:0] rd1_bits,
  input  logic             wr0,
  input  logic [7:0]       wr0_ring,
  input  logic [15:0]      wr0_col,
  input  logic [HOSTS-1:0] wr0_bits,
  input  logic             wr1,
  input  logic [7:0]       wr1_ring,
  input  logic [15:0]      wr1_col,
  input  logic [HOSTS-1:0] wr1_bits
);
  localparam int WORDS = RINGS * COLS;
  localparam int AW    = $clog2(WORDS);

  logic [HOSTS-1:0] mem [WORDS];
  logic [AW:0]      sweep;

  function automatic logic [AW-1:0] addr(input logic [7:0] r, input logic [15:0] c);
    return AW'(int'(r) * COLS + int'(c));
  endfunction

  assign busy     = (int'(sweep) < WORDS);
  assign rd0_bits = mem[addr(rd0_ring, rd0_col)];
  assign rd1_bits = mem[addr(rd1_ring, rd1_col)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sweep <= '0;
    end else if (clear) begin
      sweep <= '0;
    end else if (busy) begin
      mem[sweep[AW-1:0]] <= '0;
      sweep <= sweep + 1'b1;
    end else begin
      if (wr1) mem[addr(wr1_ring, wr1_col)] <= wr1_bits;
      if (wr0) mem[addr(wr0_ring, wr0_col)] <= wr0_bits;
    end
  end

endmodule
