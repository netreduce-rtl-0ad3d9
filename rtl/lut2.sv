// lut2: second level of the header-recovery lookup table (LUT#2).
//
// For every (RingID, HostID) pair the table keeps WINDOW entries, one per
// message that can be in flight on that connection, chosen by
// MsgID mod WINDOW. An entry holds the PSN of the message's first packet
// (PSN0), its MsgLen in packets and its MsgID. A first packet writes its
// entry; a non-first packet of the same connection is mapped to the entry
// whose range [PSN0, PSN0+MsgLen-1] holds its PSN, which yields its MsgID and
// its packet offset PSN-PSN0 inside the message. PSNs are 24-bit and wrap, so
// the range test is done on the 24-bit difference.
//
// The table has RINGS*HOSTS*WINDOW entries (n*H*N in the paper). Since a
// host sends message i+N only after it has received the result of message i,
// the entry of message i is free again when message i+N's first packet
// overwrites it. Lookup is combinational, a write lands at the next edge.
module lut2 #(
  parameter int RINGS  = 8,
  parameter int HOSTS  = 6,
  parameter int WINDOW = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  // write, from a first packet
  input  logic        wr,
  input  logic [7:0]  wr_ring,
  input  logic [7:0]  wr_host,
  input  logic [31:0] wr_msg_id,
  input  logic [23:0] wr_psn0,
  input  logic [15:0] wr_msg_len,
  // lookup, for a non-first packet
  input  logic [7:0]  lk_ring,
  input  logic [7:0]  lk_host,
  input  logic [23:0] lk_psn,
  output logic        lk_hit,
  output logic [31:0] lk_msg_id,
  output logic [15:0] lk_offset
);
  typedef struct packed {
    logic        valid;
    logic [23:0] psn0;
    logic [15:0] msg_len;
    logic [31:0] msg_id;
  } ent_t;

  ent_t tab [RINGS*HOSTS*WINDOW];   // index (ring*HOSTS + host)*WINDOW + slot

  function automatic int idx(input logic [7:0] r, input logic [7:0] h, input int w);
    return (int'(r) * HOSTS + int'(h)) * WINDOW + w;
  endfunction

  logic lk_in_range;
  assign lk_in_range = int'(lk_ring) < RINGS && int'(lk_host) < HOSTS;

  always_comb begin
    logic [23:0] d;
    lk_hit    = 1'b0;
    lk_msg_id = '0;
    lk_offset = '0;
    d         = '0;
    if (lk_in_range) begin
      for (int w = 0; w < WINDOW; w++) begin
        d = lk_psn - tab[idx(lk_ring, lk_host, w)].psn0;
        if (tab[idx(lk_ring, lk_host, w)].valid && d < {8'h0, tab[idx(lk_ring, lk_host, w)].msg_len}) begin
          lk_hit    = 1'b1;
          lk_msg_id = tab[idx(lk_ring, lk_host, w)].msg_id;
          lk_offset = d[15:0];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < RINGS * HOSTS * WINDOW; e++) tab[e].valid <= 1'b0;
    end else if (clear) begin
      for (int e = 0; e < RINGS * HOSTS * WINDOW; e++) tab[e].valid <= 1'b0;
    end else if (wr && int'(wr_ring) < RINGS && int'(wr_host) < HOSTS) begin
      tab[idx(wr_ring, wr_host, int'(wr_msg_id % WINDOW))] <= '{1'b1, wr_psn0, wr_msg_len, wr_msg_id};
    end
  end

endmodule
