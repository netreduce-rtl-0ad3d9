// state_manager: tracks packet arrivals and decides what happens to each
// aggregation packet.
//
// For a packet of (RingID, HostID, MsgID, offset) the State Manager works on
// slot = MsgID mod (N+1) and column col = slot*MAX_MSG_LEN + offset of the
// ring's bitmap in the State record, and on the same offset of the next slot,
// ncol = ((MsgID+1) mod (N+1))*MAX_MSG_LEN + offset, which belongs to message
// MsgID-N. It then decides:
//   * bit already set   -> the packet is a retransmission. If the whole
//                          column is set it was aggregated already: REPLAY
//                          (answer from the history buffer); else DROP.
//   * bit not yet set   -> set it and clear host's bit of ncol (the host
//                          sending message i has received the result of
//                          message i-N, so that slot may be reused); if the
//                          column is now complete: STORE_AGG, else STORE.
// A column is complete when the bits of all hosts of the ring are set; the
// ring size H comes from the control plane (cfg_hosts).
//
// The bitmap, the N+1 slots, the set/clear rule and the retransmission
// handling are the paper's (Sec. 3.3.2). The paper writes the two indices as
// [HostID, PSN-PSN0+(MsgID+1)%(N+1)-1] and [HostID, PSN-PSN0+(MsgID+1)%(N+1)];
// this design reads them as "this message's slot" and "the next slot", at
// the same packet offset, which is what the accompanying text describes.
// Non-aggregation packets get BYPASS; so do packets whose offset is beyond
// MAX_MSG_LEN (they cannot be tracked).
//
// Timing: the decision is registered, one cycle after info_valid. Requests
// must not arrive while busy (State record clearing) is high.
module state_manager
  import nr_pkg::*;
#(
  parameter int RINGS       = 8,
  parameter int HOSTS       = 6,
  parameter int WINDOW      = 2,
  parameter int MAX_MSG_LEN = 170
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  output logic       busy,
  input  logic [7:0] cfg_hosts,     // H: hosts per ring
  input  logic       info_valid,
  input  pkt_info_t  info,
  output logic       dec_valid,
  output decision_t  dec
);
  localparam int SLOTS = WINDOW + 1;
  localparam int COLS  = SLOTS * MAX_MSG_LEN;

  logic [HOSTS-1:0] mask, bits, nbits, hbit, newbits;
  logic [15:0]      col, ncol;
  logic             trackable, seen, complete_old, complete_new;

  always_comb begin
    mask = '0;
    for (int h = 0; h < HOSTS; h++) mask[h] = (h < int'(cfg_hosts));
    hbit = '0;
    if (int'(info.host) < HOSTS) hbit[info.host[$clog2(HOSTS+1)-1:0]] = 1'b1;
  end

  assign col  = 16'((info.msg_id % SLOTS) * MAX_MSG_LEN) + info.offset;
  assign ncol = 16'(((info.msg_id + 1) % SLOTS) * MAX_MSG_LEN) + info.offset;
  assign trackable = info.agg && int'(info.offset) < MAX_MSG_LEN &&
                     int'(info.ring) < RINGS && int'(info.host) < HOSTS;

  state_record #(.RINGS(RINGS), .HOSTS(HOSTS), .COLS(COLS)) u_rec (
    .clk, .rst_n, .clear, .busy,
    .rd0_ring(info.ring), .rd0_col(col),  .rd0_bits(bits),
    .rd1_ring(info.ring), .rd1_col(ncol), .rd1_bits(nbits),
    .wr0(info_valid && trackable && !seen), .wr0_ring(info.ring), .wr0_col(col), .wr0_bits(newbits),
    .wr1(info_valid && trackable && !seen), .wr1_ring(info.ring), .wr1_col(ncol), .wr1_bits(nbits & ~hbit)
  );

  assign seen         = |(bits & hbit);
  assign newbits      = bits | hbit;
  assign complete_old = ((bits | ~mask) == '1);
  assign complete_new = ((newbits | ~mask) == '1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dec_valid <= 1'b0;
      dec       <= '0;
    end else begin
      dec_valid <= info_valid;
      if (info_valid) begin
        dec.first <= info.first;
        dec.ring  <= info.ring;
        dec.host  <= info.host;
        dec.col   <= col;
        if (!trackable)        dec.act <= ACT_BYPASS;
        else if (seen)         dec.act <= complete_old ? ACT_REPLAY : ACT_DROP;
        else                   dec.act <= complete_new ? ACT_STORE_AGG : ACT_STORE;
      end
    end
  end

endmodule
