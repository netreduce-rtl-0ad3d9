// parser: classifies every frame and recovers its NetReduce information.
//
// The Arbiter hands the Parser the first 128 bytes of a frame (two beats,
// enough for the 70 bytes of headers of a first packet) and how many of them
// are valid. The Parser reads the Ethernet, IPv4, UDP and BTH fields at fixed
// offsets and follows the paper's recovery algorithm:
//   * a RoCE v2 SEND First/Only packet whose InetTag matches is the first
//     packet of an aggregation message: its tuple {SrcIP, DstIP, DstQP} is
//     entered in LUT#1 (which assigns the HostID) and its PSN0, MsgLen and
//     MsgID in LUT#2; RingID and MsgID come from the header, offset is 0;
//   * a RoCE v2 SEND Middle/Last packet whose tuple is in LUT#1 and whose PSN
//     falls in a message range of LUT#2 is a non-first aggregation packet:
//     RingID/HostID come from LUT#1, MsgID and offset PSN-PSN0 from LUT#2;
//   * anything else goes to the output untouched (agg = 0).
// The result is registered: it is valid one cycle after the request.
//
// The recovery algorithm and the two tables are the paper's. The SEND opcode
// test, the InetTag value and the field offsets are this design's, since the
// paper does not give them.
module parser
  import nr_pkg::*;
#(
  parameter int RINGS  = 8,
  parameter int HOSTS  = 6,
  parameter int WINDOW = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,       // control plane: new job
  input  logic              req,
  input  logic [2*BEAT_W-1:0] win,       // first 128 bytes, byte 0 on top
  input  logic [7:0]        win_bytes,   // valid bytes in win
  input  logic [2:0]        port,
  output logic              info_valid,
  output pkt_info_t         info
);
  function automatic logic [31:0] fld32(input int off);
    return {get_byte(win, off), get_byte(win, off+1), get_byte(win, off+2), get_byte(win, off+3)};
  endfunction
  function automatic logic [23:0] fld24(input int off);
    return {get_byte(win, off), get_byte(win, off+1), get_byte(win, off+2)};
  endfunction

  logic [15:0] etype, dport;
  logic [7:0]  proto, opcode;
  logic [31:0] sip, dip, tag, ring_id, msg_id, msg_len;
  logic [23:0] qp, psn;
  logic        is_roce, is_first, is_mid;

  assign etype   = {get_byte(win, OFF_ETYPE), get_byte(win, OFF_ETYPE+1)};
  assign proto   = get_byte(win, OFF_IP_PROTO);
  assign dport   = {get_byte(win, OFF_UDP_DP), get_byte(win, OFF_UDP_DP+1)};
  assign opcode  = get_byte(win, OFF_BTH_OP);
  assign sip     = fld32(OFF_SIP);
  assign dip     = fld32(OFF_DIP);
  assign qp      = fld24(OFF_BTH_QP);
  assign psn     = fld24(OFF_BTH_PSN);
  assign tag     = fld32(OFF_NR);
  assign ring_id = fld32(OFF_NR + 4);
  assign msg_id  = fld32(OFF_NR + 8);
  assign msg_len = fld32(OFF_NR + 12);

  assign is_roce  = int'(win_bytes) >= HDR_BASE && etype == ETYPE_IPV4 &&
                    proto == IPPROTO_UDP && dport == ROCEV2_PORT;
  assign is_first = is_roce && int'(win_bytes) >= HDR_FIRST && tag == INET_TAG &&
                    (opcode == OP_SEND_FIRST || opcode == OP_SEND_ONLY) &&
                    ring_id < 32'(RINGS) && msg_len != 0 && msg_len < 32'h1_0000;
  assign is_mid   = is_roce && (opcode == OP_SEND_MIDDLE || opcode == OP_SEND_LAST);

  logic       l1_hit, l1_ins_ok;
  logic [7:0] l1_ring, l1_host, l1_ins_host;
  logic       l2_hit;
  logic [31:0] l2_msg_id;
  logic [15:0] l2_off;

  lut1 #(.RINGS(RINGS), .HOSTS(HOSTS)) u_lut1 (
    .clk, .rst_n, .clear,
    .lk_sip(sip), .lk_dip(dip), .lk_qp(qp),
    .lk_hit(l1_hit), .lk_ring(l1_ring), .lk_host(l1_host),
    .ins(req && is_first), .ins_ring(ring_id[7:0]),
    .ins_ok(l1_ins_ok), .ins_host(l1_ins_host)
  );

  // A retransmitted first packet finds its tuple already in LUT#1.
  logic [7:0] first_host, first_ring;
  assign first_host = l1_hit ? l1_host : l1_ins_host;
  assign first_ring = l1_hit ? l1_ring : ring_id[7:0];

  lut2 #(.RINGS(RINGS), .HOSTS(HOSTS), .WINDOW(WINDOW)) u_lut2 (
    .clk, .rst_n, .clear,
    .wr(req && is_first && l1_ins_ok), .wr_ring(first_ring), .wr_host(first_host),
    .wr_msg_id(msg_id), .wr_psn0(psn), .wr_msg_len(msg_len[15:0]),
    .lk_ring(l1_ring), .lk_host(l1_host), .lk_psn(psn),
    .lk_hit(l2_hit), .lk_msg_id(l2_msg_id), .lk_offset(l2_off)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      info_valid <= 1'b0;
      info       <= '0;
    end else begin
      info_valid <= req;
      if (req) begin
        info      <= '0;
        info.port <= port;
        if (is_first && l1_ins_ok) begin
          info.agg    <= 1'b1;
          info.first  <= 1'b1;
          info.ring   <= first_ring;
          info.host   <= first_host;
          info.msg_id <= msg_id;
          info.offset <= '0;
        end else if (is_mid && l1_hit && l2_hit) begin
          info.agg    <= 1'b1;
          info.ring   <= l1_ring;
          info.host   <= l1_host;
          info.msg_id <= l2_msg_id;
          info.offset <= l2_off;
        end
      end
    end
  end

endmodule
