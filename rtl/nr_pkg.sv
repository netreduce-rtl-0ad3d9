// nr_pkg: types and constants shared by the NetReduce in-network reduction
// accelerator.
//
// Frames travel inside the accelerator as a stream of 64-byte beats (a
// 512-bit bus, the usual width of a 100 GbE MAC client interface). Byte 0 of a
// beat sits in data[511:504], so the bus reads in network order and a 32-bit
// big-endian field is a plain slice. Each beat carries its start/end-of-frame
// flags, the number of valid bytes and the port the frame came in on.
//
// The NetReduce header follows the InfiniBand Base Transport Header of a
// RoCE v2 frame and holds four fields, InetTag, RingID, MsgID and MsgLen, as in
// the paper. The paper gives no field widths; this design makes each field
// 32 bits, so the header is 16 bytes and a first packet's headers end at byte
// 70, a non-first packet's at byte 54 (IPv4 without options, no VLAN tag).
package nr_pkg;

  localparam int BEAT_BYTES = 64;
  localparam int BEAT_W     = BEAT_BYTES * 8;

  // Byte offsets in an untagged Ethernet / IPv4 / UDP / BTH frame.
  localparam int OFF_DMAC    = 0;
  localparam int OFF_SMAC    = 6;
  localparam int OFF_ETYPE   = 12;
  localparam int OFF_IP      = 14;
  localparam int OFF_IP_PROTO= 23;
  localparam int OFF_IP_CSUM = 24;
  localparam int OFF_SIP     = 26;
  localparam int OFF_DIP     = 30;
  localparam int OFF_UDP_DP  = 36;
  localparam int OFF_BTH_OP  = 42;
  localparam int OFF_BTH_QP  = 47;  // 24-bit destination QP
  localparam int OFF_BTH_PSN = 51;  // 24-bit PSN
  localparam int OFF_NR      = 54;  // NetReduce header (first packets only)
  localparam int HDR_BASE    = 54;  // headers of a non-first packet
  localparam int NR_HDR_BYTES= 16;
  localparam int HDR_FIRST   = HDR_BASE + NR_HDR_BYTES;  // 70
  localparam int HDR_MAX     = HDR_FIRST;

  localparam logic [15:0] ETYPE_IPV4    = 16'h0800;
  localparam logic [7:0]  IPPROTO_UDP   = 8'd17;
  localparam logic [15:0] ROCEV2_PORT   = 16'd4791;
  // RC SEND opcodes (IBA): the NetReduce header sits right after the BTH,
  // which only holds for SEND (RDMA WRITE would put a RETH there).
  localparam logic [7:0]  OP_SEND_FIRST  = 8'h00;
  localparam logic [7:0]  OP_SEND_MIDDLE = 8'h01;
  localparam logic [7:0]  OP_SEND_LAST   = 8'h02;
  localparam logic [7:0]  OP_SEND_ONLY   = 8'h04;
  // Value of InetTag that marks an aggregation message ("INET").
  localparam logic [31:0] INET_TAG       = 32'h494E_4554;

  // One beat of a frame.
  typedef struct packed {
    logic [BEAT_W-1:0] data;
    logic [6:0]        nbytes;  // valid bytes in this beat, 1..64
    logic              sop;
    logic              eop;
    logic [2:0]        port;    // ingress port (egress port on the way out)
  } beat_t;

  // Header record kept for every held packet: the header bytes as they came
  // in, their length (54 or 70), the payload length and the ingress port.
  typedef struct packed {
    logic [HDR_MAX*8-1:0] bytes;   // byte 0 in the top bits
    logic [6:0]           hdr_len;
    logic [10:0]          pay_len;
    logic [2:0]           port;
  } hdr_rec_t;

  // What the Parser recovers for a frame.
  typedef struct packed {
    logic        agg;      // an aggregation packet (first or non-first)
    logic        first;    // carries the NetReduce header
    logic [7:0]  ring;
    logic [7:0]  host;
    logic [31:0] msg_id;
    logic [15:0] offset;   // PSN - PSN0
    logic [2:0]  port;
  } pkt_info_t;

  typedef enum logic [2:0] {
    ACT_BYPASS    = 3'd0,  // not an aggregation packet: forward untouched
    ACT_DROP      = 3'd1,  // retransmission of a packet not yet aggregated
    ACT_STORE     = 3'd2,  // first arrival, column still incomplete
    ACT_STORE_AGG = 3'd3,  // first arrival that completes its column
    ACT_REPLAY    = 3'd4   // retransmission of an aggregated packet
  } action_e;

  // Decision the State Manager hands back for one frame.
  typedef struct packed {
    action_e     act;
    logic        first;
    logic [7:0]  ring;
    logic [7:0]  host;
    logic [15:0] col;      // slot * MAX_MSG_LEN + offset
  } decision_t;

  typedef enum logic { JOB_FRESH = 1'b0, JOB_REPLAY = 1'b1 } job_kind_e;

  // Work for the Aggregator / Combinator.
  typedef struct packed {
    job_kind_e   kind;
    logic [7:0]  ring;
    logic [15:0] col;
    hdr_rec_t    hdr;      // header of the retransmitted packet (replay)
  } job_t;

  function automatic logic [7:0] get_byte(input logic [2*BEAT_W-1:0] win, input int idx);
    return win[2*BEAT_W-1-8*idx -: 8];
  endfunction

  // One's-complement checksum of a 20-byte IPv4 header held at bytes
  // OFF_IP..OFF_IP+19 of a header record, with the checksum field as zero.
  function automatic logic [15:0] ipv4_csum(input logic [HDR_MAX*8-1:0] h);
    logic [19:0] s;
    s = '0;
    for (int w = 0; w < 10; w++) begin
      if (w != 5)
        s += {4'h0, h[HDR_MAX*8-1-8*(OFF_IP+2*w) -: 16]};
    end
    s = {4'h0, s[15:0]} + {16'h0, s[19:16]};
    s = {4'h0, s[15:0]} + {16'h0, s[19:16]};
    return ~s[15:0];
  endfunction

endpackage
