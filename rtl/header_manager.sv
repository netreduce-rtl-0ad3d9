// header_manager: decides the header of every packet the accelerator sends
// back, for rack-level (ToR) or spine-leaf aggregation.
//
// The control plane sets LocalSize (machines under this switch) and
// GlobalSize (machines in the job), whether this accelerator serves a spine,
// and its own and the spine's MAC/IP addresses. For each outgoing header:
//   * if the packet is addressed to this switch itself (DstMAC and DstIP are
//     its own): a spine swaps source and destination MAC/IP; a leaf replaces
//     the header with the one it stored earlier for the same DstQP and PSN;
//   * else if LocalSize == GlobalSize (ToR aggregation): the header is left
//     as it is;
//   * else (LocalSize < GlobalSize, two-level aggregation): the original
//     header is stored (keyed by DstQP and PSN) and the addresses become
//     [SrcMAC_leaf, DstMAC_spine, SrcIP_leaf, DstIP_spine].
// The IPv4 header checksum is recomputed whenever an address changes.
// Headers sent to this leaf by other leaves enter the store through the
// ext_* port.
//
// The three cases are the paper's Algorithm 3; it checks "belongs to the
// switch itself" after the upstream rewrite, which would then never match at
// a leaf, so this design tests it on the incoming header first. The format
// in which leaves exchange headers, and the one-to-many fan-out a leaf needs
// in the downstream direction, are not described and not built: the store
// returns one header per packet. The store holds STORE_ENTRIES headers and
// is overwritten round-robin.
//
// Timing: the header path is combinational; stores land at the next edge.
module header_manager
  import nr_pkg::*;
#(
  parameter int STORE_ENTRIES = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  cfg_local_size,
  input  logic [7:0]  cfg_global_size,
  input  logic        cfg_is_spine,
  input  logic [47:0] cfg_self_mac,
  input  logic [31:0] cfg_self_ip,
  input  logic [47:0] cfg_spine_mac,
  input  logic [31:0] cfg_spine_ip,
  // header path
  input  logic        h_valid,   // h_in is being sent out this cycle
  input  hdr_rec_t    h_in,
  output hdr_rec_t    h_out,
  // headers arriving from other leaves
  input  logic        ext_wr,
  input  hdr_rec_t    ext_hdr
);
  localparam int HB = HDR_MAX * 8;

  typedef struct packed {
    logic [23:0] qp;
    logic [23:0] psn;
    hdr_rec_t    hdr;
  } ent_t;

  ent_t store [STORE_ENTRIES];
  logic [STORE_ENTRIES-1:0] valid;
  logic [$clog2(STORE_ENTRIES)-1:0] wp;

  function automatic logic [47:0] rd48(input logic [HB-1:0] b, input int off);
    return b[HB-1-8*off -: 48];
  endfunction
  function automatic logic [31:0] rd32(input logic [HB-1:0] b, input int off);
    return b[HB-1-8*off -: 32];
  endfunction
  function automatic logic [23:0] rd24(input logic [HB-1:0] b, input int off);
    return b[HB-1-8*off -: 24];
  endfunction

  logic [47:0] dmac, smac;
  logic [31:0] dip, sip;
  logic [23:0] qp, psn;
  assign dmac = rd48(h_in.bytes, OFF_DMAC);
  assign smac = rd48(h_in.bytes, OFF_SMAC);
  assign sip  = rd32(h_in.bytes, OFF_SIP);
  assign dip  = rd32(h_in.bytes, OFF_DIP);
  assign qp   = rd24(h_in.bytes, OFF_BTH_QP);
  assign psn  = rd24(h_in.bytes, OFF_BTH_PSN);

  logic to_self, two_level;
  assign to_self   = (dmac == cfg_self_mac) && (dip == cfg_self_ip);
  assign two_level = (cfg_local_size < cfg_global_size);

  // stored header for this DstQP/PSN
  logic     st_hit;
  hdr_rec_t st_hdr;
  always_comb begin
    st_hit = 1'b0;
    st_hdr = h_in;
    for (int e = 0; e < STORE_ENTRIES; e++)
      if (valid[e] && store[e].qp == qp && store[e].psn == psn) begin
        st_hit = 1'b1;
        st_hdr = store[e].hdr;
      end
  end

  function automatic hdr_rec_t set_addr(input hdr_rec_t r, input logic [47:0] sm, input logic [47:0] dm,
                                        input logic [31:0] si, input logic [31:0] di);
    hdr_rec_t o;
    o = r;
    o.bytes[HB-1-8*OFF_DMAC -: 48] = dm;
    o.bytes[HB-1-8*OFF_SMAC -: 48] = sm;
    o.bytes[HB-1-8*OFF_SIP  -: 32] = si;
    o.bytes[HB-1-8*OFF_DIP  -: 32] = di;
    o.bytes[HB-1-8*OFF_IP_CSUM -: 16] = ipv4_csum(o.bytes);
    return o;
  endfunction

  logic do_store;
  always_comb begin
    h_out    = h_in;
    do_store = 1'b0;
    if (to_self) begin
      if (cfg_is_spine) h_out = set_addr(h_in, dmac, smac, dip, sip);
      else if (st_hit)  begin
        h_out         = st_hdr;
        // the payload that comes back is the aggregated one
        h_out.pay_len = h_in.pay_len;
        h_out.port    = h_in.port;
      end
    end else if (two_level && !cfg_is_spine) begin
      h_out    = set_addr(h_in, cfg_self_mac, cfg_spine_mac, cfg_self_ip, cfg_spine_ip);
      do_store = 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (ext_wr)                     store[wp] <= '{rd24(ext_hdr.bytes, OFF_BTH_QP), rd24(ext_hdr.bytes, OFF_BTH_PSN), ext_hdr};
    else if (h_valid && do_store)   store[wp] <= '{qp, psn, h_in};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      wp    <= '0;
    end else if (ext_wr || (h_valid && do_store)) begin
      valid[wp] <= 1'b1;
      wp        <= wp + 1'b1;
    end
  end

endmodule
