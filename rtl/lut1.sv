// lut1: first level of the header-recovery lookup table (LUT#1).
//
// An RDMA connection is named by the tuple {SrcIP, DstIP, DstQP}. When the
// first packet of a message arrives, the Parser inserts the tuple together
// with the RingID it carries; the table then hands out the next free HostID
// of that ring (HostIDs are counted by the switch, in order of arrival, not
// assigned by the hosts). Later packets of the same connection, which carry
// no NetReduce header, look the tuple up and get {RingID, HostID} back.
//
// The table has RINGS*HOSTS entries (n*H in the paper) and is searched in
// parallel like a CAM. Lookup is combinational; an insert takes effect at the
// next clock edge and returns the HostID it will get in the same cycle.
// Inserting a tuple already present changes nothing. An insert into a ring
// whose HOSTS IDs are used up, or into an out-of-range ring, fails
// (ins_ok = 0). clear empties the table and restarts the counters, as the
// control plane would at job initialisation.
module lut1 #(
  parameter int RINGS = 8,
  parameter int HOSTS = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  // lookup
  input  logic [31:0] lk_sip,
  input  logic [31:0] lk_dip,
  input  logic [23:0] lk_qp,
  output logic        lk_hit,
  output logic [7:0]  lk_ring,
  output logic [7:0]  lk_host,
  // insert (same tuple as the lookup port)
  input  logic        ins,
  input  logic [7:0]  ins_ring,
  output logic        ins_ok,
  output logic [7:0]  ins_host
);
  localparam int ENTRIES = RINGS * HOSTS;
  localparam int RW      = (RINGS > 1) ? $clog2(RINGS) : 1;

  typedef struct packed {
    logic        valid;
    logic [31:0] sip;
    logic [31:0] dip;
    logic [23:0] qp;
    logic [7:0]  ring;
    logic [7:0]  host;
  } ent_t;

  ent_t       tab [ENTRIES];
  logic [7:0] cnt [RINGS];     // next HostID per ring

  always_comb begin
    lk_hit  = 1'b0;
    lk_ring = '0;
    lk_host = '0;
    for (int e = 0; e < ENTRIES; e++) begin
      if (tab[e].valid && tab[e].sip == lk_sip && tab[e].dip == lk_dip && tab[e].qp == lk_qp) begin
        lk_hit  = 1'b1;
        lk_ring = tab[e].ring;
        lk_host = tab[e].host;
      end
    end
  end

  // Free slot: entries are laid out ring-major, so ring r owns slots
  // r*HOSTS .. r*HOSTS+HOSTS-1 and the slot is simply r*HOSTS + HostID.
  logic ring_ok;
  assign ring_ok  = (int'(ins_ring) < RINGS);
  assign ins_host = ring_ok ? cnt[ins_ring[RW-1:0]] : '0;
  assign ins_ok   = lk_hit ? 1'b1 : (ring_ok && int'(ins_host) < HOSTS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) tab[e].valid <= 1'b0;
      for (int r = 0; r < RINGS; r++)   cnt[r] <= '0;
    end else if (clear) begin
      for (int e = 0; e < ENTRIES; e++) tab[e].valid <= 1'b0;
      for (int r = 0; r < RINGS; r++)   cnt[r] <= '0;
    end else if (ins && !lk_hit && ins_ok) begin
      tab[int'(ins_ring) * HOSTS + int'(ins_host)] <= '{1'b1, lk_sip, lk_dip, lk_qp, ins_ring, ins_host};
      cnt[ins_ring[RW-1:0]] <= cnt[ins_ring[RW-1:0]] + 8'd1;
    end
  end

endmodule
