// nr_host_model: behavioural model of the hosts of one or more NetReduce
// rings, with the end-to-end checker.
//
// Host h of ring r sits on port (r*H + h) mod NPORTS and holds one RDMA
// connection to host (h+1) mod H. It sends NUM_MSG messages of MSG_LEN
// packets each, using the host-side sliding window: messages 0..WINDOW-1 at
// once, then message i+WINDOW as soon as it has received the whole
// aggregation result of message i. Host 0's PSNs start just below 2^24, so
// they wrap during the run.
//
// Every frame leaving the accelerator is checked byte for byte: an
// aggregation result must be the original packet with its payload replaced
// by the sum over all H hosts (worked out here from the gradient hash), and
// must leave on the port its packet came in on; a bypassed frame must come
// out unchanged.
//
// With EVENTS set the model also makes the design's special cases happen:
// a non-RoCE frame and a RoCE ACK (bypass), a retransmission before its
// column is complete (drop) and one after (replay, answered from the history
// buffer). With STALL set the egress ports are throttled at random.
module nr_host_model
  import nr_pkg::*;
  import nr_tb_pkg::*;
#(
  parameter int NPORTS  = 6,
  parameter int NRINGS  = 1,
  parameter int H       = 3,
  parameter int MSG_LEN = 3,
  parameter int NUM_MSG = 4,
  parameter int WINDOW  = 2,
  parameter bit EVENTS  = 1,
  parameter bit STALL   = 1,
  parameter int START_DELAY = 400
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic [NPORTS-1:0] rx_valid,
  input  logic [NPORTS-1:0] rx_ready,
  output beat_t             rx_beat [NPORTS],
  input  logic [NPORTS-1:0] tx_valid,
  output logic [NPORTS-1:0] tx_ready,
  input  beat_t             tx_beat [NPORTS],
  output logic              done,
  output int                checks,
  output int                failures,
  output int                n_results,
  output int                n_bypass_seen,
  output int                n_stalls,
  output int                n_psn_wrap
);
  beat_t    txq [NPORTS][$];
  byte_q_t  rxf [NPORTS];
  byte_q_t  byp_expect [NPORTS][$];
  int       rcv_cnt [NRINGS][H][NUM_MSG];
  bit       got     [NRINGS][H][NUM_MSG][MSG_LEN];
  int       hosts_done;
  int       cyc;

  function automatic int port_of(int r, int h);
    return (r * H + h) % NPORTS;
  endfunction
  function automatic logic [23:0] psn_base(int r, int h);
    return (h == 0) ? 24'hFFFFFF - 24'(MSG_LEN) : 24'(1000 * (h + 1) + 100 * r);
  endfunction
  function automatic logic [23:0] qp_of(int r, int h);
    return 24'h000100 + 24'(16 * r + h);
  endfunction

  function automatic byte_q_t pkt(int r, int h, int m, int o, bit with_sum);
    logic [31:0] pay [$];
    logic [7:0]  op;
    bit          first;
    int          d;
    first = (o == 0);
    d = (h + 1) % H;
    if (MSG_LEN == 1)          op = OP_SEND_ONLY;
    else if (o == 0)           op = OP_SEND_FIRST;
    else if (o == MSG_LEN - 1) op = OP_SEND_LAST;
    else                       op = OP_SEND_MIDDLE;
    if (with_sum) begin
      logic [31:0] one [$];
      mk_grads(r, 0, m, o, first, pay);
      for (int g = 1; g < H; g++) begin
        mk_grads(r, g, m, o, first, one);
        foreach (pay[i]) pay[i] += one[i];
      end
    end else begin
      mk_grads(r, h, m, o, first, pay);
    end
    return mk_frame(host_mac(r, h), host_mac(r, d), host_ip(r, h), host_ip(r, d),
                    qp_of(r, d), psn_base(r, h) + 24'(m * MSG_LEN + o), op, first,
                    INET_TAG, 32'(r), 32'(m), 32'(MSG_LEN), pay);
  endfunction

  task automatic push_frame(int p, byte_q_t f);
    beat_q_t b;
    b = to_beats(f, p);
    foreach (b[i]) txq[p].push_back(b[i]);
  endtask

  task automatic send_pkt(int r, int h, int m, int o);
    push_frame(port_of(r, h), pkt(r, h, m, o, 1'b0));
  endtask
  task automatic send_msg(int r, int h, int m);
    for (int o = 0; o < MSG_LEN; o++) send_pkt(r, h, m, o);
  endtask

  // -------- ingress drivers
  // registered drivers: a beat is taken off the queue when the port is free
  // or its current beat is accepted, and presented with <= so the design
  // always samples the beat of the previous edge
  always @(posedge clk)
    if (!rst_n) begin
      for (int p = 0; p < NPORTS; p++) rx_valid[p] <= 1'b0;
    end else
      for (int p = 0; p < NPORTS; p++)
        if (!rx_valid[p] || rx_ready[p]) begin
          if (txq[p].size() > 0) begin
            rx_beat[p]  <= txq[p].pop_front();
            rx_valid[p] <= 1'b1;
          end else
            rx_valid[p] <= 1'b0;
        end

  // -------- egress: throttle and collect
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int p = 0; p < NPORTS; p++) begin
      tx_ready[p] <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
      if (rst_n && tx_valid[p] && !tx_ready[p]) n_stalls <= n_stalls + 1;
      if (rst_n && tx_valid[p] && tx_ready[p]) begin
        for (int j = 0; j < int'(tx_beat[p].nbytes); j++)
          rxf[p].push_back(tx_beat[p].data[BEAT_W-1-8*j -: 8]);
        if (tx_beat[p].eop) begin
          check_frame(p, rxf[p]);
          rxf[p].delete();
        end
      end
    end
  end

  task automatic fail(string what);
    failures++;
    $display("FAIL [%0d]: %s", cyc, what);
  endtask

  task automatic check_frame(int p, byte_q_t f);
    bit roce;
    logic [7:0] op;
    roce = f.size() >= 54 && f[12] == 8'h08 && f[13] == 8'h00 && f[23] == 8'd17 &&
           f[36] == 8'h12 && f[37] == 8'hB7;
    op = roce ? f[42] : 8'hFF;
    if (!roce || !(op inside {OP_SEND_FIRST, OP_SEND_MIDDLE, OP_SEND_LAST, OP_SEND_ONLY})) begin
      checks++;
      n_bypass_seen++;
      if (byp_expect[p].size() == 0) fail($sformatf("unexpected bypass frame on port %0d", p));
      else begin
        byte_q_t e;
        e = byp_expect[p].pop_front();
        if (e != f) fail($sformatf("bypass frame changed on port %0d", p));
      end
    end else begin
      int r, h, m, o, d;
      logic [23:0] rel;
      byte_q_t e;
      r = int'(f[28]);
      h = int'(f[29]);
      checks++;
      if (r >= NRINGS || h >= H) begin
        fail($sformatf("result from unknown host %0d.%0d", r, h));
        return;
      end
      rel = rd24(f, OFF_BTH_PSN) - psn_base(r, h);
      m = int'(rel) / MSG_LEN;
      o = int'(rel) % MSG_LEN;
      if (m >= NUM_MSG) begin
        fail($sformatf("result with bad PSN %h", rd24(f, OFF_BTH_PSN)));
        return;
      end
      if (h == 0 && rd24(f, OFF_BTH_PSN) < psn_base(r, h)) n_psn_wrap++;
      e = pkt(r, h, m, o, 1'b1);
      checks++;
      if (e != f) begin
        int bad;
        bad = -1;
        for (int i = 0; i < e.size() && i < f.size(); i++) if (e[i] != f[i] && bad < 0) bad = i;
        fail($sformatf("result r%0d h%0d m%0d o%0d differs (len %0d vs %0d, first byte %0d)",
                       r, h, m, o, f.size(), e.size(), bad));
      end
      checks++;
      if (p != port_of(r, h)) fail($sformatf("result left on port %0d, expected %0d", p, port_of(r, h)));
      n_results++;
      d = (h + 1) % H;
      if (!got[r][d][m][o]) begin
        got[r][d][m][o] = 1'b1;
        rcv_cnt[r][d][m]++;
        if (rcv_cnt[r][d][m] == MSG_LEN) begin
          // host d now holds the result of message m: it may send m+WINDOW
          if (EVENTS && r == 0 && d == 0 && m == 0)
            send_pkt(0, 0, 0, MSG_LEN - 1);   // late retransmission: replay
          if (m + WINDOW < NUM_MSG) send_msg(r, d, m + WINDOW);
          if (m == NUM_MSG - 1) hosts_done++;
        end
      end
    end
  endtask

  assign done = (hosts_done == NRINGS * H);

  initial begin
    checks = 0; failures = 0; n_results = 0; n_bypass_seen = 0; n_stalls = 0; n_psn_wrap = 0;
    hosts_done = 0; cyc = 0;
    for (int p = 0; p < NPORTS; p++) tx_ready[p] = 1'b1;
    foreach (rcv_cnt[r, h, m]) rcv_cnt[r][h][m] = 0;
    foreach (got[r, h, m, o]) got[r][h][m][o] = 1'b0;
    @(posedge rst_n);
    repeat (2) @(posedge clk);
    if (EVENTS) begin
      byte_q_t f;
      logic [31:0] none [$];
      // a non-RoCE frame (ARP-sized) and a RoCE ACK are bypassed
      f = {};
      for (int i = 0; i < 60; i++) f.push_back(8'(i * 7 + 1));
      f[12] = 8'h08; f[13] = 8'h06;
      push_frame(0, f);
      byp_expect[0].push_back(f);
      f = mk_frame(host_mac(0, 1), host_mac(0, 0), host_ip(0, 1), host_ip(0, 0),
                   24'h000200, 24'h000010, 8'h11, 1'b0, 0, 0, 0, 0, none);
      push_frame(port_of(0, 1), f);
      byp_expect[port_of(0, 1)].push_back(f);
    end
    // ring 0 host 0 starts first; an early duplicate of one of its packets
    // arrives while the column is still incomplete (drop)
    for (int m = 0; m < WINDOW && m < NUM_MSG; m++) send_msg(0, 0, m);
    if (EVENTS) send_pkt(0, 0, 0, MSG_LEN > 1 ? 1 : 0);
    repeat (START_DELAY) @(posedge clk);
    for (int r = 0; r < NRINGS; r++)
      for (int h = 0; h < H; h++)
        if (!(r == 0 && h == 0))
          for (int m = 0; m < WINDOW && m < NUM_MSG; m++) send_msg(r, h, m);
  end

endmodule
