// tb_state_manager: self-checking test of the State Manager's decisions.
//
// Two rings of three hosts send packets of 4-packet messages, each host
// keeping a pointer that runs ahead at random but stays within one message
// of the slowest host, so the N+1 = 3 slots of each ring are reused many
// times. Some packets are sent again at random (retransmissions), some are
// not aggregation traffic. A model of the State record, kept by the test,
// gives the expected action for each: BYPASS for non-aggregation packets,
// STORE when the column is still incomplete, STORE_AGG when this packet
// completes it, DROP for a repeat while incomplete and REPLAY for a repeat
// once complete; every new arrival also clears this host's bit in the same
// offset of the next slot. The decision must come one cycle after the
// request with the column index slot*MAX_MSG_LEN + offset. Every action must
// occur. A second phase runs with only two active hosts per ring.
module tb_state_manager;
  import nr_pkg::*;

  localparam int RINGS = 2, HOSTS = 3, WINDOW = 2, MAXL = 4, SLOTS = WINDOW + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, busy, info_valid, dec_valid;
  logic [7:0] cfg_hosts;
  pkt_info_t info;
  decision_t dec;

  state_manager #(.RINGS(RINGS), .HOSTS(HOSTS), .WINDOW(WINDOW), .MAX_MSG_LEN(MAXL)) dut (.*);

  int checks = 0, failures = 0;
  int seen_act [5];
  bit bits [RINGS][SLOTS][MAXL][HOSTS];
  int ptr [RINGS][HOSTS];   // packets sent so far: message = ptr / MAXL

  function automatic action_e model(pkt_info_t x, int nh);
    int s, o;
    bit full;
    if (!x.agg || int'(x.offset) >= MAXL || int'(x.ring) >= RINGS || int'(x.host) >= HOSTS)
      return ACT_BYPASS;
    s = int'(x.msg_id % SLOTS);
    o = int'(x.offset);
    if (bits[x.ring][s][o][x.host]) begin
      full = 1;
      for (int h = 0; h < nh; h++) full &= bits[x.ring][s][o][h];
      return full ? ACT_REPLAY : ACT_DROP;
    end
    bits[x.ring][s][o][x.host] = 1;
    bits[x.ring][(s + 1) % SLOTS][o][x.host] = 0;
    full = 1;
    for (int h = 0; h < nh; h++) full &= bits[x.ring][s][o][h];
    return full ? ACT_STORE_AGG : ACT_STORE;
  endfunction

  task automatic send(pkt_info_t x, int nh);
    action_e e;
    @(negedge clk);
    info = x;
    info_valid = 1;
    e = model(x, nh);
    @(negedge clk);
    info_valid = 0;
    checks++;
    seen_act[e]++;
    if (!dec_valid || dec.act != e || (e != ACT_BYPASS &&
        (dec.ring != x.ring || dec.host != x.host || dec.first != x.first ||
         dec.col != 16'(int'(x.msg_id % SLOTS) * MAXL + int'(x.offset))))) begin
      failures++;
      $display("FAIL: r%0d h%0d m%0d o%0d: act %0d col %0d, expected %0d", x.ring, x.host, x.msg_id,
               x.offset, dec.act, dec.col, e);
    end
  endtask

  function automatic pkt_info_t pk(int r, int h, int p);
    pkt_info_t x;
    x = '0;
    x.agg = 1; x.ring = 8'(r); x.host = 8'(h);
    x.msg_id = 32'(p / MAXL); x.offset = 16'(p % MAXL); x.first = (p % MAXL == 0);
    return x;
  endfunction

  task automatic run(int nh, int npkts);
    int lo;
    foreach (ptr[r, h]) ptr[r][h] = 0;
    repeat (npkts) begin
      int r, h;
      pkt_info_t x;
      r = $urandom_range(0, RINGS - 1);
      h = $urandom_range(0, nh - 1);
      lo = ptr[r][0];
      for (int g = 1; g < nh; g++) if (ptr[r][g] < lo) lo = ptr[r][g];
      case ($urandom_range(0, 9))
        0: if (ptr[r][h] > 0) send(pk(r, h, $urandom_range(ptr[r][h] > 6 ? ptr[r][h] - 6 : 0, ptr[r][h] - 1)), nh);
        1: begin
          x = pk(r, h, ptr[r][h]);
          x.agg = 0;
          send(x, nh);
        end
        default:
          // stay within the window: host may be at most one message ahead
          if (ptr[r][h] < (lo / MAXL + WINDOW) * MAXL) begin
            send(pk(r, h, ptr[r][h]), nh);
            ptr[r][h]++;
          end
      endcase
    end
  endtask

  task automatic do_clear();
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    foreach (bits[r, s, o, h]) bits[r][s][o][h] = 0;
  endtask

  initial begin
    clear = 0; info_valid = 0; info = '0; cfg_hosts = 8'(HOSTS);
    foreach (bits[r, s, o, h]) bits[r][s][o][h] = 0;
    foreach (seen_act[i]) seen_act[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    while (busy) @(negedge clk);
    run(HOSTS, 1500);
    do_clear();
    cfg_hosts = 8'd2;
    run(2, 600);
    for (int a = 0; a < 5; a++) begin
      checks++;
      $display("  action %0d: %0d", a, seen_act[a]);
      if (seen_act[a] == 0) begin
        failures++;
        $display("FAIL: action %0d never happened", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
