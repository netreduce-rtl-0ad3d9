// tb_parser: self-checking test of the Parser with its two lookup tables.
//
// Frames are built byte by byte and their first 128 bytes presented as the
// Arbiter does. Two rings of three hosts each start with a first packet
// (hosts arriving in a random order, so HostIDs follow arrival), then send
// middle/last packets of two interleaved messages whose PSNs wrap at 2^24.
// The expected RingID, HostID, MsgID and offset are worked out by the test
// from what it sent. Frames that must not be aggregated are mixed in: a
// non-IP frame, a RoCE ACK, a first packet with a wrong tag, and a middle
// packet of an unknown connection. The result must appear one cycle after
// the request, carrying the ingress port.
module tb_parser;
  import nr_pkg::*;
  import nr_tb_pkg::*;

  localparam int RINGS = 2, HOSTS = 3, WINDOW = 2, MSG_LEN = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, req, info_valid;
  logic [2*BEAT_W-1:0] win;
  logic [7:0] win_bytes;
  logic [2:0] port;
  pkt_info_t  info;

  parser #(.RINGS(RINGS), .HOSTS(HOSTS), .WINDOW(WINDOW)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] no_pay [$];

  function automatic logic [23:0] psn0(int r, int h, int m);
    return 24'hFFFFF8 + 24'(r * 3 + h) + 24'(m * MSG_LEN);
  endfunction

  function automatic byte_q_t frame(int r, int h, int m, int o, logic [31:0] tag);
    logic [7:0] op;
    op = (o == 0) ? OP_SEND_FIRST : (o == MSG_LEN - 1 ? OP_SEND_LAST : OP_SEND_MIDDLE);
    return mk_frame(host_mac(r, h), host_mac(r, (h + 1) % HOSTS), host_ip(r, h),
                    host_ip(r, (h + 1) % HOSTS), 24'(r * 16 + h + 1), psn0(r, h, m) + 24'(o),
                    op, o == 0, tag, 32'(r), 32'(m), 32'(MSG_LEN), no_pay);
  endfunction

  task automatic present(byte_q_t f, int p, pkt_info_t exp);
    @(negedge clk);
    win = '0;
    for (int i = 0; i < 128 && i < f.size(); i++) win[2*BEAT_W-1-8*i -: 8] = f[i];
    win_bytes = 8'(f.size() < 128 ? f.size() : 128);
    port = 3'(p);
    req = 1'b1;
    @(negedge clk);
    req = 1'b0;
    checks++;
    exp.port = 3'(p);
    if (!info_valid || info != exp) begin
      failures++;
      $display("FAIL: valid %0d info agg%0d first%0d r%0d h%0d m%0d o%0d p%0d, expected agg%0d first%0d r%0d h%0d m%0d o%0d",
               info_valid, info.agg, info.first, info.ring, info.host, info.msg_id, info.offset, info.port,
               exp.agg, exp.first, exp.ring, exp.host, exp.msg_id, exp.offset);
    end
  endtask

  function automatic pkt_info_t agg(int r, int hid, int m, int o);
    pkt_info_t x;
    x = '0;
    x.agg = 1; x.first = (o == 0); x.ring = 8'(r); x.host = 8'(hid);
    x.msg_id = 32'(m); x.offset = 16'(o);
    return x;
  endfunction

  int hid [RINGS][HOSTS];
  int order [HOSTS];

  initial begin
    byte_q_t f;
    clear = 0; req = 0; win = '0; win_bytes = 0; port = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // first packets of message 0, hosts in random order per ring
    for (int r = 0; r < RINGS; r++) begin
      for (int h = 0; h < HOSTS; h++) order[h] = h;
      order.shuffle();
      for (int i = 0; i < HOSTS; i++) begin
        hid[r][order[i]] = i;
        present(frame(r, order[i], 0, 0, INET_TAG), order[i], agg(r, i, 0, 0));
      end
    end
    // message 1 starts too: both are open at once
    for (int r = 0; r < RINGS; r++)
      for (int h = 0; h < HOSTS; h++)
        present(frame(r, h, 1, 0, INET_TAG), h, agg(r, hid[r][h], 1, 0));
    // the rest of both messages, interleaved, with non-aggregation frames
    for (int o = 1; o < MSG_LEN; o++)
      for (int m = 0; m < 2; m++)
        for (int r = 0; r < RINGS; r++)
          for (int h = 0; h < HOSTS; h++) begin
            present(frame(r, h, m, o, INET_TAG), $urandom_range(0, 5), agg(r, hid[r][h], m, o));
            if ($urandom_range(0, 3) == 0) begin
              case ($urandom_range(0, 2))
                0: begin   // not IPv4
                  f = frame(r, h, m, o, INET_TAG);
                  f[12] = 8'h86; f[13] = 8'hDD;
                end
                1: begin   // RoCE ACK
                  f = frame(r, h, m, o, INET_TAG);
                  f[42] = 8'h11;
                end
                default: begin   // unknown connection
                  f = frame(r, h, m, o, INET_TAG);
                  f[33] = 8'hEE;
                end
              endcase
              present(f, 1, '0);
            end
          end
    // a first packet with the wrong tag is not aggregation traffic
    present(frame(0, 0, 2, 0, 32'h12345678), 0, '0);
    // message 2 replaces message 0 in LUT#2: message 0's PSNs no longer hit
    present(frame(0, 0, 2, 0, INET_TAG), 0, agg(0, hid[0][0], 2, 0));
    present(frame(0, 0, 0, 2, INET_TAG), 0, '0);
    present(frame(0, 0, 2, 3, INET_TAG), 0, agg(0, hid[0][0], 2, 3));
    // clear empties both tables
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    present(frame(1, 1, 1, 2, INET_TAG), 0, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
