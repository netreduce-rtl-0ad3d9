// tb_netreduce_top: end-to-end test of the accelerator at reduced size.
//
// Two rings of three hosts on the six ports (rings and messages shortened to
// 4 packets so it runs in seconds) go through the whole data path. The host
// model checks every output frame byte for byte against sums it works out
// from the gradient hash, and follows the hosts' sliding window of N = 2
// messages, so slots of the State record and the buffers are reused.
//
// Each mechanism is made to happen and is counted; one that never happened
// counts as a failure: aggregation (STORE and STORE_AGG), a duplicate packet
// dropped before its column is complete, a late retransmission replayed from
// the history buffer, bypass of a non-RoCE frame and of a RoCE ACK, egress
// back-pressure (stalls), and PSN wrap-around at 2^24.
//
// The paper bounds the extra round-trip time the accelerator adds at under
// 3 us; at an assumed 250 MHz clock (512-bit beats carry 128 Gbit/s) that is
// 750 cycles, checked on the first aggregation (from the decision to the
// first result beat leaving) while the outputs are not throttled.
module tb_netreduce_top;
  import nr_pkg::*;

  localparam int NPORTS = 6, RINGS = 2, HOSTS = 3, WINDOW = 2, MSG_LEN = 4, NUM_MSG = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;

  logic [NPORTS-1:0] rx_valid, rx_ready, tx_valid, tx_ready;
  beat_t rx_beat [NPORTS];
  beat_t tx_beat [NPORTS];
  logic busy;
  logic [31:0] cnt_bypass, cnt_drop, cnt_store, cnt_agg, cnt_replay;
  hdr_rec_t ext_hdr;
  assign ext_hdr = '0;

  netreduce_top #(.NPORTS(NPORTS), .RINGS(RINGS), .HOSTS(HOSTS), .WINDOW(WINDOW),
                  .MAX_MSG_LEN(MSG_LEN)) dut (
    .clk, .rst_n, .rx_valid, .rx_ready, .rx_beat, .tx_valid, .tx_ready, .tx_beat,
    .cfg_clear(1'b0), .cfg_local_size(8'(HOSTS)), .cfg_global_size(8'(HOSTS)),
    .cfg_is_spine(1'b0), .cfg_self_mac(48'h0A_00_00_00_00_FE), .cfg_self_ip(32'h0A00_00FE),
    .cfg_spine_mac(48'h0A_00_00_00_00_FD), .cfg_spine_ip(32'h0A00_00FD),
    .ext_hdr_wr(1'b0), .ext_hdr, .busy,
    .cnt_bypass, .cnt_drop, .cnt_store, .cnt_agg, .cnt_replay
  );

  logic done;
  int checks_m, failures_m, n_results, n_byp, n_stalls, n_wrap;
  nr_host_model #(.NPORTS(NPORTS), .NRINGS(RINGS), .H(HOSTS), .MSG_LEN(MSG_LEN),
                  .NUM_MSG(NUM_MSG), .WINDOW(WINDOW), .EVENTS(1'b1), .STALL(1'b1),
                  .START_DELAY(300)) hosts (
    .clk, .rst_n, .rx_valid, .rx_ready, .rx_beat, .tx_valid, .tx_ready, .tx_beat,
    .done, .checks(checks_m), .failures(failures_m), .n_results, .n_bypass_seen(n_byp),
    .n_stalls, .n_psn_wrap(n_wrap)
  );

  int checks = 0, failures = 0, cyc = 0;
  int t_first_agg = -1, t_first_out = -1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (t_first_agg < 0 && cnt_agg != 0) t_first_agg <= cyc;
    if (t_first_agg >= 0 && t_first_out < 0 && (tx_valid & tx_ready) != 0 &&
        cnt_agg != 0) t_first_out <= cyc;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL: %s = %0d, expected %0d", what, got, exp);
    end
  endtask
  task automatic happened(string what, longint n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL: %s never happened", what);
    end
  endtask

  task automatic finish();
    checks   += checks_m;
    failures += failures_m;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    wait (done);
    repeat (200) @(posedge clk);
    $display("events:");
    happened("STORE decisions", cnt_store);
    happened("STORE_AGG decisions", cnt_agg);
    happened("DROP decisions", cnt_drop);
    happened("REPLAY decisions", cnt_replay);
    happened("BYPASS decisions", cnt_bypass);
    happened("bypassed frames seen", n_byp);
    happened("egress stall cycles", n_stalls);
    happened("PSN wrap results", n_wrap);
    expect_eq("STORE_AGG count", cnt_agg, RINGS * NUM_MSG * MSG_LEN);
    expect_eq("STORE count", cnt_store, RINGS * NUM_MSG * MSG_LEN * (HOSTS - 1));
    expect_eq("DROP count", cnt_drop, 1);
    expect_eq("REPLAY count", cnt_replay, 1);
    expect_eq("BYPASS count", cnt_bypass, 2);
    expect_eq("bypassed frames out", n_byp, 2);
    expect_eq("result frames out", n_results, RINGS * NUM_MSG * MSG_LEN * HOSTS + 1);
    checks++;
    $display("  first aggregation latency   %0d cycles", t_first_out - t_first_agg);
    if (t_first_out < 0 || t_first_out - t_first_agg > 750) begin
      failures++;
      $display("FAIL: latency over 750 cycles");
    end
    finish();
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, results so far %0d", n_results);
    finish();
  end
endmodule
