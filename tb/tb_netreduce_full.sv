// tb_netreduce_full: one complete aggregation job on the accelerator at its
// default size (six ports, 8 rings x 6 hosts of State record and buffers,
// window N = 2, 170-packet messages of 1 KB).
//
// One ring of six hosts, one per port, exchanges three messages of 170
// packets, so all N+1 = 3 slots of the ring's columns are used, with the
// hosts' sliding window throttling the third message. The host model checks
// every output frame byte for byte; the drop, replay and bypass cases are
// also made to happen once, and the decision counters must match exactly.
module tb_netreduce_full;
  import nr_pkg::*;

  localparam int NPORTS = 6, HOSTS = 6, MSG_LEN = 170, NUM_MSG = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;

  logic [NPORTS-1:0] rx_valid, rx_ready, tx_valid, tx_ready;
  beat_t rx_beat [NPORTS];
  beat_t tx_beat [NPORTS];
  logic busy;
  logic [31:0] cnt_bypass, cnt_drop, cnt_store, cnt_agg, cnt_replay;
  hdr_rec_t ext_hdr;
  assign ext_hdr = '0;

  netreduce_top dut (
    .clk, .rst_n, .rx_valid, .rx_ready, .rx_beat, .tx_valid, .tx_ready, .tx_beat,
    .cfg_clear(1'b0), .cfg_local_size(8'(HOSTS)), .cfg_global_size(8'(HOSTS)),
    .cfg_is_spine(1'b0), .cfg_self_mac(48'h0A_00_00_00_00_FE), .cfg_self_ip(32'h0A00_00FE),
    .cfg_spine_mac(48'h0A_00_00_00_00_FD), .cfg_spine_ip(32'h0A00_00FD),
    .ext_hdr_wr(1'b0), .ext_hdr, .busy,
    .cnt_bypass, .cnt_drop, .cnt_store, .cnt_agg, .cnt_replay
  );

  logic done;
  int checks_m, failures_m, n_results, n_byp, n_stalls, n_wrap;
  nr_host_model #(.NPORTS(NPORTS), .NRINGS(1), .H(HOSTS), .MSG_LEN(MSG_LEN),
                  .NUM_MSG(NUM_MSG), .WINDOW(2), .EVENTS(1'b1), .STALL(1'b0),
                  .START_DELAY(2000)) hosts (
    .clk, .rst_n, .rx_valid, .rx_ready, .rx_beat, .tx_valid, .tx_ready, .tx_beat,
    .done, .checks(checks_m), .failures(failures_m), .n_results, .n_bypass_seen(n_byp),
    .n_stalls, .n_psn_wrap(n_wrap)
  );

  int checks = 0, failures = 0;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    $display("  %-24s %0d", what, got);
    if (got != exp) begin
      failures++;
      $display("FAIL: %s = %0d, expected %0d", what, got, exp);
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
    expect_eq("STORE_AGG decisions", cnt_agg, NUM_MSG * MSG_LEN);
    expect_eq("STORE decisions", cnt_store, NUM_MSG * MSG_LEN * (HOSTS - 1));
    expect_eq("DROP decisions", cnt_drop, 1);
    expect_eq("REPLAY decisions", cnt_replay, 1);
    expect_eq("BYPASS decisions", cnt_bypass, 2);
    expect_eq("result frames", n_results, NUM_MSG * MSG_LEN * HOSTS + 1);
    expect_eq("bypassed frames", n_byp, 2);
    finish();
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, results so far %0d", n_results);
    finish();
  end
endmodule
