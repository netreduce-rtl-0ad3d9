// tb_aggregator: self-checking test of the Aggregator and its result
// selector.
//
// The test models the Payload buffer and the History result buffer (one
// cycle read latency) and stands in for the Combinator, holding cmb_idle low
// for a random time after each emitted job. FRESH jobs on random columns
// must stage, beat by beat, the lane-wise 32-bit wrap-around sum of the H
// hosts' payloads, write the same sum to history at (ring, column), and emit
// the job PAY_BEATS*H + 1 cycles after taking it. REPLAY jobs must stage the history
// contents and write nothing. A job may not be taken while the Combinator is
// busy. A second phase uses only two of the three hosts.
module tb_aggregator;
  import nr_pkg::*;

  localparam int HOSTS = 3, PAY_BYTES = 256, BEATS = PAY_BYTES / 64, COLS = 6, RINGS = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] cfg_hosts;
  logic job_valid, job_ready, pb_rd, hist_wr, hist_rd, cmb_idle, stg_wr, emit_valid, emit_ready;
  job_t job, emit_job;
  logic [7:0] pb_ring, pb_host, hist_ring;
  logic [15:0] pb_col, hist_col;
  logic [4:0] pb_beat, hist_wbeat, hist_rbeat, stg_beat;
  logic [BEAT_W-1:0] pb_data, hist_wdata, hist_rdata, stg_data;

  aggregator #(.HOSTS(HOSTS), .PAY_BYTES(PAY_BYTES)) dut (.*);

  int checks = 0, failures = 0;
  logic [BEAT_W-1:0] pmem [RINGS][COLS][HOSTS][BEATS];
  logic [BEAT_W-1:0] hmem [RINGS][COLS][BEATS];
  logic [BEAT_W-1:0] stg [BEATS];
  int hist_writes;
  int busy_cnt = 0;
  bit took_while_busy = 0;

  always @(posedge clk) begin
    pb_data    <= pb_rd ? pmem[pb_ring][pb_col][pb_host][pb_beat] : {16{$urandom}};
    hist_rdata <= hist_rd ? hmem[hist_ring][hist_col][hist_rbeat] : {16{$urandom}};
    if (hist_wr) begin
      hmem[hist_ring][hist_col][hist_wbeat] <= hist_wdata;
      hist_writes++;
    end
    if (stg_wr) stg[stg_beat] <= stg_data;
    if (job_valid && job_ready && !cmb_idle) took_while_busy = 1;
    // Combinator stand-in: busy for a while after taking a job
    if (emit_valid && emit_ready) busy_cnt <= $urandom_range(1, 20);
    else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
  end
  assign cmb_idle   = (busy_cnt == 0);
  assign emit_ready = cmb_idle;

  function automatic logic [BEAT_W-1:0] sum_of(int r, int c, int b, int nh);
    logic [BEAT_W-1:0] s;
    s = '0;
    for (int l = 0; l < 16; l++) begin
      logic [31:0] a;
      a = 0;
      for (int h = 0; h < nh; h++) a += pmem[r][c][h][b][32*l +: 32];
      s[32*l +: 32] = a;
    end
    return s;
  endfunction

  task automatic run_job(job_kind_e kind, int r, int c, int nh);
    int t0, t;
    logic [BEAT_W-1:0] exp [BEATS];
    for (int b = 0; b < BEATS; b++) exp[b] = (kind == JOB_FRESH) ? sum_of(r, c, b, nh) : hmem[r][c][b];
    hist_writes = 0;
    @(negedge clk);
    job = '0;
    job.kind = kind; job.ring = 8'(r); job.col = 16'(c);
    job.hdr.bytes[31:0] = $urandom;
    job_valid = 1;
    @(posedge clk);
    while (!job_ready) @(posedge clk);
    t0 = $time;
    @(negedge clk);
    job_valid = 0;
    while (!emit_valid) @(negedge clk);
    t = ($time - t0) / 10;
    checks++;
    if (t != ((kind == JOB_FRESH) ? BEATS * nh : BEATS) + 1) begin
      failures++;
      $display("FAIL: job took %0d cycles", t);
    end
    checks++;
    if (emit_job != job) begin
      failures++;
      $display("FAIL: emitted job differs");
    end
    for (int b = 0; b < BEATS; b++) begin
      checks++;
      if (stg[b] != exp[b]) begin
        failures++;
        $display("FAIL: %s r%0d c%0d beat %0d staged wrong", kind == JOB_FRESH ? "fresh" : "replay", r, c, b);
      end
      if (kind == JOB_FRESH) begin
        checks++;
        if (hmem[r][c][b] != exp[b]) begin
          failures++;
          $display("FAIL: history r%0d c%0d beat %0d wrong", r, c, b);
        end
      end
    end
    checks++;
    if (hist_writes != ((kind == JOB_FRESH) ? BEATS : 0)) begin
      failures++;
      $display("FAIL: %0d history writes", hist_writes);
    end
  endtask

  bit done_col [RINGS][COLS];

  initial begin
    job_valid = 0; job = '0; cfg_hosts = 8'(HOSTS);
    foreach (pmem[r, c, h, b]) pmem[r][c][h][b] = {16{$urandom}};
    foreach (hmem[r, c, b]) hmem[r][c][b] = '0;
    foreach (done_col[r, c]) done_col[r][c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 2; phase++) begin
      int nh;
      nh = phase == 0 ? HOSTS : 2;
      cfg_hosts = 8'(nh);
      repeat (40) begin
        int r, c;
        r = $urandom_range(0, RINGS - 1);
        c = $urandom_range(0, COLS - 1);
        if (done_col[r][c] && $urandom_range(0, 1) == 0) run_job(JOB_REPLAY, r, c, nh);
        else begin
          // new data for the column, as after a slot is reused
          for (int h = 0; h < HOSTS; h++)
            for (int b = 0; b < BEATS; b++) pmem[r][c][h][b] = {16{$urandom}};
          if ($urandom_range(0, 3) == 0)   // values that overflow 32 bits
            for (int h = 0; h < HOSTS; h++) pmem[r][c][h][0] = {16{32'hFFFF_FFF0 + 32'(h)}};
          run_job(JOB_FRESH, r, c, nh);
          done_col[r][c] = 1;
        end
      end
    end
    checks++;
    if (took_while_busy) begin
      failures++;
      $display("FAIL: job taken while the Combinator was busy");
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
