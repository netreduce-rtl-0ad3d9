// tb_separator: self-checking test of the Separator.
//
// Aggregation frames of both header lengths (70-byte first packets, 54-byte
// others), full-size and short, are fed with random gaps and a random
// job_ready, each with a decision. The test then compares what reached the
// buffers with the frame it sent: for STORE and STORE_AGG every payload beat
// (payload bytes 64q .. 64q+63, zero-padded at the end) at the decision's
// (ring, column, host) and the header record (bytes, lengths, port); for
// STORE_AGG and REPLAY exactly one job of the right kind, after the last
// payload beat was written; for DROP and REPLAY no buffer write at all.
module tb_separator;
  import nr_pkg::*;
  import nr_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, hb_wr, pb_wr, job_valid, job_ready;
  beat_t in_beat;
  decision_t in_dec;
  logic [7:0] hb_ring, hb_host, pb_ring, pb_host;
  logic [15:0] hb_col, pb_col;
  hdr_rec_t hb_data;
  logic [4:0] pb_beat;
  logic [BEAT_W-1:0] pb_data;
  job_t job;

  separator #(.PAY_BYTES(1024)) dut (.*);

  int checks = 0, failures = 0;
  int n_act [5];

  // what the DUT wrote during the current frame
  logic [BEAT_W-1:0] pb_got [int];
  hdr_rec_t hb_got [$];
  int hb_key [$];
  job_t jobs [$];
  int pb_writes_at_job;
  int pb_writes;

  always @(posedge clk) begin
    job_ready <= ($urandom_range(0, 2) != 0);
    if (rst_n) begin
      if (pb_wr) begin
        pb_got[((int'(pb_ring) * 4096 + int'(pb_col)) * 8 + int'(pb_host)) * 32 + int'(pb_beat)] = pb_data;
        pb_writes++;
      end
      if (hb_wr) begin
        hb_got.push_back(hb_data);
        hb_key.push_back((int'(hb_ring) * 4096 + int'(hb_col)) * 8 + int'(hb_host));
      end
      if (job_valid && job_ready) begin
        jobs.push_back(job);
        pb_writes_at_job = pb_writes;
      end
    end
  end

  task automatic fail(string s);
    failures++;
    $display("FAIL: %s", s);
  endtask

  task automatic one_frame(bit first, int npay_words, action_e act);
    byte_q_t f;
    beat_q_t b;
    logic [31:0] pay [$];
    decision_t dec;
    int hl, plen, key, port;
    for (int i = 0; i < npay_words; i++) pay.push_back($urandom);
    f = mk_frame(48'($urandom), 48'($urandom), $urandom, $urandom, 24'($urandom), 24'($urandom),
                 first ? OP_SEND_FIRST : OP_SEND_MIDDLE, first, INET_TAG, 32'd1, 32'd7, 32'd3, pay);
    port = $urandom_range(0, 5);
    b = to_beats(f, port);
    dec = '0;
    dec.act = act; dec.first = first;
    dec.ring = 8'($urandom_range(0, 7)); dec.host = 8'($urandom_range(0, 5));
    dec.col = 16'($urandom_range(0, 509));
    hl = first ? 70 : 54;
    plen = f.size() - hl;
    key = (int'(dec.ring) * 4096 + int'(dec.col)) * 8 + int'(dec.host);
    pb_got.delete(); hb_got.delete(); hb_key.delete(); jobs.delete();
    pb_writes = 0; pb_writes_at_job = -1;
    n_act[act]++;
    foreach (b[i]) begin
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      in_valid = 1; in_beat = b[i]; in_dec = (i == 0) ? dec : decision_t'($urandom);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
    repeat (12) @(negedge clk);
    // payload
    if (act == ACT_STORE || act == ACT_STORE_AGG) begin
      for (int q = 0; q < (plen + 63) / 64; q++) begin
        logic [BEAT_W-1:0] e;
        e = '0;
        for (int j = 0; j < 64; j++) e[BEAT_W-1-8*j -: 8] = (64*q + j < plen) ? f[hl + 64*q + j] : 8'h00;
        checks++;
        if (!pb_got.exists(key * 32 + q)) fail($sformatf("payload beat %0d not written", q));
        else begin
          logic [BEAT_W-1:0] g, m;
          g = pb_got[key * 32 + q];
          // bytes past the payload end are don't-care
          m = '0;
          for (int j = 0; j < 64; j++) if (64*q + j < plen) m[BEAT_W-1-8*j -: 8] = 8'hFF;
          if ((g & m) != (e & m)) fail($sformatf("payload beat %0d wrong (first=%0d)", q, first));
        end
      end
      checks++;
      if (pb_got.size() != (plen + 63) / 64) fail($sformatf("%0d payload writes", pb_got.size()));
      checks++;
      if (hb_got.size() != 1 || hb_key[0] != key) fail("header record not written once at its place");
      else begin
        hdr_rec_t r;
        r = hb_got[0];
        checks++;
        if (int'(r.hdr_len) != hl || int'(r.pay_len) != plen || int'(r.port) != port)
          fail($sformatf("record lengths %0d/%0d port %0d", r.hdr_len, r.pay_len, r.port));
        for (int i = 0; i < HDR_MAX; i++) begin
          checks++;
          if (r.bytes[HDR_MAX*8-1-8*i -: 8] != (i < hl ? f[i] : 8'h00)) begin
            fail($sformatf("record byte %0d", i));
            break;
          end
        end
      end
    end else begin
      checks++;
      if (pb_got.size() != 0 || hb_got.size() != 0) fail("buffers written for a frame not stored");
    end
    // jobs
    checks++;
    if (act == ACT_STORE_AGG || act == ACT_REPLAY) begin
      if (jobs.size() != 1) fail($sformatf("%0d jobs", jobs.size()));
      else begin
        checks++;
        if (jobs[0].kind != (act == ACT_REPLAY ? JOB_REPLAY : JOB_FRESH) || jobs[0].ring != dec.ring ||
            jobs[0].col != dec.col)
          fail("job fields");
        checks++;
        if (act == ACT_STORE_AGG && pb_writes_at_job < (plen + 63) / 64)
          fail("job issued before the last payload beat was written");
        checks++;
        if (act == ACT_REPLAY && (int'(jobs[0].hdr.hdr_len) != hl || jobs[0].hdr.bytes[HDR_MAX*8-1 -: 48] != {f[0], f[1], f[2], f[3], f[4], f[5]}))
          fail("replay job header");
      end
    end else if (jobs.size() != 0) fail("unexpected job");
  endtask

  initial begin
    in_valid = 0; in_beat = '0; in_dec = '0; job_ready = 0;
    foreach (n_act[i]) n_act[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (60) begin
      action_e a;
      bit first;
      int words;
      a = action_e'($urandom_range(1, 4));
      first = $urandom_range(0, 1);
      case ($urandom_range(0, 3))
        0: words = $urandom_range(1, 120);      // short message tail
        default: words = first ? 252 : 256;     // 1 KB of payload
      endcase
      one_frame(first, words, a);
    end
    for (int a = 1; a < 5; a++) begin
      checks++;
      if (n_act[a] == 0) fail($sformatf("action %0d never tested", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
