// tb_combinator: self-checking test of the Combinator.
//
// The test fills the staging area with a random aggregated payload, models
// the Header buffer (one cycle read latency) with random header records of
// both lengths (54 and 70 bytes) and stands in for the Header Manager with a
// visible change (the IPv4 TTL byte is inverted), so the frames must carry
// the managed header. A FRESH job must produce one frame per active host, in
// host order, each made of that host's managed header followed by pay_len
// bytes of the staged payload, with correct sop/eop/nbytes and the record's
// port; a REPLAY job must produce one frame from the header it carries. With
// out_ready held high a frame must take (beats + 3) cycles.
module tb_combinator;
  import nr_pkg::*;

  localparam int HOSTS = 4, PAY_BYTES = 1024, BEATS = PAY_BYTES / 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] cfg_hosts, hb_ring, hb_host;
  logic idle, stg_wr, job_valid, job_ready, hb_rd, hm_valid, out_valid, out_ready;
  logic [4:0] stg_beat;
  logic [BEAT_W-1:0] stg_data;
  job_t job;
  logic [15:0] hb_col;
  hdr_rec_t hb_data, hm_in, hm_out;
  beat_t out_beat;

  combinator #(.HOSTS(HOSTS), .PAY_BYTES(PAY_BYTES)) dut (.*);

  int checks = 0, failures = 0;
  hdr_rec_t hbm [HOSTS];
  logic [7:0] pay [PAY_BYTES];
  logic [7:0] got [$];
  int frames_seen;
  bit always_ready;

  // Header buffer model and Header Manager stand-in
  always @(posedge clk) if (hb_rd) hb_data <= hbm[hb_host];
  function automatic hdr_rec_t manage(hdr_rec_t h);
    hdr_rec_t o;
    o = h;
    o.bytes[HDR_MAX*8-1-8*(OFF_IP + 8) -: 8] = ~h.bytes[HDR_MAX*8-1-8*(OFF_IP + 8) -: 8];
    return o;
  endfunction
  assign hm_out = manage(hm_in);

  function automatic hdr_rec_t rnd_hdr(bit first, int port, int plen);
    hdr_rec_t h;
    h = '0;
    h.hdr_len = first ? 7'(HDR_FIRST) : 7'(HDR_BASE);
    for (int i = 0; i < int'(h.hdr_len); i++) h.bytes[HDR_MAX*8-1-8*i -: 8] = 8'($urandom);
    h.pay_len = 11'(plen);
    h.port = 3'(port);
    return h;
  endfunction

  // expected frames, in order
  typedef logic [7:0] bq_t [$];
  bq_t exp_f [$];
  int  exp_port [$];
  int  t_first_sop, t_last_eop, n_beats_total;

  function automatic bq_t build(hdr_rec_t h);
    bq_t f;
    hdr_rec_t m;
    m = manage(h);
    for (int i = 0; i < int'(h.hdr_len); i++) f.push_back(m.bytes[HDR_MAX*8-1-8*i -: 8]);
    for (int i = 0; i < int'(h.pay_len); i++) f.push_back(pay[i]);
    return f;
  endfunction

  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    out_ready <= always_ready ? 1'b1 : ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid && out_ready) begin
      n_beats_total++;
      if (out_beat.sop && t_first_sop < 0) t_first_sop = cyc;
      checks++;
      if (out_beat.sop != (got.size() == 0)) begin
        failures++;
        $display("FAIL: sop flag wrong");
      end
      for (int j = 0; j < int'(out_beat.nbytes); j++) got.push_back(out_beat.data[BEAT_W-1-8*j -: 8]);
      if (out_beat.eop) begin
        t_last_eop = cyc;
        checks++;
        frames_seen++;
        if (exp_f.size() == 0) begin
          failures++;
          $display("FAIL: unexpected frame");
        end else begin
          bq_t e;
          int p;
          e = exp_f.pop_front();
          p = exp_port.pop_front();
          if (e != got || int'(out_beat.port) != p) begin
            failures++;
            $display("FAIL: frame differs (len %0d vs %0d, port %0d vs %0d)", got.size(), e.size(), out_beat.port, p);
          end
        end
        got.delete();
      end
    end
  end

  task automatic stage(int plen);
    for (int i = 0; i < PAY_BYTES; i++) pay[i] = 8'($urandom);
    for (int b = 0; b < BEATS; b++) begin
      @(negedge clk);
      stg_wr = 1; stg_beat = 5'(b);
      for (int j = 0; j < 64; j++) stg_data[BEAT_W-1-8*j -: 8] = pay[64*b + j];
    end
    @(negedge clk);
    stg_wr = 0;
  endtask

  task automatic run(job_kind_e kind, int nh);
    int plen, total_beats;
    bit first;
    first = $urandom_range(0, 1);
    case ($urandom_range(0, 2))
      0: plen = $urandom_range(1, PAY_BYTES - 16);   // message tail
      default: plen = first ? PAY_BYTES - 16 : PAY_BYTES;
    endcase
    wait (idle);
    stage(plen);
    job = '0;
    job.kind = kind; job.ring = 8'($urandom); job.col = 16'($urandom);
    total_beats = 0;
    if (kind == JOB_FRESH) begin
      for (int h = 0; h < HOSTS; h++) hbm[h] = rnd_hdr(first, $urandom_range(0, 5), plen);
      for (int h = 0; h < nh; h++) begin
        exp_f.push_back(build(hbm[h]));
        exp_port.push_back(int'(hbm[h].port));
        total_beats += (int'(hbm[h].hdr_len) + plen + 63) / 64;
      end
    end else begin
      job.hdr = rnd_hdr(first, $urandom_range(0, 5), plen);
      exp_f.push_back(build(job.hdr));
      exp_port.push_back(int'(job.hdr.port));
      total_beats = (int'(job.hdr.hdr_len) + plen + 63) / 64;
    end
    t_first_sop = -1;
    n_beats_total = 0;
    @(negedge clk);
    job_valid = 1;
    @(posedge clk);
    while (!job_ready) @(posedge clk);
    @(negedge clk);
    job_valid = 0;
    wait (exp_f.size() == 0);
    @(negedge clk);
    if (always_ready) begin
      // header fetch (3 cycles) then one beat per cycle, for every frame
      int frames;
      frames = (kind == JOB_FRESH) ? nh : 1;
      checks++;
      if (t_last_eop - t_first_sop + 1 != total_beats + 3 * (frames - 1)) begin
        failures++;
        $display("FAIL: %0d frames took %0d cycles, expected %0d", frames, t_last_eop - t_first_sop + 1,
                 total_beats + 3 * (frames - 1));
      end
    end
  endtask

  initial begin
    cfg_hosts = 8'(HOSTS); stg_wr = 0; stg_beat = 0; stg_data = '0; job_valid = 0; job = '0;
    always_ready = 0; frames_seen = 0;
    foreach (hbm[h]) hbm[h] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (25) run($urandom_range(0, 2) == 0 ? JOB_REPLAY : JOB_FRESH, HOSTS);
    cfg_hosts = 8'd3;
    repeat (10) run(JOB_FRESH, 3);
    always_ready = 1;
    repeat (6) run($urandom_range(0, 1) == 0 ? JOB_REPLAY : JOB_FRESH, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
