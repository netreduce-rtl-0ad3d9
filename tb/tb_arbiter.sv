// tb_arbiter: self-checking test of the Arbiter.
//
// Random frames (1 to 20 beats, any length) arrive with random gaps. The test
// stands in for the Parser and State Manager: for each request it checks the
// 128-byte window (the frame's first bytes, their count and the port) and
// answers two cycles later with a random decision. It then checks that every
// BYPASS frame comes out of the bypass path unchanged and in order, every
// STORE / STORE_AGG / REPLAY frame comes out of the Separator path unchanged
// with its decision held for the whole frame, and DROP frames vanish; both
// outputs are throttled at random. While sm_busy is high no request may be
// made.
module tb_arbiter;
  import nr_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic sm_busy, in_valid, in_ready, p_req, dec_valid, byp_valid, byp_ready, sep_valid, sep_ready;
  beat_t in_beat, byp_beat, sep_beat;
  logic [2*BEAT_W-1:0] p_win;
  logic [7:0] p_win_bytes;
  logic [2:0] p_port;
  decision_t dec, sep_dec;

  arbiter dut (.*);

  int checks = 0, failures = 0;
  typedef beat_t frame_t [$];
  frame_t frames [$];           // to send
  frame_t req_q [$];            // sent, awaiting a request
  frame_t exp_byp [$], exp_sep [$];
  decision_t exp_dec [$];
  int n_act [5];
  int busy_req = 0;
  bit all_sent = 0;

  task automatic fail(string s);
    failures++;
    $display("FAIL: %s", s);
  endtask

  // input driver
  initial begin
    in_valid = 0; in_beat = '0;
    wait (rst_n);
    foreach (frames[i]) begin
      req_q.push_back(frames[i]);
      foreach (frames[i][j]) begin
        while ($urandom_range(0, 4) == 0) @(negedge clk);
        in_valid = 1; in_beat = frames[i][j];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
      end
    end
    all_sent = 1;
  end

  // Parser / State Manager stand-in
  decision_t pend [$];
  int pend_t [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    dec_valid <= 1'b0;
    byp_ready <= $urandom_range(0, 2) != 0;
    sep_ready <= $urandom_range(0, 2) != 0;
    if (rst_n && p_req) begin
      frame_t f;
      decision_t d;
      int n;
      checks++;
      if (sm_busy) busy_req++;
      if (req_q.size() == 0) fail("request without a frame");
      else begin
        f = req_q.pop_front();
        n = 0;
        foreach (f[j]) if (j < 2) n += int'(f[j].nbytes);
        checks++;
        if (int'(p_win_bytes) != n || p_port != f[0].port) fail($sformatf("window bytes %0d, expected %0d ", p_win_bytes, n));
        for (int j = 0; j < n; j++) begin
          logic [7:0] eb;
          eb = f[j / 64].data[BEAT_W-1-8*(j % 64) -: 8];
          if (p_win[2*BEAT_W-1-8*j -: 8] != eb) begin
            fail($sformatf("window byte %0d", j));
            break;
          end
        end
        d = decision_t'({$urandom, $urandom});
        d.act = action_e'($urandom_range(0, 4));
        n_act[d.act]++;
        pend.push_back(d);
        pend_t.push_back(cyc + 1);
        if (d.act == ACT_BYPASS) exp_byp.push_back(f);
        else if (d.act != ACT_DROP) begin
          exp_sep.push_back(f);
          exp_dec.push_back(d);
        end
      end
    end
    if (pend.size() > 0 && cyc >= pend_t[0]) begin
      dec_valid <= 1'b1;
      dec <= pend.pop_front();
      void'(pend_t.pop_front());
    end
  end

  // output checkers
  int bi = 0, si = 0;
  frame_t byp_cur, sep_cur;
  always @(posedge clk) begin
    if (rst_n && byp_valid && byp_ready) begin
      byp_cur.push_back(byp_beat);
      if (byp_beat.eop) begin
        checks++;
        if (exp_byp.size() == 0) fail("unexpected bypass frame");
        else if (exp_byp.pop_front() != byp_cur) fail("bypass frame changed");
        byp_cur.delete();
      end
    end
    if (rst_n && sep_valid && sep_ready) begin
      sep_cur.push_back(sep_beat);
      checks++;
      if (exp_dec.size() == 0 || sep_dec != exp_dec[0]) fail("separator decision");
      if (sep_beat.eop) begin
        checks++;
        if (exp_sep.size() == 0) fail("unexpected separator frame");
        else if (exp_sep.pop_front() != sep_cur) fail("separator frame changed");
        if (exp_dec.size() > 0) void'(exp_dec.pop_front());
        sep_cur.delete();
      end
    end
  end

  initial begin
    sm_busy = 1; dec = '0; dec_valid = 0; byp_ready = 0; sep_ready = 0;
    foreach (n_act[i]) n_act[i] = 0;
    for (int i = 0; i < 150; i++) begin
      frame_t f;
      int n, last;
      f.delete();
      n = ($urandom_range(0, 1) == 0) ? $urandom_range(1, 3) : $urandom_range(1, 20);
      last = $urandom_range(1, 64);
      for (int j = 0; j < n; j++) begin
        beat_t b;
        b.data = {16{$urandom}};
        b.data[BEAT_W-1 -: 32] = 32'(i);
        b.sop = (j == 0); b.eop = (j == n - 1);
        b.nbytes = b.eop ? 7'(last) : 7'd64;
        b.port = 3'($urandom_range(0, 5));
        if (j > 0) b.port = f[0].port;
        f.push_back(b);
      end
      frames.push_back(f);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (30) @(negedge clk);
    sm_busy = 0;
    wait (all_sent);
    repeat (50) @(negedge clk);
    checks++;
    if (busy_req != 0) fail("request while the State Manager was busy");
    checks++;
    if (exp_byp.size() != 0 || exp_sep.size() != 0) fail("frames lost");
    for (int a = 0; a < 5; a++) begin
      checks++;
      if (n_act[a] == 0) fail($sformatf("action %0d never seen", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
