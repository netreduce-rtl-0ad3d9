// tb_out_selector: self-checking test of the Output Selector.
//
// Two sources (aggregation results and bypassed frames) offer random frames
// with random gaps while the output is throttled at random. Every frame must
// come out whole (never interleaved with the other source), each source's
// frames in order and unchanged, and none lost. When both sources have a
// frame waiting, they must take turns.
module tb_out_selector;
  import nr_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in0_valid, in0_ready, in1_valid, in1_ready, out_valid, out_ready;
  beat_t in0_beat, in1_beat, out_beat;

  out_selector dut (.*);

  int checks = 0, failures = 0;
  beat_t q0 [$], q1 [$], e0 [$], e1 [$];
  int src_of_frame = -1, last_src = -1, turns_ok = 0;
  bit other_waiting;

  task automatic fail(string s);
    failures++;
    $display("FAIL: %s", s);
  endtask

  function automatic void mk(int src, int i, ref beat_t q [$], ref beat_t e [$]);
    int n;
    n = $urandom_range(1, 5);
    for (int j = 0; j < n; j++) begin
      beat_t b;
      b.data = {16{$urandom}};
      b.data[BEAT_W-1 -: 32] = {8'(src), 16'(i), 8'(j)};
      b.sop = (j == 0); b.eop = (j == n - 1);
      b.nbytes = 7'($urandom_range(1, 64));
      b.port = 3'($urandom_range(0, 5));
      q.push_back(b);
      e.push_back(b);
    end
  endfunction

  // sources: a beat is held until taken; gaps only between beats taken
  logic g0, g1;
  always @(posedge clk) begin
    g0 <= $urandom_range(0, 3) != 0;
    g1 <= $urandom_range(0, 3) != 0;
    out_ready <= $urandom_range(0, 3) != 0;
    if (rst_n) begin
      if (in0_valid && in0_ready) void'(q0.pop_front());
      if (in1_valid && in1_ready) void'(q1.pop_front());
    end
  end
  logic h0, h1;   // a source keeps valid once it raised it
  always @(posedge clk) begin
    if (!rst_n) begin h0 <= 0; h1 <= 0; end
    else begin
      h0 <= in0_valid && !in0_ready;
      h1 <= in1_valid && !in1_ready;
    end
  end
  assign in0_valid = q0.size() > 0 && (g0 || h0);
  assign in1_valid = q1.size() > 0 && (g1 || h1);
  assign in0_beat  = q0.size() > 0 ? q0[0] : '0;
  assign in1_beat  = q1.size() > 0 ? q1[0] : '0;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int s;
      s = int'(out_beat.data[BEAT_W-1 -: 8]);
      checks++;
      if (src_of_frame >= 0 && s != src_of_frame) fail("frames interleaved");
      if (s == 0) begin
        if (e0.size() == 0 || e0.pop_front() != out_beat) fail("source 0 beat wrong");
      end else begin
        if (e1.size() == 0 || e1.pop_front() != out_beat) fail("source 1 beat wrong");
      end
      if (out_beat.sop) begin
        // the other source had a frame waiting when this one was chosen
        if (other_waiting && last_src >= 0) begin
          checks++;
          if (s == last_src) fail("same source twice while the other waited");
          else turns_ok++;
        end
        last_src = s;
      end
      src_of_frame = out_beat.eop ? -1 : s;
    end
    other_waiting = in0_valid && in1_valid;
  end

  initial begin
    out_ready = 0;
    for (int i = 0; i < 150; i++) begin
      mk(0, i, q0, e0);
      mk(1, i, q1, e1);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (e0.size() == 0 && e1.size() == 0);
    repeat (5) @(negedge clk);
    checks++;
    if (turns_ok == 0) fail("never saw both sources waiting");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, %0d/%0d left", e0.size(), e1.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
