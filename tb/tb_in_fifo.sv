// tb_in_fifo: self-checking test of the ingress FIFOs and their merge.
//
// Three ports send random frames of 1 to 4 beats, each beat tagged with its
// port, frame and beat number, while the reader is throttled at random. The
// checker requires that frames come out whole (no beats of another port in
// between), in order per port, with the port field set, and that every beat
// sent comes out exactly once. It also checks that a full FIFO drops
// rx_ready and that, with every port backlogged, the merge serves the ports
// in round-robin order.
module tb_in_fifo;
  import nr_pkg::*;

  localparam int NP = 3, DEPTH = 8, FRAMES = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NP-1:0] rx_valid, rx_ready;
  beat_t rx_beat [NP];
  logic out_valid, out_ready;
  beat_t out_beat;

  in_fifo #(.NPORTS(NP), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  beat_t q [NP][$];       // still to send
  beat_t exp_q [NP][$];   // expected at the output
  int full_seen = 0, rr_ok = 0;

  function automatic beat_t tag(int p, int f, int b, int n);
    beat_t x;
    x = '0;
    x.data[31:0]  = 32'($urandom);
    x.data[63:32] = {8'(p), 16'(f), 8'(b)};
    x.sop = (b == 0);
    x.eop = (b == n - 1);
    x.nbytes = x.eop ? 7'($urandom_range(1, 64)) : 7'd64;
    return x;
  endfunction

  initial begin
    for (int p = 0; p < NP; p++)
      for (int f = 0; f < FRAMES; f++) begin
        int n;
        n = $urandom_range(1, 4);
        for (int b = 0; b < n; b++) begin
          beat_t x;
          x = tag(p, f, b, n);
          q[p].push_back(x);
          x.port = 3'(p);
          exp_q[p].push_back(x);
        end
      end
  end

  always_comb
    for (int p = 0; p < NP; p++) begin
      rx_valid[p] = q[p].size() > 0;
      rx_beat[p]  = q[p].size() > 0 ? q[p][0] : '0;
    end

  int cyc = 0;
  logic phase_hold;   // first 200 cycles: reader stopped, FIFOs fill
  assign phase_hold = cyc < 200;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    out_ready <= phase_hold ? 1'b0 : ($urandom_range(0, 3) != 0);
    if (rst_n) begin
      for (int p = 0; p < NP; p++) begin
        if (rx_valid[p] && rx_ready[p]) void'(q[p].pop_front());
        if (rx_valid[p] && !rx_ready[p]) full_seen++;
      end
    end
  end

  // output checker
  int cur_port = -1, last_frame_port = -1, frames_out = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int p;
      p = int'(out_beat.port);
      checks++;
      if (p >= NP || exp_q[p].size() == 0) begin
        failures++;
        $display("FAIL: beat from port %0d not expected", p);
      end else begin
        beat_t e;
        e = exp_q[p].pop_front();
        if (e != out_beat) begin
          failures++;
          $display("FAIL: port %0d beat %h, expected %h", p, out_beat.data[63:0], e.data[63:0]);
        end
      end
      checks++;
      if (cur_port >= 0 && p != cur_port) begin
        failures++;
        $display("FAIL: frame of port %0d interrupted by port %0d", cur_port, p);
      end
      if (out_beat.sop) begin
        // all ports were backlogged during the first frames after the hold
        if (frames_out > 0 && frames_out < 12) begin
          checks++;
          if (p == (last_frame_port + 1) % NP) rr_ok++;
          else begin
            failures++;
            $display("FAIL: round robin gave port %0d after %0d", p, last_frame_port);
          end
        end
        last_frame_port = p;
        frames_out++;
      end
      cur_port = out_beat.eop ? -1 : p;
    end
  end

  initial begin
    out_ready = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (q[0].size() == 0 && q[1].size() == 0 && q[2].size() == 0);
    repeat (100) @(posedge clk);
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (exp_q[p].size() != 0) begin
        failures++;
        $display("FAIL: %0d beats of port %0d never came out", exp_q[p].size(), p);
      end
    end
    checks++;
    if (full_seen == 0) begin
      failures++;
      $display("FAIL: FIFO never full");
    end
    checks++;
    if (rr_ok == 0) begin
      failures++;
      $display("FAIL: round robin never observed");
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
