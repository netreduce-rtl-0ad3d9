// tb_out_fifo: self-checking test of the egress FIFOs.
//
// Frames of 1 to 5 beats, each addressed to one of three ports by its port
// field, arrive one beat at a time; every port drains at its own random
// rate. Each port must deliver exactly its own frames, in order and
// unchanged. While one port's FIFO is full and the next beat is for it, the
// input must be held back (in_ready low); this must happen at least once.
module tb_out_fifo;
  import nr_pkg::*;

  localparam int NP = 3, DEPTH = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_ready;
  beat_t in_beat;
  logic [NP-1:0] tx_valid, tx_ready;
  beat_t tx_beat [NP];

  out_fifo #(.NPORTS(NP), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, held = 0;
  beat_t q [$];
  int    qi = 0;   // next beat of q to offer; advanced with <= so the DUT samples the old beat
  beat_t e [NP][$];

  assign in_valid = qi < q.size();
  assign in_beat  = qi < q.size() ? q[qi] : '0;

  always @(posedge clk) begin
    for (int p = 0; p < NP; p++) tx_ready[p] <= $urandom_range(0, 4) < (p + 1);
    if (rst_n) begin
      if (in_valid && in_ready) qi <= qi + 1;
      if (in_valid && !in_ready) held++;
      for (int p = 0; p < NP; p++)
        if (tx_valid[p] && tx_ready[p]) begin
          checks++;
          if (e[p].size() == 0 || e[p].pop_front() != tx_beat[p]) begin
            failures++;
            $display("FAIL: port %0d beat wrong", p);
          end
        end
    end
  end

  initial begin
    tx_ready = '0;
    for (int i = 0; i < 200; i++) begin
      int n, p;
      n = $urandom_range(1, 5);
      p = $urandom_range(0, NP - 1);
      for (int j = 0; j < n; j++) begin
        beat_t b;
        b.data = {16{$urandom}};
        b.sop = (j == 0); b.eop = (j == n - 1);
        b.nbytes = 7'($urandom_range(1, 64));
        b.port = 3'(p);
        q.push_back(b);
        e[p].push_back(b);
      end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (qi == q.size());
    repeat (200) @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (e[p].size() != 0) begin
        failures++;
        $display("FAIL: port %0d lost %0d beats", p, e[p].size());
      end
    end
    checks++;
    if (held == 0) begin
      failures++;
      $display("FAIL: input never held back");
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
