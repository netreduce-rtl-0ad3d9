// tb_lut1: self-checking test of LUT#1, the connection -> (RingID, HostID)
// table.
//
// Connections (source IP, destination IP, destination QP) are inserted for
// two rings in a random order; the test expects HostIDs 0, 1, 2 in the order
// of first arrival within each ring, a hit with the stored values for every
// known connection, no effect from a repeated insert, a refusal once a ring
// already has HOSTS connections, misses for unknown connections, and an
// empty table after clear.
module tb_lut1;
  localparam int RINGS = 2, HOSTS = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        clear, lk_hit, ins, ins_ok;
  logic [31:0] lk_sip, lk_dip;
  logic [23:0] lk_qp;
  logic [7:0]  lk_ring, lk_host, ins_ring, ins_host;

  lut1 #(.RINGS(RINGS), .HOSTS(HOSTS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL: %s = %0d, expected %0d", what, got, exp);
    end
  endtask

  function automatic logic [31:0] sip_of(int r, int h); return 32'h0A000000 | 32'(r << 8 | h); endfunction

  task automatic set_key(int r, int h);
    lk_sip = sip_of(r, h);
    lk_dip = sip_of(r, (h + 1) % HOSTS);
    lk_qp  = 24'(100 + r * 10 + h);
  endtask

  int order [RINGS][HOSTS];
  int cnt [RINGS];

  initial begin
    clear = 0; ins = 0; ins_ring = 0; lk_sip = 0; lk_dip = 0; lk_qp = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random arrival order of the connections of both rings
    for (int r = 0; r < RINGS; r++) begin
      cnt[r] = 0;
      for (int h = 0; h < HOSTS; h++) order[r][h] = h;
      order[r].shuffle();
    end
    for (int i = 0; i < HOSTS; i++)
      for (int r = RINGS - 1; r >= 0; r--) begin
        @(negedge clk);
        set_key(r, order[r][i]);
        ins_ring = 8'(r);
        #1;
        check("lookup before insert", lk_hit, 0);
        check("insert accepted", ins_ok, 1);
        check("new HostID", ins_host, cnt[r]);
        ins = 1;
        @(negedge clk);
        ins = 0;
        #1;
        check("hit after insert", lk_hit, 1);
        check("ring", lk_ring, r);
        check("host", lk_host, cnt[r]);
        cnt[r]++;
      end
    // repeated insert changes nothing
    @(negedge clk);
    set_key(0, order[0][0]);
    ins_ring = 0; ins = 1;
    @(negedge clk);
    ins = 0;
    #1;
    check("repeat insert host", lk_host, 0);
    // a fourth connection in ring 1 is refused
    lk_sip = 32'hC0A80001; lk_dip = 32'hC0A80002; lk_qp = 24'h777;
    ins_ring = 1;
    #1;
    check("full ring refuses", ins_ok, 0);
    ins = 1;
    @(negedge clk);
    ins = 0;
    #1;
    check("refused not stored", lk_hit, 0);
    // all known connections still resolve
    for (int r = 0; r < RINGS; r++)
      for (int i = 0; i < HOSTS; i++) begin
        set_key(r, order[r][i]);
        #1;
        check("final hit", lk_hit, 1);
        check("final ring", lk_ring, r);
        check("final host", lk_host, i);
      end
    // unknown connections miss
    repeat (20) begin
      lk_sip = $urandom; lk_dip = $urandom; lk_qp = 24'($urandom);
      #1;
      check("random miss", lk_hit, 0);
    end
    // clear
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    set_key(1, 0);
    ins_ring = 1;
    #1;
    check("cleared miss", lk_hit, 0);
    check("cleared counter", ins_host, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
