// tb_lut2: self-checking test of LUT#2, the PSN -> (MsgID, offset) table.
//
// For every (ring, host) the test writes message starts the way first
// packets do (MsgID, first PSN, length), with PSNs chosen near 2^24 so that
// messages straddle the wrap, and keeps its own model of the WINDOW most
// recent messages per host. Random PSN lookups are compared with the model:
// a PSN inside one of the remembered messages must hit with that MsgID and
// the PSN's offset in it; any other PSN must miss. Messages older than the
// window must have been replaced. Clear must empty the table.
module tb_lut2;
  localparam int RINGS = 2, HOSTS = 2, WINDOW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        clear, wr, lk_hit;
  logic [7:0]  wr_ring, wr_host, lk_ring, lk_host;
  logic [31:0] wr_msg_id, lk_msg_id;
  logic [23:0] wr_psn0, lk_psn;
  logic [15:0] wr_msg_len, lk_offset;

  lut2 #(.RINGS(RINGS), .HOSTS(HOSTS), .WINDOW(WINDOW)) dut (.*);

  int checks = 0, failures = 0;

  // model: per (ring, host), messages written so far
  typedef struct { int id; logic [23:0] psn0; int len; } msg_t;
  msg_t hist [RINGS][HOSTS][$];
  logic [23:0] next_psn [RINGS][HOSTS];

  task automatic lookup_check(int r, int h, logic [23:0] psn);
    bit hit;
    int id, off;
    hit = 0; id = 0; off = 0;
    // only the last WINDOW messages are remembered
    for (int i = hist[r][h].size() - 1; i >= 0 && i >= hist[r][h].size() - WINDOW; i--) begin
      logic [23:0] d;
      d = psn - hist[r][h][i].psn0;
      if (!hit && int'(d) < hist[r][h][i].len) begin
        hit = 1; id = hist[r][h][i].id; off = int'(d);
      end
    end
    lk_ring = 8'(r); lk_host = 8'(h); lk_psn = psn;
    #1;
    checks++;
    if (lk_hit !== hit || (hit && (lk_msg_id != 32'(id) || lk_offset != 16'(off)))) begin
      failures++;
      $display("FAIL: r%0d h%0d psn %h: hit %0d id %0d off %0d, expected %0d %0d %0d",
               r, h, psn, lk_hit, lk_msg_id, lk_offset, hit, id, off);
    end
  endtask

  initial begin
    clear = 0; wr = 0; wr_ring = 0; wr_host = 0; wr_msg_id = 0; wr_psn0 = 0; wr_msg_len = 0;
    lk_ring = 0; lk_host = 0; lk_psn = 0;
    for (int r = 0; r < RINGS; r++)
      for (int h = 0; h < HOSTS; h++) next_psn[r][h] = 24'hFFFFC0 - 24'(r * 16 + h * 8);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 6; m++)
      for (int r = 0; r < RINGS; r++)
        for (int h = 0; h < HOSTS; h++) begin
          msg_t x;
          x.id = m; x.psn0 = next_psn[r][h]; x.len = $urandom_range(1, 40);
          next_psn[r][h] += 24'(x.len);
          hist[r][h].push_back(x);
          @(negedge clk);
          wr = 1; wr_ring = 8'(r); wr_host = 8'(h); wr_msg_id = 32'(x.id);
          wr_psn0 = x.psn0; wr_msg_len = 16'(x.len);
          @(negedge clk);
          wr = 0;
          // lookups in, around and outside the remembered messages
          for (int k = 0; k < 12; k++) begin
            int rr, hh, pick;
            rr = $urandom_range(0, RINGS - 1);
            hh = $urandom_range(0, HOSTS - 1);
            if (hist[rr][hh].size() == 0) continue;
            pick = $urandom_range(0, hist[rr][hh].size() - 1);
            lookup_check(rr, hh, hist[rr][hh][pick].psn0 + 24'($urandom_range(0, 45)) - 24'd3);
          end
        end
    repeat (30) lookup_check($urandom_range(0, RINGS - 1), $urandom_range(0, HOSTS - 1), 24'($urandom));
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    lk_ring = 0; lk_host = 0; lk_psn = hist[0][0][$].psn0;
    #1;
    checks++;
    if (lk_hit) begin
      failures++;
      $display("FAIL: hit after clear");
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
