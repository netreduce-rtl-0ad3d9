// tb_state_record: self-checking test of the State record memory.
//
// After reset the record must sweep itself to zero (busy high while it does)
// and read all zeros. Then random writes on both ports, including writes to
// the same word in the same cycle (port 0 must win), are checked against a
// model, reading both read ports every cycle. Finally clear must zero the
// whole record again, and writes must be ignored while the sweep runs.
module tb_state_record;
  localparam int RINGS = 2, HOSTS = 3, COLS = 5, WORDS = RINGS * COLS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, busy, wr0, wr1;
  logic [7:0] rd0_ring, rd1_ring, wr0_ring, wr1_ring;
  logic [15:0] rd0_col, rd1_col, wr0_col, wr1_col;
  logic [HOSTS-1:0] rd0_bits, rd1_bits, wr0_bits, wr1_bits;

  state_record #(.RINGS(RINGS), .HOSTS(HOSTS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  logic [HOSTS-1:0] model [RINGS][COLS];
  int busy_cycles;

  task automatic read_all_check(string what);
    for (int r = 0; r < RINGS; r++)
      for (int c = 0; c < COLS; c++) begin
        rd0_ring = 8'(r); rd0_col = 16'(c);
        rd1_ring = 8'(RINGS - 1 - r); rd1_col = 16'(COLS - 1 - c);
        #1;
        checks += 2;
        if (rd0_bits != model[r][c]) begin
          failures++;
          $display("FAIL: %s r%0d c%0d port0 %b, expected %b", what, r, c, rd0_bits, model[r][c]);
        end
        if (rd1_bits != model[RINGS-1-r][COLS-1-c]) begin
          failures++;
          $display("FAIL: %s r%0d c%0d port1 %b", what, RINGS - 1 - r, COLS - 1 - c, rd1_bits);
        end
      end
  endtask

  task automatic wait_sweep();
    busy_cycles = 0;
    while (busy) begin
      @(negedge clk);
      busy_cycles++;
    end
    checks++;
    if (busy_cycles < WORDS - 1 || busy_cycles > WORDS + 1) begin
      failures++;
      $display("FAIL: sweep took %0d cycles, expected about %0d", busy_cycles, WORDS);
    end
  endtask

  initial begin
    clear = 0; wr0 = 0; wr1 = 0;
    rd0_ring = 0; rd1_ring = 0; rd0_col = 0; rd1_col = 0;
    wr0_ring = 0; wr1_ring = 0; wr0_col = 0; wr1_col = 0; wr0_bits = 0; wr1_bits = 0;
    foreach (model[r, c]) model[r][c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    wait_sweep();
    read_all_check("after reset");
    repeat (300) begin
      @(negedge clk);
      wr0 = $urandom_range(0, 1); wr1 = $urandom_range(0, 1);
      wr0_ring = 8'($urandom_range(0, RINGS - 1)); wr0_col = 16'($urandom_range(0, COLS - 1));
      if ($urandom_range(0, 3) == 0) begin
        wr1_ring = wr0_ring; wr1_col = wr0_col;     // same word: port 0 wins
      end else begin
        wr1_ring = 8'($urandom_range(0, RINGS - 1)); wr1_col = 16'($urandom_range(0, COLS - 1));
      end
      wr0_bits = HOSTS'($urandom); wr1_bits = HOSTS'($urandom);
      @(posedge clk);
      if (wr1) model[wr1_ring][wr1_col] = wr1_bits;
      if (wr0) model[wr0_ring][wr0_col] = wr0_bits;
      @(negedge clk);
      wr0 = 0; wr1 = 0;
      rd0_ring = 8'($urandom_range(0, RINGS - 1)); rd0_col = 16'($urandom_range(0, COLS - 1));
      rd1_ring = 8'($urandom_range(0, RINGS - 1)); rd1_col = 16'($urandom_range(0, COLS - 1));
      #1;
      checks += 2;
      if (rd0_bits != model[rd0_ring][rd0_col] || rd1_bits != model[rd1_ring][rd1_col]) begin
        failures++;
        $display("FAIL: random read mismatch");
      end
    end
    read_all_check("after writes");
    // clear, with a write attempted during the sweep
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    wr0 = 1; wr0_ring = 0; wr0_col = 0; wr0_bits = '1;
    @(negedge clk);
    wr0 = 0;
    wait_sweep();
    foreach (model[r, c]) model[r][c] = '0;
    read_all_check("after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
