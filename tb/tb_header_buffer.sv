// tb_header_buffer: self-checking test of the Header buffer, which keeps the header of every held packet by ring, column and host.
//
// At reduced size, every word is written with data derived from its own
// address, so any mix-up of the address fields shows up; then random reads
// are compared with a model, checking one cycle of read latency, read data
// held while rd_en is low, and that a read of the word being written in the
// same cycle returns the old contents (read before write).
module tb_header_buffer;
  import nr_pkg::*;
  localparam int RINGS = 2;
  localparam int HOSTS = 3;
  localparam int COLS = 5;
  localparam int WORDS = (RINGS) * (COLS) * (HOSTS);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en, rd_en;
  logic [7:0] wr_ring, rd_ring;
  logic [15:0] wr_col, rd_col;
  logic [7:0] wr_host, rd_host;
  hdr_rec_t wr_data, rd_data;

  header_buffer #(.RINGS(RINGS), .HOSTS(HOSTS), .COLS(COLS)) dut (.clk, .wr_en, .wr_ring, .wr_col, .wr_host, .wr_data, .rd_en, .rd_ring, .rd_col, .rd_host, .rd_data);

  int checks = 0, failures = 0;
  hdr_rec_t model [WORDS];

  function automatic hdr_rec_t pattern(int a, int salt);
    hdr_rec_t d;
    d = '0;
    for (int i = 0; i < $bits(d) / 32; i++) d[32*i +: 32] = 32'(a * 977 + i * 31 + salt) ^ $urandom;
    return d;
  endfunction

  task automatic do_write(int ring, int col, int host, hdr_rec_t d);
    wr_ring = 8'(ring); wr_col = 16'(col); wr_host = 8'(host);
    wr_data = d;
    wr_en = 1;
    model[((ring) * (COLS) + col) * (HOSTS) + host] = d;
  endtask

  initial begin
    int ring, col, host;
    hdr_rec_t exp, hold;
    wr_en = 0; rd_en = 0; wr_data = '0; wr_ring = 0; rd_ring = 0; wr_col = 0; rd_col = 0; wr_host = 0; rd_host = 0;
    @(negedge clk);
    // fill every word
    for (int a = 0; a < WORDS; a++) begin
      int t;
      t = a;
      host = t % (HOSTS); t = t / (HOSTS);
      col = t % (COLS); t = t / (COLS);
      ring = t % (RINGS); t = t / (RINGS);
      do_write(ring, col, host, pattern(a, 1));
      @(negedge clk);
      wr_en = 0;
    end
    // random reads, some with a write to the same word in the same cycle
    repeat (600) begin
      ring = $urandom_range(0, (RINGS) - 1);
      col = $urandom_range(0, (COLS) - 1);
      host = $urandom_range(0, (HOSTS) - 1);
      rd_ring = 8'(ring); rd_col = 16'(col); rd_host = 8'(host);
      rd_en = 1;
      exp = model[((ring) * (COLS) + col) * (HOSTS) + host];
      if ($urandom_range(0, 3) == 0) do_write(ring, col, host, pattern($urandom, 2));
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      checks++;
      if (rd_data !== exp) begin
        failures++;
        $display("FAIL: read of word %0d wrong", ((ring) * (COLS) + col) * (HOSTS) + host);
      end
      hold = rd_data;
      @(negedge clk);
      checks++;
      if (rd_data !== hold) begin
        failures++;
        $display("FAIL: read data changed without rd_en");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
