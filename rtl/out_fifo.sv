// out_fifo: egress queues of the accelerator.
//
// Every beat carries its egress port; the OUT FIFO writes it into that port's
// queue of DEPTH beats, and each of the NPORTS 100 GbE ports drains its own
// queue. The single input stalls (in_ready low) while the queue the current
// beat is headed for is full, so one port's backlog holds up the others.
// Timing: a beat written in cycle t can leave in cycle t+1.
// The paper shows one OUT FIFO with six 100 GE outputs; the per-port queues
// and depth are this design's.
module out_fifo
  import nr_pkg::*;
#(
  parameter int NPORTS = 6,
  parameter int DEPTH  = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  beat_t             in_beat,
  output logic [NPORTS-1:0] tx_valid,
  input  logic [NPORTS-1:0] tx_ready,
  output beat_t             tx_beat [NPORTS]
);
  localparam int AW = $clog2(DEPTH);

  logic [AW:0] wptr [NPORTS];
  logic [AW:0] rptr [NPORTS];
  logic [NPORTS-1:0] full;

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      full[p]     = (wptr[p][AW] != rptr[p][AW]) && (wptr[p][AW-1:0] == rptr[p][AW-1:0]);
      tx_valid[p] = (wptr[p] != rptr[p]);
    end
  end

  logic port_ok;
  assign port_ok  = int'(in_beat.port) < NPORTS;
  // frames for a port that does not exist are discarded
  assign in_ready = !port_ok || !full[in_beat.port[$clog2(NPORTS)-1:0]];

  // queue storage, one RAM per port, no reset
  for (genvar p = 0; p < NPORTS; p++) begin : g_q
    beat_t mem [DEPTH];
    always_ff @(posedge clk)
      if (in_valid && in_ready && port_ok && int'(in_beat.port) == p) mem[wptr[p][AW-1:0]] <= in_beat;
    assign tx_beat[p] = mem[rptr[p][AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORTS; p++) begin
        wptr[p] <= '0;
        rptr[p] <= '0;
      end
    end else begin
      if (in_valid && in_ready && port_ok) begin
        wptr[in_beat.port[$clog2(NPORTS)-1:0]] <= wptr[in_beat.port[$clog2(NPORTS)-1:0]] + 1'b1;
      end
      for (int p = 0; p < NPORTS; p++)
        if (tx_valid[p] && tx_ready[p]) rptr[p] <= rptr[p] + 1'b1;
    end
  end

endmodule
