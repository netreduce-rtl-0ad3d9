// in_fifo: ingress queues of the accelerator.
//
// Each of the NPORTS 100 GbE ports gets its own beat FIFO of DEPTH entries.
// The queues are merged onto the single processing pipeline a whole frame at
// a time: a round-robin pointer picks the next port with a beat waiting and
// stays on it until that frame's end-of-frame beat has left, so frames never
// interleave. The port number is written into every beat, and the egress side
// uses it to send each frame back out of the port it came in on.
//
// The paper shows one IN FIFO fed by six 100 GE links; the per-port split, the
// depth and the round-robin order are this design's choices. There is no drop
// on overflow: rx_ready[p] falls when queue p is full.
//
// Timing: a beat written in cycle t can leave in cycle t+1; one beat per cycle.
module in_fifo
  import nr_pkg::*;
#(
  parameter int NPORTS = 6,
  parameter int DEPTH  = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NPORTS-1:0] rx_valid,
  output logic [NPORTS-1:0] rx_ready,
  input  beat_t             rx_beat [NPORTS],
  output logic              out_valid,
  input  logic              out_ready,
  output beat_t             out_beat
);
  localparam int AW = $clog2(DEPTH);

  beat_t          head [NPORTS];   // beat at the read pointer of each queue
  logic [AW:0]    wptr [NPORTS];
  logic [AW:0]    rptr [NPORTS];
  logic [NPORTS-1:0] nonempty;

  logic [$clog2(NPORTS)-1:0] cur;      // port being drained
  logic                      in_pkt;   // inside a frame of port cur

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      nonempty[p] = (wptr[p] != rptr[p]);
      rx_ready[p] = !((wptr[p][AW] != rptr[p][AW]) && (wptr[p][AW-1:0] == rptr[p][AW-1:0]));
    end
  end

  // Next port in round-robin order after cur that has a beat waiting.
  logic [$clog2(NPORTS)-1:0] pick;
  logic                      pick_ok;
  always_comb begin
    pick = cur;
    pick_ok = 1'b0;
    for (int i = NPORTS; i >= 1; i--) begin
      int unsigned p;
      p = (int'(cur) + i) % NPORTS;
      if (nonempty[p]) begin
        pick = p[$clog2(NPORTS)-1:0];
        pick_ok = 1'b1;
      end
    end
  end

  logic [$clog2(NPORTS)-1:0] sel;
  assign sel       = in_pkt ? cur : pick;
  assign out_valid = in_pkt ? nonempty[cur] : pick_ok;
  always_comb begin
    out_beat      = head[sel];
    out_beat.port = 3'(sel);
  end

  // queue storage, one RAM per port, no reset
  for (genvar p = 0; p < NPORTS; p++) begin : g_q
    beat_t mem [DEPTH];
    always_ff @(posedge clk)
      if (rx_valid[p] && rx_ready[p]) mem[wptr[p][AW-1:0]] <= rx_beat[p];
    assign head[p] = mem[rptr[p][AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORTS; p++) begin
        wptr[p] <= '0;
        rptr[p] <= '0;
      end
      cur    <= '0;
      in_pkt <= 1'b0;
    end else begin
      for (int p = 0; p < NPORTS; p++) begin
        if (rx_valid[p] && rx_ready[p]) wptr[p] <= wptr[p] + 1'b1;
      end
      if (out_valid && out_ready) begin
        rptr[sel] <= rptr[sel] + 1'b1;
        cur       <= sel;
        in_pkt    <= !out_beat.eop;
      end
    end
  end

endmodule
