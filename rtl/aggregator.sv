// aggregator: sums the payloads of a complete column and selects the payload
// of outgoing packets.
//
// A FRESH job names a (ring, column) whose packets from all H hosts are in
// the Payload buffer. For each of the PAY_BYTES/64 payload beats the
// Aggregator reads the H hosts' beats one per cycle and adds them lane by
// lane: the payload is a vector of 32-bit big-endian two's-complement
// fixed-point gradients, 16 per beat, and the sum wraps modulo 2^32. Each
// summed beat is written to the History result buffer at (ring, column) and
// into the Combinator's staging area.
// A REPLAY job, for a retransmitted packet of a column aggregated earlier,
// reads the result back from the History result buffer into the staging area
// instead. Choosing between the two sources is the job of the Selector that
// the paper places between the Aggregator / History result and the
// Combinator; here it is the multiplexer on the staging write data.
// When the payload is staged, the job is passed on to the Combinator.
//
// A job is only taken while the Combinator is idle, since the staging area is
// shared. emit_valid rises PAY_BEATS*H + 1 cycles after a FRESH job is taken
// (PAY_BEATS + 1 for a REPLAY job).
//
// Summing only after all packets of a column have arrived, keeping the
// results, and replaying them for retransmissions are the paper's. The
// number format is the paper's fixed-point choice (it also mentions floating
// point, which is not built here); the lane width, wrap-around and the
// one-read-per-cycle schedule are this design's.
module aggregator
  import nr_pkg::*;
#(
  parameter int HOSTS     = 6,
  parameter int PAY_BYTES = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        cfg_hosts,
  input  logic              job_valid,
  output logic              job_ready,
  input  job_t              job,
  // Payload buffer read
  output logic              pb_rd,
  output logic [7:0]        pb_ring,
  output logic [15:0]       pb_col,
  output logic [7:0]        pb_host,
  output logic [4:0]        pb_beat,
  input  logic [BEAT_W-1:0] pb_data,
  // History result buffer
  output logic              hist_wr,
  output logic              hist_rd,
  output logic [7:0]        hist_ring,
  output logic [15:0]       hist_col,
  output logic [4:0]        hist_wbeat,
  output logic [4:0]        hist_rbeat,
  output logic [BEAT_W-1:0] hist_wdata,
  input  logic [BEAT_W-1:0] hist_rdata,
  // Combinator
  input  logic              cmb_idle,
  output logic              stg_wr,
  output logic [4:0]        stg_beat,
  output logic [BEAT_W-1:0] stg_data,
  output logic              emit_valid,
  input  logic              emit_ready,
  output job_t              emit_job
);
  localparam int PAY_BEATS = PAY_BYTES / BEAT_BYTES;
  localparam int LANES     = BEAT_W / 32;

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN, S_EMIT} st_e;
  st_e  st;
  job_t j;

  logic [4:0] ib;      // beat being issued
  logic [7:0] ih;      // host being issued
  // read pipeline tags, one cycle behind the issue
  logic       rv, rfirst, rlast;
  logic [4:0] rb;
  logic [BEAT_W-1:0] acc;

  function automatic logic [BEAT_W-1:0] lane_add(input logic [BEAT_W-1:0] a, input logic [BEAT_W-1:0] b);
    logic [BEAT_W-1:0] r;
    for (int l = 0; l < LANES; l++) r[32*l +: 32] = a[32*l +: 32] + b[32*l +: 32];
    return r;
  endfunction

  logic [7:0] nh;
  assign nh = (cfg_hosts == 0) ? 8'd1 : ((int'(cfg_hosts) > HOSTS) ? 8'(HOSTS) : cfg_hosts);

  logic issuing, fresh, last_issue, beat_end;
  assign issuing    = (st == S_ISSUE);
  assign fresh      = (j.kind == JOB_FRESH);
  assign beat_end   = fresh ? (ih == nh - 8'd1) : 1'b1;
  assign last_issue = beat_end && (int'(ib) == PAY_BEATS - 1);

  assign job_ready = (st == S_IDLE) && cmb_idle;

  assign pb_rd    = issuing && fresh;
  assign pb_ring  = j.ring;
  assign pb_col   = j.col;
  assign pb_host  = ih;
  assign pb_beat  = ib;
  assign hist_rd  = issuing && !fresh;
  assign hist_rbeat = ib;
  assign hist_ring = j.ring;
  assign hist_col  = j.col;

  // Selector: fresh sum or history result
  logic [BEAT_W-1:0] sum;
  assign sum = lane_add(rfirst ? '0 : acc, pb_data);

  always_comb begin
    hist_wr    = rv && fresh && rlast;
    hist_wbeat = rb;
    hist_wdata = sum;
    stg_wr     = rv && rlast;
    stg_beat   = rb;
    stg_data   = fresh ? sum : hist_rdata;
  end

  assign emit_valid = (st == S_EMIT);
  assign emit_job   = j;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      j  <= '0;
      ib <= '0; ih <= '0;
      rv <= 1'b0; rfirst <= 1'b0; rlast <= 1'b0; rb <= '0;
      acc <= '0;
    end else begin
      rv     <= issuing;
      rfirst <= (ih == 0);
      rlast  <= beat_end;
      rb     <= ib;
      if (rv) acc <= sum;
      unique case (st)
        S_IDLE: if (job_valid && job_ready) begin
          j  <= job;
          ib <= '0;
          ih <= '0;
          st <= S_ISSUE;
        end
        S_ISSUE: begin
          if (last_issue) st <= S_DRAIN;
          if (beat_end) begin
            ih <= '0;
            ib <= ib + 5'd1;
          end else begin
            ih <= ih + 8'd1;
          end
        end
        S_DRAIN: st <= S_EMIT;
        S_EMIT:  if (emit_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
