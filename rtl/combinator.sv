// combinator: puts headers and the aggregated payload back together into
// complete frames.
//
// The Aggregator fills the staging area (PAY_BYTES of payload, in 64-byte
// beats) and then hands over a job. For a FRESH job the Combinator reads the
// header record of every host of the column from the Header buffer, in host
// order, and sends one frame per host, each carrying the same aggregated
// payload: every held packet goes on to its ring neighbour with its payload
// replaced. For a REPLAY job it sends a single frame with the header of the
// retransmitted packet. Each header passes through the Header Manager on its
// way out.
//
// Frame byte i is header byte i for i < hl and payload byte i-hl otherwise,
// where hl is 54 or 70; a frame is hl + pay_len bytes long and goes out on
// the port its packet came in on. Output beat k is built from at most two
// staging beats with a byte shift, overlaid with the header bytes it holds.
//
// Timing: 2 cycles to fetch a header, then one beat per cycle while out_ready
// is high. The paper gives the block's function; the rest is this design's.
module combinator
  import nr_pkg::*;
#(
  parameter int HOSTS     = 6,
  parameter int PAY_BYTES = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        cfg_hosts,
  output logic              idle,
  // staging writes from the Aggregator
  input  logic              stg_wr,
  input  logic [4:0]        stg_beat,
  input  logic [BEAT_W-1:0] stg_data,
  // job
  input  logic              job_valid,
  output logic              job_ready,
  input  job_t              job,
  // Header buffer read
  output logic              hb_rd,
  output logic [7:0]        hb_ring,
  output logic [15:0]       hb_col,
  output logic [7:0]        hb_host,
  input  hdr_rec_t          hb_data,
  // Header Manager
  output logic              hm_valid,
  output hdr_rec_t          hm_in,
  input  hdr_rec_t          hm_out,
  // frames out
  output logic              out_valid,
  input  logic              out_ready,
  output beat_t             out_beat
);
  localparam int PAY_BEATS = PAY_BYTES / BEAT_BYTES;

  typedef enum logic [2:0] {S_IDLE, S_RD, S_WAIT, S_HDR, S_SEND} st_e;
  st_e  st;
  job_t j;

  logic [BEAT_W-1:0] stg [PAY_BEATS];
  logic [7:0]        host;
  hdr_rec_t          h;      // managed header of the frame being sent
  logic [4:0]        k;      // output beat index

  logic [7:0] nh;
  assign nh = (cfg_hosts == 0) ? 8'd1 : ((int'(cfg_hosts) > HOSTS) ? 8'(HOSTS) : cfg_hosts);

  assign idle      = (st == S_IDLE);
  assign job_ready = (st == S_IDLE);
  assign hb_rd     = (st == S_RD);
  assign hb_ring   = j.ring;
  assign hb_col    = j.col;
  assign hb_host   = host;

  // the raw header goes through the Header Manager in S_HDR
  assign hm_in    = (j.kind == JOB_REPLAY) ? j.hdr : hb_data;
  assign hm_valid = (st == S_HDR);

  function automatic logic [BEAT_W-1:0] stg_at(input int q);
    if (q >= 0 && q < PAY_BEATS) return stg[q];
    return '0;
  endfunction

  // build output beat k of the current frame
  logic [10:0] flen;
  logic [BEAT_W-1:0] pay, hpart, m, data;
  always_comb begin
    int p0, q, s;
    logic [2*BEAT_W-1:0] t;
    logic [2*BEAT_W-1:0] hw;
    flen = 11'(h.hdr_len) + h.pay_len;
    p0   = 64 * int'(k) - int'(h.hdr_len);
    if (p0 >= 0) begin
      q   = p0 / 64;
      s   = p0 % 64;
      t   = {stg_at(q), stg_at(q + 1)} << (8 * s);
      pay = t[2*BEAT_W-1 -: BEAT_W];
    end else begin
      q   = 0;
      s   = 0;
      t   = '0;
      pay = stg_at(0) >> (8 * (-p0));
    end
    hw    = '0;
    hw[2*BEAT_W-1 -: HDR_MAX*8] = h.bytes;
    hpart = (k == 0) ? hw[2*BEAT_W-1 -: BEAT_W] : ((k == 1) ? hw[BEAT_W-1:0] : '0);
    m     = '0;
    for (int b = 0; b < BEAT_BYTES; b++)
      if (64 * int'(k) + b < int'(h.hdr_len)) m[BEAT_W-1-8*b -: 8] = 8'hFF;
    data  = (hpart & m) | (pay & ~m);
  end

  logic last_beat;
  assign last_beat = (64 * (int'(k) + 1) >= int'(flen));

  assign out_valid = (st == S_SEND);
  always_comb begin
    out_beat.data   = data;
    out_beat.sop    = (k == 0);
    out_beat.eop    = last_beat;
    out_beat.nbytes = last_beat ? 7'(int'(flen) - 64 * int'(k)) : 7'd64;
    out_beat.port   = h.port;
  end

  logic last_host;
  assign last_host = (j.kind == JOB_REPLAY) || (host == nh - 8'd1);

  always_ff @(posedge clk) begin
    if (stg_wr && int'(stg_beat) < PAY_BEATS) stg[stg_beat[$clog2(PAY_BEATS)-1:0]] <= stg_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      j    <= '0;
      host <= '0;
      h    <= '0;
      k    <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (job_valid) begin
          j    <= job;
          host <= '0;
          st   <= (job.kind == JOB_REPLAY) ? S_HDR : S_RD;
        end
        S_RD:   st <= S_WAIT;
        S_WAIT: st <= S_HDR;
        S_HDR: begin
          h  <= hm_out;
          k  <= '0;
          st <= S_SEND;
        end
        S_SEND: if (out_ready) begin
          k <= k + 5'd1;
          if (last_beat) begin
            if (last_host) st <= S_IDLE;
            else begin
              host <= host + 8'd1;
              st   <= S_RD;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
