// separator: splits an aggregation frame into its headers and its payload.
//
// The headers (Ethernet, IPv4, UDP, BTH and, on a first packet, the NetReduce
// header) are 54 or 70 bytes long, so the payload starts in the middle of a
// beat. The Separator realigns it: payload beat q is made of frame bytes
// hl+64q .. hl+64q+63, taken from two consecutive frame beats with a byte
// shift of hl mod 64. The header bytes are collected into a header record.
//
// What happens next depends on the State Manager's decision for the frame:
//   STORE      payload beats go to the Payload buffer, the record to the
//              Header buffer, both at (ring, column, host);
//   STORE_AGG  the same, and once the last beat is written a FRESH job for
//              (ring, column) goes to the Aggregator;
//   REPLAY     nothing is stored; a REPLAY job carrying the record goes to
//              the Aggregator so the history result is sent back.
// The input stalls for one cycle at the end of a frame when the last payload
// beat still has to be flushed, and while a job waits to be accepted.
//
// The split itself is the paper's; realignment, record format and job
// hand-off are this design's. Payload beyond PAY_BYTES is not stored.
module separator
  import nr_pkg::*;
#(
  parameter int PAY_BYTES = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  beat_t       in_beat,
  input  decision_t   in_dec,
  // Header buffer write
  output logic        hb_wr,
  output logic [7:0]  hb_ring,
  output logic [15:0] hb_col,
  output logic [7:0]  hb_host,
  output hdr_rec_t    hb_data,
  // Payload buffer write
  output logic              pb_wr,
  output logic [7:0]        pb_ring,
  output logic [15:0]       pb_col,
  output logic [7:0]        pb_host,
  output logic [4:0]        pb_beat,
  output logic [BEAT_W-1:0] pb_data,
  // job to the Aggregator
  output logic        job_valid,
  input  logic        job_ready,
  output job_t        job
);
  localparam int PAY_BEATS = PAY_BYTES / BEAT_BYTES;

  typedef enum logic [1:0] {S_RUN, S_FLUSH, S_JOB} st_e;
  st_e st;

  logic [BEAT_W-1:0] prev;      // previous frame beat
  logic [4:0]        k;         // index of the current frame beat
  logic [2*BEAT_W-1:0] hwin;    // first two frame beats
  logic [10:0]       flen;      // frame length so far
  decision_t         d;         // decision of the frame in flight
  hdr_rec_t          rec;

  logic [6:0] hl;
  logic [5:0] sh;
  logic [1:0] base;
  decision_t  dd;
  assign dd   = (k == 0) ? in_dec : d;
  assign hl   = dd.first ? 7'(HDR_FIRST) : 7'(HDR_BASE);
  assign sh   = hl[5:0];
  assign base = {1'b0, hl[6]};

  logic store;
  assign store = (dd.act == ACT_STORE) || (dd.act == ACT_STORE_AGG);

  function automatic logic [BEAT_W-1:0] realign(input logic [BEAT_W-1:0] a,
                                                input logic [BEAT_W-1:0] b,
                                                input logic [5:0] s);
    logic [2*BEAT_W-1:0] t;
    t = {a, b} << (8 * s);
    return t[2*BEAT_W-1 -: BEAT_W];
  endfunction

  // Payload beat produced by the current frame beat (k >= base+1).
  logic       emit_now;
  logic [4:0] q_now;
  assign emit_now = (k >= 5'(base) + 5'd1);
  assign q_now    = k - 5'(base) - 5'd1;

  logic [10:0] flen_eop, pay_len_eop;
  logic [4:0]  need_beats, done_beats;
  assign flen_eop    = flen + 11'(in_beat.nbytes);
  assign pay_len_eop = flen_eop - 11'(hl);
  assign need_beats  = 5'((pay_len_eop + 11'd63) >> 6);
  assign done_beats  = emit_now ? (k - 5'(base)) : 5'd0;

  assign in_ready = (st == S_RUN);

  // header record from the first two beats
  function automatic hdr_rec_t mk_rec(input logic [2*BEAT_W-1:0] w, input logic [6:0] h,
                                      input logic [10:0] plen, input logic [2:0] port);
    hdr_rec_t r;
    r.bytes   = w[2*BEAT_W-1 -: HDR_MAX*8];
    for (int i = 0; i < HDR_MAX; i++)
      if (i >= int'(h)) r.bytes[HDR_MAX*8-1-8*i -: 8] = 8'h00;
    r.hdr_len = h;
    r.pay_len = plen;
    r.port    = port;
    return r;
  endfunction

  logic [2*BEAT_W-1:0] hwin_now;
  always_comb begin
    hwin_now = hwin;
    if (k == 0) hwin_now[2*BEAT_W-1 -: BEAT_W] = in_beat.data;
    if (k == 1) hwin_now[BEAT_W-1:0]           = in_beat.data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_RUN;
      k         <= '0;
      flen      <= '0;
      prev      <= '0;
      hwin      <= '0;
      d         <= '0;
      rec       <= '0;
      hb_wr     <= 1'b0;
      pb_wr     <= 1'b0;
      job_valid <= 1'b0;
      job       <= '0;
      hb_ring <= '0; hb_col <= '0; hb_host <= '0; hb_data <= '0;
      pb_ring <= '0; pb_col <= '0; pb_host <= '0; pb_beat <= '0; pb_data <= '0;
    end else begin
      hb_wr <= 1'b0;
      pb_wr <= 1'b0;
      unique case (st)
        S_RUN: if (in_valid) begin
          if (k == 0) d <= in_dec;
          hwin <= hwin_now;
          prev <= in_beat.data;
          flen <= flen + 11'(in_beat.nbytes);
          k    <= k + 5'd1;
          pb_ring <= dd.ring; pb_col <= dd.col; pb_host <= dd.host;
          if (emit_now && store && int'(q_now) < PAY_BEATS) begin
            pb_wr   <= 1'b1;
            pb_beat <= q_now;
            pb_data <= realign(prev, in_beat.data, sh);
          end
          if (in_beat.eop) begin
            rec  <= mk_rec(hwin_now, hl, pay_len_eop, in_beat.port);
            k    <= '0;
            flen <= '0;
            if (need_beats > done_beats && store && int'(done_beats) < PAY_BEATS)
              st <= S_FLUSH;
            else begin
              // header record and job without a flush cycle
              hb_wr   <= store;
              hb_ring <= dd.ring; hb_col <= dd.col; hb_host <= dd.host;
              hb_data <= mk_rec(hwin_now, hl, pay_len_eop, in_beat.port);
              if (dd.act == ACT_STORE_AGG || dd.act == ACT_REPLAY) begin
                job_valid <= 1'b1;
                job       <= '{kind: (dd.act == ACT_REPLAY) ? JOB_REPLAY : JOB_FRESH,
                               ring: dd.ring, col: dd.col,
                               hdr: mk_rec(hwin_now, hl, pay_len_eop, in_beat.port)};
                st <= S_JOB;
              end
            end
            d       <= dd;
            hwin    <= hwin_now;
          end
        end
        S_FLUSH: begin
          // last payload beat: the tail of the final frame beat
          pb_wr   <= 1'b1;
          pb_beat <= 5'(((rec.pay_len + 11'd63) >> 6) - 11'd1);
          pb_data <= realign(prev, '0, sh_of(d));
          hb_wr   <= 1'b1;
          hb_ring <= d.ring; hb_col <= d.col; hb_host <= d.host;
          hb_data <= rec;
          if (d.act == ACT_STORE_AGG) begin
            job_valid <= 1'b1;
            job       <= '{kind: JOB_FRESH, ring: d.ring, col: d.col, hdr: rec};
            st        <= S_JOB;
          end else begin
            st <= S_RUN;
          end
        end
        S_JOB: if (job_ready) begin
          job_valid <= 1'b0;
          st        <= S_RUN;
        end
        default: st <= S_RUN;
      endcase
    end
  end

  function automatic logic [5:0] sh_of(input decision_t x);
    return x.first ? 6'(HDR_FIRST % 64) : 6'(HDR_BASE % 64);
  endfunction

endmodule
