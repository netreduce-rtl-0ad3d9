// arbiter: holds the head of each frame while it is classified, then steers
// the frame.
//
// The Arbiter takes frames from the IN FIFO one at a time. It keeps the first
// two beats (128 bytes, enough for all headers of a first packet), hands them
// to the Parser and waits: the Parser's result goes on to the State Manager,
// whose decision comes back here two cycles after the request. The frame is
// then sent, beat by beat, to
//   * the bypass path (out port "byp") for BYPASS, i.e. every frame that is
//     not an aggregation packet;
//   * nowhere (the beats are consumed) for DROP;
//   * the Separator (out port "sep") for STORE, STORE_AGG and REPLAY, with
//     the decision held steady on sep_dec for the whole frame.
// A request is not made while the State Manager is busy clearing its memory.
//
// The paper only names the Arbiter and shows that the Parser controls it;
// holding the head of the frame and the three-way steering are this design's
// reading of that. Cost: about five cycles per frame in addition to one cycle
// per beat.
module arbiter
  import nr_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                sm_busy,
  // from IN FIFO
  input  logic                in_valid,
  output logic                in_ready,
  input  beat_t               in_beat,
  // to Parser
  output logic                p_req,
  output logic [2*BEAT_W-1:0] p_win,
  output logic [7:0]          p_win_bytes,
  output logic [2:0]          p_port,
  // from State Manager
  input  logic                dec_valid,
  input  decision_t           dec,
  // bypass path
  output logic                byp_valid,
  input  logic                byp_ready,
  output beat_t               byp_beat,
  // to Separator
  output logic                sep_valid,
  input  logic                sep_ready,
  output beat_t               sep_beat,
  output decision_t           sep_dec
);
  typedef enum logic [2:0] {S_B0, S_B1, S_REQ, S_WAIT, S_H0, S_H1, S_BODY} st_e;
  st_e       st;
  beat_t     b0, b1;
  decision_t d;

  assign p_win       = {b0.data, b1.data};
  assign p_win_bytes = b0.eop ? {1'b0, b0.nbytes} : 8'(int'(b0.nbytes) + int'(b1.nbytes));
  assign p_port      = b0.port;
  assign p_req       = (st == S_REQ) && !sm_busy;
  assign sep_dec     = d;

  // The beat currently offered downstream.
  beat_t cur;
  logic  cur_valid;
  always_comb begin
    unique case (st)
      S_H0:    begin cur = b0;      cur_valid = 1'b1;     end
      S_H1:    begin cur = b1;      cur_valid = 1'b1;     end
      S_BODY:  begin cur = in_beat; cur_valid = in_valid; end
      default: begin cur = in_beat; cur_valid = 1'b0;     end
    endcase
  end

  logic to_byp, to_sep, to_drop, moved;
  assign to_byp  = (d.act == ACT_BYPASS);
  assign to_drop = (d.act == ACT_DROP);
  assign to_sep  = !to_byp && !to_drop;

  assign byp_valid = cur_valid && to_byp;
  assign byp_beat  = cur;
  assign sep_valid = cur_valid && to_sep;
  assign sep_beat  = cur;
  assign moved     = cur_valid && (to_drop || (to_byp && byp_ready) || (to_sep && sep_ready));

  assign in_ready  = (st == S_B0) || (st == S_B1) || (st == S_BODY && moved);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_B0;
      b0 <= '0;
      b1 <= '0;
      d  <= '0;
    end else begin
      unique case (st)
        S_B0: if (in_valid) begin
          b0 <= in_beat;
          b1 <= '0;
          st <= in_beat.eop ? S_REQ : S_B1;
        end
        S_B1: if (in_valid) begin
          b1 <= in_beat;
          st <= S_REQ;
        end
        S_REQ:  if (!sm_busy) st <= S_WAIT;
        S_WAIT: if (dec_valid) begin
          d  <= dec;
          st <= S_H0;
        end
        S_H0: if (moved) st <= b0.eop ? S_B0 : S_H1;
        S_H1: if (moved) st <= b1.eop ? S_B0 : S_BODY;
        S_BODY: if (moved && in_beat.eop) st <= S_B0;
        default: st <= S_B0;
      endcase
    end
  end

endmodule
