// out_selector: merges the two frame streams that leave the accelerator.
//
// Input 0 carries the frames the Combinator builds (aggregation results and
// replays), input 1 the frames the Arbiter lets through untouched (everything
// that is not an aggregation packet). Whole frames are passed: once a frame
// has started, its input keeps the output until the end-of-frame beat. When
// both inputs wait at a frame boundary they take turns (round robin).
// Timing: combinational, one beat per cycle, no added latency.
// The paper draws this Selector in front of the OUT FIFO; the turn-taking
// rule is this design's.
module out_selector
  import nr_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in0_valid,
  output logic  in0_ready,
  input  beat_t in0_beat,
  input  logic  in1_valid,
  output logic  in1_ready,
  input  beat_t in1_beat,
  output logic  out_valid,
  input  logic  out_ready,
  output beat_t out_beat
);
  logic locked, owner, last, sel;

  always_comb begin
    if (locked)                      sel = owner;
    else if (in0_valid && in1_valid) sel = !last;
    else                             sel = in1_valid;
  end

  assign out_valid = sel ? in1_valid : in0_valid;
  assign out_beat  = sel ? in1_beat  : in0_beat;
  assign in0_ready = !sel && out_ready;
  assign in1_ready =  sel && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      owner  <= 1'b0;
      last   <= 1'b1;
    end else if (out_valid && out_ready) begin
      locked <= !out_beat.eop;
      owner  <= sel;
      if (out_beat.sop) last <= sel;
    end
  end

endmodule
