// netreduce_top: the NetReduce in-network reduction accelerator.
//
// The accelerator sits beside an unmodified Ethernet switch that sends it
// every RoCE v2 frame. It adds up, packet by packet, the gradients that the
// hosts of a ring send each other, and sends every packet on with its payload
// replaced by the sum, so every host receives the same aggregated data while
// the RDMA connections stay end to end between the hosts.
//
// Data path, in the order of the paper's Fig. 4:
//   IN FIFO -> Arbiter -> Separator -> Header/Payload buffer -> Aggregator
//   (+ History result, Selector) -> Combinator (+ Header Manager)
//   -> Output Selector -> OUT FIFO
// Control path: the Arbiter shows the head of each frame to the Parser, which
// classifies it and recovers RingID/HostID/MsgID/offset through LUT#1 and
// LUT#2; the State Manager marks the arrival in the State record and decides
// BYPASS, DROP, STORE, STORE_AGG or REPLAY; frames that are not aggregation
// packets go from the Arbiter straight to the Output Selector.
//
// Interface: NPORTS frame streams in and out (64-byte beats, valid/ready),
// the settings the control plane makes at job start (cfg_*; cfg_clear
// empties the lookup tables and the State record), a port through which
// headers from other leaves enter the Header Manager, and event counters.
// Parameters default to the paper's prototype: six 100 GbE ports, up to 8
// rings of up to 6 hosts, window N = 2, 170-packet messages of 1 KB.
module netreduce_top
  import nr_pkg::*;
#(
  parameter int NPORTS        = 6,
  parameter int RINGS         = 8,
  parameter int HOSTS         = 6,
  parameter int WINDOW        = 2,
  parameter int MAX_MSG_LEN   = 170,
  parameter int PAY_BYTES     = 1024,
  parameter int FIFO_DEPTH    = 64,
  parameter int STORE_ENTRIES = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // 100 GbE ports
  input  logic [NPORTS-1:0] rx_valid,
  output logic [NPORTS-1:0] rx_ready,
  input  beat_t             rx_beat [NPORTS],
  output logic [NPORTS-1:0] tx_valid,
  input  logic [NPORTS-1:0] tx_ready,
  output beat_t             tx_beat [NPORTS],
  // control plane
  input  logic              cfg_clear,
  input  logic [7:0]        cfg_local_size,   // H, hosts per ring under this switch
  input  logic [7:0]        cfg_global_size,
  input  logic              cfg_is_spine,
  input  logic [47:0]       cfg_self_mac,
  input  logic [31:0]       cfg_self_ip,
  input  logic [47:0]       cfg_spine_mac,
  input  logic [31:0]       cfg_spine_ip,
  input  logic              ext_hdr_wr,
  input  hdr_rec_t          ext_hdr,
  output logic              busy,
  // event counters
  output logic [31:0]       cnt_bypass,
  output logic [31:0]       cnt_drop,
  output logic [31:0]       cnt_store,
  output logic [31:0]       cnt_agg,
  output logic [31:0]       cnt_replay
);
  localparam int COLS = (WINDOW + 1) * MAX_MSG_LEN;

  // IN FIFO -> Arbiter
  logic  q_valid, q_ready;
  beat_t q_beat;
  in_fifo #(.NPORTS(NPORTS), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n, .rx_valid, .rx_ready, .rx_beat,
    .out_valid(q_valid), .out_ready(q_ready), .out_beat(q_beat)
  );

  // Arbiter <-> Parser <-> State Manager
  logic                p_req;
  logic [2*BEAT_W-1:0] p_win;
  logic [7:0]          p_win_bytes;
  logic [2:0]          p_port;
  logic                info_valid, dec_valid, sm_busy;
  pkt_info_t           info;
  decision_t           dec, sep_dec;
  logic  byp_valid, byp_ready, sep_valid, sep_ready;
  beat_t byp_beat, sep_beat;

  arbiter u_arbiter (
    .clk, .rst_n, .sm_busy,
    .in_valid(q_valid), .in_ready(q_ready), .in_beat(q_beat),
    .p_req, .p_win, .p_win_bytes, .p_port,
    .dec_valid, .dec,
    .byp_valid, .byp_ready, .byp_beat,
    .sep_valid, .sep_ready, .sep_beat, .sep_dec
  );

  parser #(.RINGS(RINGS), .HOSTS(HOSTS), .WINDOW(WINDOW)) u_parser (
    .clk, .rst_n, .clear(cfg_clear),
    .req(p_req), .win(p_win), .win_bytes(p_win_bytes), .port(p_port),
    .info_valid, .info
  );

  state_manager #(.RINGS(RINGS), .HOSTS(HOSTS), .WINDOW(WINDOW), .MAX_MSG_LEN(MAX_MSG_LEN)) u_state_manager (
    .clk, .rst_n, .clear(cfg_clear), .busy(sm_busy), .cfg_hosts(cfg_local_size),
    .info_valid, .info, .dec_valid, .dec
  );
  assign busy = sm_busy;

  // Separator and buffers
  logic        hbw, pbw;
  logic [7:0]  hbw_ring, hbw_host, pbw_ring, pbw_host;
  logic [15:0] hbw_col, pbw_col;
  hdr_rec_t    hbw_data;
  logic [4:0]  pbw_beat;
  logic [BEAT_W-1:0] pbw_data;
  logic        sj_valid, sj_ready;
  job_t        sj;

  separator #(.PAY_BYTES(PAY_BYTES)) u_separator (
    .clk, .rst_n,
    .in_valid(sep_valid), .in_ready(sep_ready), .in_beat(sep_beat), .in_dec(sep_dec),
    .hb_wr(hbw), .hb_ring(hbw_ring), .hb_col(hbw_col), .hb_host(hbw_host), .hb_data(hbw_data),
    .pb_wr(pbw), .pb_ring(pbw_ring), .pb_col(pbw_col), .pb_host(pbw_host), .pb_beat(pbw_beat), .pb_data(pbw_data),
    .job_valid(sj_valid), .job_ready(sj_ready), .job(sj)
  );

  logic        hbr;
  logic [7:0]  hbr_ring, hbr_host;
  logic [15:0] hbr_col;
  hdr_rec_t    hbr_data;
  header_buffer #(.RINGS(RINGS), .HOSTS(HOSTS), .COLS(COLS)) u_header_buffer (
    .clk,
    .wr_en(hbw), .wr_ring(hbw_ring), .wr_col(hbw_col), .wr_host(hbw_host), .wr_data(hbw_data),
    .rd_en(hbr), .rd_ring(hbr_ring), .rd_col(hbr_col), .rd_host(hbr_host), .rd_data(hbr_data)
  );

  logic        pbr;
  logic [7:0]  pbr_ring, pbr_host;
  logic [15:0] pbr_col;
  logic [4:0]  pbr_beat;
  logic [BEAT_W-1:0] pbr_data;
  payload_buffer #(.RINGS(RINGS), .HOSTS(HOSTS), .COLS(COLS), .PAY_BYTES(PAY_BYTES)) u_payload_buffer (
    .clk,
    .wr_en(pbw), .wr_ring(pbw_ring), .wr_col(pbw_col), .wr_host(pbw_host), .wr_beat(pbw_beat), .wr_data(pbw_data),
    .rd_en(pbr), .rd_ring(pbr_ring), .rd_col(pbr_col), .rd_host(pbr_host), .rd_beat(pbr_beat), .rd_data(pbr_data)
  );

  // Aggregator, History result, Combinator, Header Manager
  logic        hw, hr;
  logic [7:0]  h_ring;
  logic [15:0] h_col;
  logic [4:0]  h_wbeat, h_rbeat;
  logic [BEAT_W-1:0] h_wdata, h_rdata;
  logic        cmb_idle, stg_wr, ej_valid, ej_ready;
  logic [4:0]  stg_beat;
  logic [BEAT_W-1:0] stg_data;
  job_t        ej;

  aggregator #(.HOSTS(HOSTS), .PAY_BYTES(PAY_BYTES)) u_aggregator (
    .clk, .rst_n, .cfg_hosts(cfg_local_size),
    .job_valid(sj_valid), .job_ready(sj_ready), .job(sj),
    .pb_rd(pbr), .pb_ring(pbr_ring), .pb_col(pbr_col), .pb_host(pbr_host), .pb_beat(pbr_beat), .pb_data(pbr_data),
    .hist_wr(hw), .hist_rd(hr), .hist_ring(h_ring), .hist_col(h_col),
    .hist_wbeat(h_wbeat), .hist_rbeat(h_rbeat), .hist_wdata(h_wdata), .hist_rdata(h_rdata),
    .cmb_idle, .stg_wr, .stg_beat, .stg_data,
    .emit_valid(ej_valid), .emit_ready(ej_ready), .emit_job(ej)
  );

  history_buffer #(.RINGS(RINGS), .COLS(COLS), .PAY_BYTES(PAY_BYTES)) u_history_buffer (
    .clk,
    .wr_en(hw), .wr_ring(h_ring), .wr_col(h_col), .wr_beat(h_wbeat), .wr_data(h_wdata),
    .rd_en(hr), .rd_ring(h_ring), .rd_col(h_col), .rd_beat(h_rbeat), .rd_data(h_rdata)
  );

  logic     hm_valid;
  hdr_rec_t hm_in, hm_out;
  logic     c_valid, c_ready;
  beat_t    c_beat;

  combinator #(.HOSTS(HOSTS), .PAY_BYTES(PAY_BYTES)) u_combinator (
    .clk, .rst_n, .cfg_hosts(cfg_local_size), .idle(cmb_idle),
    .stg_wr, .stg_beat, .stg_data,
    .job_valid(ej_valid), .job_ready(ej_ready), .job(ej),
    .hb_rd(hbr), .hb_ring(hbr_ring), .hb_col(hbr_col), .hb_host(hbr_host), .hb_data(hbr_data),
    .hm_valid, .hm_in, .hm_out,
    .out_valid(c_valid), .out_ready(c_ready), .out_beat(c_beat)
  );

  header_manager #(.STORE_ENTRIES(STORE_ENTRIES)) u_header_manager (
    .clk, .rst_n,
    .cfg_local_size, .cfg_global_size, .cfg_is_spine,
    .cfg_self_mac, .cfg_self_ip, .cfg_spine_mac, .cfg_spine_ip,
    .h_valid(hm_valid), .h_in(hm_in), .h_out(hm_out),
    .ext_wr(ext_hdr_wr), .ext_hdr
  );

  // Output Selector and OUT FIFO
  logic  o_valid, o_ready;
  beat_t o_beat;
  out_selector u_out_selector (
    .clk, .rst_n,
    .in0_valid(c_valid), .in0_ready(c_ready), .in0_beat(c_beat),
    .in1_valid(byp_valid), .in1_ready(byp_ready), .in1_beat(byp_beat),
    .out_valid(o_valid), .out_ready(o_ready), .out_beat(o_beat)
  );

  out_fifo #(.NPORTS(NPORTS), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .in_valid(o_valid), .in_ready(o_ready), .in_beat(o_beat),
    .tx_valid, .tx_ready, .tx_beat
  );

  // event counters, one count per decision
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_bypass <= '0; cnt_drop <= '0; cnt_store <= '0; cnt_agg <= '0; cnt_replay <= '0;
    end else if (dec_valid) begin
      unique case (dec.act)
        ACT_BYPASS:    cnt_bypass <= cnt_bypass + 1;
        ACT_DROP:      cnt_drop   <= cnt_drop + 1;
        ACT_STORE:     cnt_store  <= cnt_store + 1;
        ACT_STORE_AGG: cnt_agg    <= cnt_agg + 1;
        ACT_REPLAY:    cnt_replay <= cnt_replay + 1;
        default: ;
      endcase
    end
  end

endmodule
