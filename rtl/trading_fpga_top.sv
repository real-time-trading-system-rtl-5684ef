// trading_fpga_top: the FPGA part of the real-time trading system. Market
// feeds (a stock's best ask and bid) come in, the SBM module selects a
// balanced, uncorrelated and potentially profitable group of Ns stocks by
// simulated bifurcation, the judgment module opens it if no stock of it is
// already open and Pmax allows, and order records go out.
//
// Data flow (every arrow a fifo_channel):
//   feed -> price_buffer --tick events--> sbm_module --candidates--> judge
//        --order requests--> msg_gen --> orders
//   host VWAP info ------> sbm_module        host close info --> judge
// The receiver, transmitter, Ethernet PHY and PCIe interface are outside
// this module: their streams are the top-level ports. Host configuration
// (cfg), day-by-day tables (sigma, 1/pbase, lots via host_wr) and the
// day_prep command stand in for the PCIe register path.
//
// Ports: valid/ready on feed, vw, close and ord; host_we/host_wr is a
// plain write strobe; stats counts the activity of every mechanism.
module trading_fpga_top
  import sbm_pkg::*;
#(
  parameter int N     = 128,   // stock universe / spins
  parameter int NS    = 4,     // stocks per selected group
  parameter int M     = 8,     // MMTE blocks
  parameter int L     = 16,    // JX lanes per MMTE
  parameter int FDEPTH = 16    // depth of each FIFO channel
) (
  input  logic         clk,
  input  logic         rst_n,
  input  cfg_t         cfg,
  input  logic         seed_load,
  input  logic         feed_valid,
  output logic         feed_ready,
  input  feed_t        feed,
  input  logic         host_we,
  input  host_wr_t     host_wr,
  input  logic         day_prep,
  input  logic         vw_valid,
  output logic         vw_ready,
  input  vwap_info_t   vw,
  input  logic         close_valid,
  output logic         close_ready,
  input  idx_t         close_idx,
  output logic         ord_valid,
  input  logic         ord_ready,
  output order_t       ord,
  output logic [N-1:0] open_vec,
  output logic         sbm_busy,
  output stats_t       stats
);
  localparam int IW = $clog2(N);
  localparam int CW = $bits(idx_t) + 1;
  localparam int FW = $clog2(FDEPTH + 1);

  // feed channel (receiver side)
  logic  f_valid, f_ready;
  feed_t f_data;
  logic [FW-1:0] c0;
  fifo_channel #(.W($bits(feed_t)), .DEPTH(FDEPTH)) u_ch_feed (
    .clk, .rst_n, .in_valid(feed_valid), .in_ready(feed_ready), .in_data(feed),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .count(c0));

  // price buffer
  logic pb_ev_valid, pb_ev_ready;
  idx_t pb_ev_idx;
  logic [IW-1:0] p_idx;
  price_t p_ask, p_bid;
  price_buffer #(.N(N)) u_buf (
    .clk, .rst_n, .feed_valid(f_valid), .feed_ready(f_ready), .feed(f_data),
    .ev_valid(pb_ev_valid), .ev_ready(pb_ev_ready), .ev_idx(pb_ev_idx),
    .rd_idx(p_idx), .rd_ask(p_ask), .rd_bid(p_bid),
    .n_feeds(stats.n_feeds), .n_events(stats.n_events));

  logic ev_valid, ev_ready;
  idx_t ev_idx;
  logic [FW-1:0] c1;
  fifo_channel #(.W($bits(idx_t)), .DEPTH(FDEPTH)) u_ch_ev (
    .clk, .rst_n, .in_valid(pb_ev_valid), .in_ready(pb_ev_ready), .in_data(pb_ev_idx),
    .out_valid(ev_valid), .out_ready(ev_ready), .out_data(ev_idx), .count(c1));

  // VWAP info channel
  logic v_valid, v_ready;
  vwap_info_t v_data;
  logic [FW-1:0] c2;
  fifo_channel #(.W($bits(vwap_info_t)), .DEPTH(FDEPTH)) u_ch_vwap (
    .clk, .rst_n, .in_valid(vw_valid), .in_ready(vw_ready), .in_data(vw),
    .out_valid(v_valid), .out_ready(v_ready), .out_data(v_data), .count(c2));

  // SBM module
  logic o_changed, verdict_valid, verdict_open;
  logic s_cand_valid, s_cand_ready;
  idx_t  s_cand_idx  [NS];
  side_e s_cand_side [NS];
  sbm_module #(.N(N), .NS(NS), .M(M), .L(L)) u_sbm (
    .clk, .rst_n, .cfg, .seed_load, .host_we, .host_wr, .day_prep,
    .ev_valid, .ev_ready, .ev_idx, .vw_valid(v_valid), .vw_ready(v_ready), .vw(v_data),
    .p_idx, .p_ask, .p_bid, .open_vec, .o_changed, .verdict_valid, .verdict_open,
    .cand_valid(s_cand_valid), .cand_ready(s_cand_ready),
    .cand_idx(s_cand_idx), .cand_side(s_cand_side), .busy(sbm_busy),
    .n_runs(stats.n_runs), .n_pre(stats.n_pre), .n_pre_skip(stats.n_pre_skip),
    .n_pass(stats.n_pass), .n_days(stats.n_days));

  // candidate channel (open info)
  logic [NS*CW-1:0] cand_in, cand_out;
  logic j_cand_valid, j_cand_ready;
  idx_t  j_cand_idx  [NS];
  side_e j_cand_side [NS];
  always_comb begin
    for (int q = 0; q < NS; q++) begin
      cand_in[q*CW +: CW] = {s_cand_idx[q], s_cand_side[q]};
      j_cand_idx[q]  = cand_out[q*CW + 1 +: $bits(idx_t)];
      j_cand_side[q] = side_e'(cand_out[q*CW]);
    end
  end
  logic [FW-1:0] c3;
  fifo_channel #(.W(NS*CW), .DEPTH(FDEPTH)) u_ch_cand (
    .clk, .rst_n, .in_valid(s_cand_valid), .in_ready(s_cand_ready), .in_data(cand_in),
    .out_valid(j_cand_valid), .out_ready(j_cand_ready), .out_data(cand_out), .count(c3));

  // close info channel
  logic cl_valid, cl_ready;
  idx_t cl_idx;
  logic [FW-1:0] c4;
  fifo_channel #(.W($bits(idx_t)), .DEPTH(FDEPTH)) u_ch_close (
    .clk, .rst_n, .in_valid(close_valid), .in_ready(close_ready), .in_data(close_idx),
    .out_valid(cl_valid), .out_ready(cl_ready), .out_data(cl_idx), .count(c4));

  // judgment module
  logic rq_valid, rq_ready;
  order_req_t rq;
  judge #(.N(N), .NS(NS)) u_judge (
    .clk, .rst_n, .pmax(cfg.pmax), .trade_en(cfg.trade_en),
    .cand_valid(j_cand_valid), .cand_ready(j_cand_ready),
    .cand_idx(j_cand_idx), .cand_side(j_cand_side),
    .close_valid(cl_valid), .close_ready(cl_ready), .close_idx(cl_idx),
    .ord_valid(rq_valid), .ord_ready(rq_ready), .ord(rq), .open_vec,
    .verdict_valid, .verdict_open, .o_changed,
    .n_accept(stats.n_accept), .n_reject(stats.n_reject), .n_close(stats.n_close));

  logic g_valid, g_ready;
  order_req_t g_req;
  logic [FW-1:0] c5;
  fifo_channel #(.W($bits(order_req_t)), .DEPTH(FDEPTH)) u_ch_req (
    .clk, .rst_n, .in_valid(rq_valid), .in_ready(rq_ready), .in_data(rq),
    .out_valid(g_valid), .out_ready(g_ready), .out_data(g_req), .count(c5));

  // message generator
  logic m_valid, m_ready;
  order_t m_ord;
  msg_gen #(.N(N)) u_msg (
    .clk, .rst_n, .lots_we(host_we && host_wr.tgt == HW_LOTS && int'(host_wr.addr) < N),
    .lots_idx(host_wr.addr[IW-1:0]), .lots_data(host_wr.data),
    .req_valid(g_valid), .req_ready(g_ready), .req(g_req),
    .out_valid(m_valid), .out_ready(m_ready), .out(m_ord));

  // order channel (transmitter side)
  logic [FW-1:0] c6;
  fifo_channel #(.W($bits(order_t)), .DEPTH(FDEPTH)) u_ch_ord (
    .clk, .rst_n, .in_valid(m_valid), .in_ready(m_ready), .in_data(m_ord),
    .out_valid(ord_valid), .out_ready(ord_ready), .out_data(ord), .count(c6));
endmodule
