// sbm_module: the event-driven SBM (simulated bifurcation machine) module.
// It holds the three memory units of the strategy - sigma (correlation
// factors, N x N, day-by-day), VWAP (every second) and dp (price deviations,
// tick-by-tick) - plus the reciprocal base prices, and sequences the
// preprocessing (sbm_pre), the SB core (sb_core) and the postprocessing
// (sbm_post).
//
// Controller:
//   IDLE      drains the input channels: VWAP entries are written to the
//             VWAP memory, tick events (a quote changed) re-arm n_run runs;
//             every change marks the problem dirty. A pending day_prep
//             request runs the day preprocessing (Jday, hday from sigma).
//             With the channels empty and runs left, a run begins.
//   RUN       preprocessing (tick part) only if the problem is dirty - a new
//             quote, a VWAP update, or an open/close in the open list since
//             the last preprocessing - otherwise it is skipped; then the SB
//             core with fresh random initial momenta, then postprocessing.
//   CAND      a passing group is sent to the judgment module, and the
//             controller waits for its verdict; an opening changes the open
//             list and so forces preprocessing in the next run.
// Changes arriving during a run are thus taken in at the start of the next
// run. The event flow follows the paper's timing chart; the exact policy
// (n_run runs re-armed by each tick event, VWAP updates applied only between
// runs, waiting for the verdict) is this design's reading of it.
//
// Ports: host writes for sigma and 1/pbase; valid/ready channels for tick
// events, VWAP information and open candidates; the open list and verdict
// from the judgment module; a read port into the price list.
module sbm_module
  import sbm_pkg::*;
#(
  parameter int N  = 128,
  parameter int NS = 4,
  parameter int M  = 8,
  parameter int L  = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 seed_load,
  // host, day-by-day data
  input  logic                 host_we,
  input  host_wr_t             host_wr,
  input  logic                 day_prep,
  // tick events from the price buffer
  input  logic                 ev_valid,
  output logic                 ev_ready,
  input  idx_t                 ev_idx,
  // VWAP information
  input  logic                 vw_valid,
  output logic                 vw_ready,
  input  vwap_info_t           vw,
  // price list read
  output logic [$clog2(N)-1:0] p_idx,
  input  price_t               p_ask,
  input  price_t               p_bid,
  // judgment module
  input  logic [N-1:0]         open_vec,
  input  logic                 o_changed,
  input  logic                 verdict_valid,
  input  logic                 verdict_open,
  output logic                 cand_valid,
  input  logic                 cand_ready,
  output idx_t                 cand_idx  [NS],
  output side_e                cand_side [NS],
  // status
  output logic                 busy,
  output logic [31:0]          n_runs,
  output logic [31:0]          n_pre,
  output logic [31:0]          n_pre_skip,
  output logic [31:0]          n_pass,
  output logic [31:0]          n_days
);
  localparam int IW = $clog2(N);
  localparam int SW = $clog2(N * N);

  // memory units
  fix_t  sigma [N*N];
  fix_t  dpm   [N];
  vwap_t vwm   [N];
  inv_t  invm  [N];

  typedef enum logic [3:0] {
    S_IDLE, S_DAY, S_RUN, S_PRE, S_CORE_GO, S_CORE, S_POST, S_CAND, S_VERDICT
  } state_e;
  state_e st;

  logic [15:0] runs_left;
  logic        dirty, day_req;

  // submodule wiring
  logic pre_day, pre_tick, pre_busy, pre_done;
  logic [SW-1:0] pre_sig_addr, post_sig_addr;
  logic [IW-1:0] pre_i, post_i;
  fix_t pre_dp_wdata;
  logic pre_dp_we;
  logic jd_we, hd_we, ht_we, sg_we;
  logic [IW-1:0] jd_i, jd_j;
  fix_t jd_data, hd_data, ht_data;
  sgn_t sg_data;
  logic signed [15:0] sgn_sum;
  logic core_start, core_busy, core_done;
  fix_t core_x;
  logic post_start, post_busy, post_done, post_pass;
  fix_t post_cost;
  logic [15:0] post_nsel;
  logic signed [15:0] post_bal;

  // host writes
  always_ff @(posedge clk) begin
    if (host_we && host_wr.tgt == HW_SIGMA && int'(host_wr.addr) < N * N)
      sigma[host_wr.addr[SW-1:0]] <= host_wr.data;
    if (host_we && host_wr.tgt == HW_INVBASE && int'(host_wr.addr) < N)
      invm[host_wr.addr[IW-1:0]] <= host_wr.data;
    if (pre_dp_we) dpm[pre_i] <= pre_dp_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < N; i++) vwm[i] <= '0;
    else if (st == S_IDLE && vw_valid && int'(vw.idx) < N) vwm[vw.idx[IW-1:0]] <= vw.vwap;
  end

  assign vw_ready = (st == S_IDLE);
  assign ev_ready = (st == S_IDLE) && !vw_valid;
  assign p_idx    = pre_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; runs_left <= '0; dirty <= 1'b1; day_req <= 1'b0;
      n_runs <= '0; n_pre <= '0; n_pre_skip <= '0; n_pass <= '0; n_days <= '0;
    end else begin
      if (day_prep) day_req <= 1'b1;
      if (o_changed) dirty <= 1'b1;
      case (st)
        S_IDLE: begin
          if (vw_valid) dirty <= 1'b1;
          else if (ev_valid) begin dirty <= 1'b1; runs_left <= cfg.n_run; end
          else if (day_req) begin day_req <= 1'b0; st <= S_DAY; end
          else if (runs_left != 0) st <= S_RUN;
        end
        S_DAY: if (pre_done) begin st <= S_IDLE; n_days <= n_days + 1; end
        S_RUN: begin
          n_runs <= n_runs + 1;
          if (dirty) begin
            st <= S_PRE; n_pre <= n_pre + 1;
            if (!o_changed) dirty <= 1'b0;
          end else begin
            st <= S_CORE_GO; n_pre_skip <= n_pre_skip + 1;
          end
        end
        S_PRE:     if (pre_done)  st <= S_CORE_GO;
        S_CORE_GO: st <= S_CORE;
        S_CORE:    if (core_done) st <= S_POST;
        S_POST: if (post_done) begin
          if (post_pass) begin st <= S_CAND; n_pass <= n_pass + 1; end
          else begin st <= S_IDLE; runs_left <= runs_left - 1'b1; end
        end
        S_CAND:    if (cand_ready) st <= S_VERDICT;
        S_VERDICT: if (verdict_valid) begin
          if (verdict_open) dirty <= 1'b1;
          runs_left <= runs_left - 1'b1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign pre_day    = (st == S_IDLE) && !vw_valid && !ev_valid && day_req;
  assign pre_tick   = (st == S_RUN) && dirty;
  assign core_start = (st == S_CORE_GO);
  assign post_start = (st == S_CORE) && core_done;
  assign cand_valid = (st == S_CAND);
  assign busy       = (st != S_IDLE);

  sbm_pre #(.N(N), .NS(NS)) u_pre (
    .clk, .rst_n, .start_day(pre_day), .start_tick(pre_tick),
    .busy(pre_busy), .done(pre_done), .c1(cfg.c1), .c2(cfg.c2), .c3(cfg.c3),
    .sig_addr(pre_sig_addr), .sig_data(sigma[pre_sig_addr]),
    .rd_i(pre_i), .ask(p_ask), .bid(p_bid), .vwap(vwm[pre_i]), .invbase(invm[pre_i]),
    .open_vec, .dp_rd(dpm[pre_i]), .dp_we(pre_dp_we), .dp_wdata(pre_dp_wdata),
    .jd_we, .jd_i, .jd_j, .jd_data, .hd_we, .hd_data, .ht_we, .ht_data,
    .sg_we, .sg_data, .sgn_sum);

  sb_core #(.N(N), .M(M), .L(L)) u_core (
    .clk, .rst_n,
    .jd_we, .jd_i, .jd_j, .jd_data,
    .hd_we, .hd_i(jd_i), .hd_data, .ht_we, .ht_i(pre_i), .ht_data,
    .sg_we, .sg_i(pre_i), .sg_data,
    .seed_load, .seed(cfg.seed),
    .c3_half(cfg.c3 >>> 1), .dt_c0(cfg.dt_c0), .dt_a0(cfg.dt_a0), .damp_dec(cfg.damp_dec),
    .n_step(cfg.n_step), .start(core_start), .busy(core_busy), .done(core_done),
    .pt_idx(post_i), .pt_x(core_x));

  sbm_post #(.N(N), .NS(NS)) u_post (
    .clk, .rst_n, .start(post_start), .busy(post_busy), .done(post_done),
    .c1(cfg.c1), .cost_thr(cfg.cost_thr), .rd_i(post_i), .x(core_x), .dp(dpm[post_i]),
    .sig_addr(post_sig_addr), .sig_data(sigma[post_sig_addr]),
    .pass(post_pass), .cost(post_cost), .cand_idx, .cand_side,
    .n_sel(post_nsel), .balance(post_bal));

  assert property (@(posedge clk) disable iff (!rst_n) !(pre_busy && core_busy));
  assert property (@(posedge clk) disable iff (!rst_n) !(pre_busy && post_busy));
endmodule
