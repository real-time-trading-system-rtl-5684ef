// sbm_pkg: number formats, stream payloads and configuration shared by the
// trading datapath and the simulated-bifurcation (SB) Ising core.
//
// The published machine computes in 32-bit floating point. This RTL uses
// 32-bit signed fixed point with 24 fraction bits (Q7.24) for every SB
// quantity (positions, momenta, couplings, biases, price deviations); the
// choice of fixed point is this design's own and is the main departure
// from the published implementation. Oscillator positions are clamped to
// [-1, 1], so the integer range of Q7.24 is ample.
//
// Prices are unsigned integers in exchange price ticks. VWAP values carry
// 8 fraction bits (Q24.8) because they are averages. The reciprocal of the
// day's base price is supplied by the host as an unsigned Q0.32 number, so
// that the price deviation needs a multiply instead of a divide.
package sbm_pkg;

  localparam int FRAC = 24;                 // fraction bits of fix_t
  localparam int IDX_W = 16;                // stock index width
  typedef logic signed [31:0] fix_t;        // Q7.24
  typedef logic [31:0] price_t;             // price ticks
  typedef logic [31:0] vwap_t;              // Q24.8 price ticks
  typedef logic [31:0] inv_t;               // UQ0.32, 1 / base price
  typedef logic [IDX_W-1:0] idx_t;
  typedef logic signed [1:0] sgn_t;         // -1, 0, +1

  localparam fix_t FIX_ONE = 32'sd1 <<< FRAC;

  // saturate a wide Q.24 value to fix_t
  function automatic fix_t sat(input logic signed [79:0] v);
    if (v > 80'sh7fff_ffff) return 32'sh7fff_ffff;
    if (v < -80'sh8000_0000) return 32'sh8000_0000;
    return v[31:0];
  endfunction

  // Q7.24 x Q7.24 -> Q7.24, truncated toward minus infinity, saturated
  function automatic fix_t fmul(input fix_t a, input fix_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return sat(80'(p >>> FRAC));
  endfunction

  // sign of a fixed-point value as -1/0/+1
  function automatic sgn_t fsgn(input fix_t a);
    if (a == 0) return 2'sd0;
    return a[31] ? -2'sd1 : 2'sd1;
  endfunction

  function automatic fix_t fabs(input fix_t a);
    return a[31] ? -a : a;
  endfunction

  // market feed: new best ask/bid of one stock
  typedef struct packed {
    idx_t   idx;
    price_t ask;
    price_t bid;
  } feed_t;

  // VWAP information from the host, one stock per entry
  typedef struct packed {
    idx_t  idx;
    vwap_t vwap;
  } vwap_info_t;

  // day-by-day data written by the host before trading
  typedef enum logic [1:0] {HW_SIGMA, HW_INVBASE, HW_LOTS} host_tgt_e;
  typedef struct packed {
    host_tgt_e   tgt;
    logic [31:0] addr;   // sigma: i*N+j, others: stock index
    logic [31:0] data;   // sigma: fix_t in [0,1]; invbase: inv_t; lots
  } host_wr_t;

  // run-time configuration (host registers)
  typedef struct packed {
    fix_t        c1;         // expected-return weight
    fix_t        c2;         // Ns-selection penalty
    fix_t        c3;         // delta-neutral penalty
    fix_t        dt_c0;      // dt * c0
    fix_t        dt_a0;      // dt * a0
    fix_t        damp_dec;   // dt * a0 / Nstep
    logic [15:0] n_step;     // SB time-evolution steps per run
    logic [15:0] n_run;      // runs per market feed
    fix_t        cost_thr;   // post: accept if H_cost <= cost_thr
    logic [31:0] seed;       // random number generator seed
    logic [7:0]  pmax;       // maximum number of open positions
    logic        trade_en;   // judge may open positions
  } cfg_t;

  // side of a position: long (buy) for negative deviation, short otherwise
  typedef enum logic {SIDE_BUY = 1'b0, SIDE_SELL = 1'b1} side_e;

  typedef struct packed {
    idx_t  idx;
    side_e side;
  } order_req_t;

  typedef struct packed {
    logic [31:0] seq;
    idx_t        idx;
    side_e       side;
    logic [31:0] lots;
  } order_t;

  // activity counters of the FPGA part
  typedef struct packed {
    logic [31:0] n_feeds;     // feed words taken by the price buffer
    logic [31:0] n_events;    // quote changes forwarded to the SBM
    logic [31:0] n_runs;      // SB runs
    logic [31:0] n_pre;       // runs with tick preprocessing
    logic [31:0] n_pre_skip;  // runs that skipped it
    logic [31:0] n_pass;      // runs whose group passed postprocessing
    logic [31:0] n_accept;    // groups opened by the judgment module
    logic [31:0] n_reject;    // groups rejected by it
    logic [31:0] n_close;     // close confirmations
    logic [31:0] n_days;      // day preprocessing runs
  } stats_t;

endpackage
