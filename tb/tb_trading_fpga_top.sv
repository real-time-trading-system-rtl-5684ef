// tb_trading_fpga_top: end-to-end test of the FPGA part at its default size
// (N = 128 stocks/spins, Ns = 4, 8 MMTE blocks of 16 lanes, 300 SB steps).
// A trading day in miniature:
//   1. the host loads the correlation factors sigma (symmetric, 0..0.25),
//      the reciprocal base prices and the lots table, starts the day
//      preprocessing and sends every stock's VWAP;
//   2. quotes arrive for all stocks (half below their VWAP, half above),
//      some of them repeats of the stored quote;
//   3. groups are opened and orders leave through a back-pressured output;
//      later groups are rejected while Pmax = 4 positions are open;
//   4. VWAP updates and further quotes arrive while the SBM is busy;
//   5. the host confirms the closing of the open positions, after which new
//      groups can open.
// Checks on every order: sequence numbers, lots from the table, the side
// matches the stock's deviation from VWAP, each group of Ns orders is delta
// neutral (Ns/2 buys) with distinct stocks none of which is already open.
// Each mechanism is counted and must occur at least once: unchanged quotes
// filtered, preprocessing skipped, preprocessing repeated after an opening,
// a judge rejection, a close, a VWAP update and a quote during a run, and
// back-pressure on the order output.
module tb_trading_fpga_top;
  import sbm_pkg::*;
  localparam int N = 128, NS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic seed_load = 0, feed_valid = 0, feed_ready, host_we = 0, day_prep = 0;
  feed_t feed;
  host_wr_t host_wr;
  logic vw_valid = 0, vw_ready, close_valid = 0, close_ready, ord_valid, ord_ready = 0, sbm_busy;
  vwap_info_t vw;
  idx_t close_idx;
  order_t ord;
  logic [N-1:0] open_vec;
  stats_t stats;

  trading_fpga_top dut (.clk, .rst_n, .cfg, .seed_load, .feed_valid, .feed_ready, .feed,
    .host_we, .host_wr, .day_prep, .vw_valid, .vw_ready, .vw, .close_valid, .close_ready,
    .close_idx, .ord_valid, .ord_ready, .ord, .open_vec, .sbm_busy, .stats);

  logic [31:0] lots [N];
  bit below [N];            // stock trades below its VWAP all day
  bit model_open [N];
  int n_orders = 0, n_groups = 0, grp_buys = 0, grp_n = 0, stall = 0;
  int vw_in_run = 0, feed_in_run = 0, pre_after_open = 0;
  idx_t grp [NS];

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // order checker
  always @(negedge clk) ord_ready = ($urandom % 4) != 0;
  always @(posedge clk) if (rst_n) begin
    if (ord_valid && !ord_ready) stall++;
    if (ord_valid && ord_ready) begin
      checks++;
      if (ord.seq != 32'(n_orders) || ord.lots != lots[ord.idx] ||
          ord.side != (below[ord.idx] ? SIDE_BUY : SIDE_SELL) || model_open[ord.idx]) begin
        failures++;
        $display("bad order seq %0d stock %0d side %0d lots %0d", ord.seq, ord.idx, ord.side, ord.lots);
      end
      for (int k = 0; k < grp_n; k++) if (grp[k] == ord.idx) begin
        failures++; $display("stock %0d twice in a group", ord.idx);
      end
      grp[grp_n] = ord.idx;
      grp_n++; n_orders++;
      if (ord.side == SIDE_BUY) grp_buys++;
      if (grp_n == NS) begin
        checks++;
        if (grp_buys != NS / 2) begin failures++; $display("group not delta neutral"); end
        for (int k = 0; k < NS; k++) model_open[grp[k]] = 1;
        grp_n = 0; grp_buys = 0; n_groups++;
      end
    end
  end

  // preprocessing in the run that follows an opening
  logic [31:0] acc_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_sbm.st == dut.u_sbm.S_RUN && dut.u_sbm.dirty && stats.n_accept != acc_seen) begin
      pre_after_open++; acc_seen = stats.n_accept;
    end
  end

  task automatic send_feed(int i, price_t a, price_t b);
    @(negedge clk);
    if (sbm_busy) feed_in_run++;
    feed_valid = 1; feed.idx = idx_t'(i); feed.ask = a; feed.bid = b;
    while (!feed_ready) @(negedge clk);
    @(negedge clk); feed_valid = 0;
  endtask
  task automatic quote(int i, int dev);
    // mid = 20000 -/+ dev ticks against a VWAP of 20000
    if (below[i]) send_feed(i, price_t'(20005 - dev), price_t'(19995 - dev));
    else          send_feed(i, price_t'(20005 + dev), price_t'(19995 + dev));
  endtask
  task automatic send_vwap(int i, int v);
    @(negedge clk);
    if (sbm_busy) vw_in_run++;
    vw_valid = 1; vw.idx = idx_t'(i); vw.vwap = vwap_t'(v);
    while (!vw_ready) @(negedge clk);
    @(negedge clk); vw_valid = 0;
  endtask
  task automatic wait_quiet();
    int q = 0;
    while (q < 50) begin
      @(negedge clk);
      if (sbm_busy || ord_valid || dut.u_sbm.runs_left != 0) q = 0; else q++;
    end
  endtask

  initial begin
    int s0, dev;
    cfg = '0;
    cfg.c1 = 32'sd100 <<< 24;
    cfg.c2 = 32'sh0080_0000;
    cfg.c3 = 32'sh0080_0000;
    cfg.dt_c0 = 32'sh0019_999a;
    cfg.dt_a0 = 32'sh0019_999a;
    cfg.damp_dec = 32'sh0000_15d8;
    cfg.n_step = 300;
    cfg.n_run = 2;
    cfg.cost_thr = 32'sh0000_0000;
    cfg.seed = 32'h5EED_0001;
    cfg.pmax = 4;
    cfg.trade_en = 1;
    for (int i = 0; i < N; i++) begin below[i] = (i % 2) == 0; model_open[i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); seed_load = 1; @(negedge clk); seed_load = 0;
    // 1. day-by-day data
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        @(negedge clk); host_we = 1; host_wr.tgt = HW_SIGMA; host_wr.addr = 32'(i * N + j);
        host_wr.data = (i == j) ? 32'h0100_0000 : 32'(((i * 7919 + j * 7919 + (i * j) % 97) * 2654435761) % 32'h0040_0000);
      end
    for (int i = 0; i < N; i++) begin
      @(negedge clk); host_wr.tgt = HW_INVBASE; host_wr.addr = 32'(i); host_wr.data = 32'(64'h1_0000_0000 / 64'(20000));
      @(negedge clk); host_wr.tgt = HW_LOTS; host_wr.addr = 32'(i); lots[i] = 32'(1 + i % 9); host_wr.data = lots[i];
    end
    @(negedge clk); host_we = 0; day_prep = 1; @(negedge clk); day_prep = 0;
    for (int i = 0; i < N; i++) send_vwap(i, 20000 * 256);
    wait_quiet();
    checks++;
    if (stats.n_days != 1) failures++;
    // 2. quotes for all stocks, then repeats
    for (int i = 0; i < N; i++) quote(i, 5 + (i * 37) % 60);
    for (int i = 0; i < 8; i++) quote(i, 5 + (i * 37) % 60);
    // 4. VWAP update and new quotes while the SBM is running
    while (!sbm_busy) @(negedge clk);
    repeat (1000) @(negedge clk);
    send_vwap(10, 20000 * 256 + 128);
    quote(20, 70);
    wait_quiet();
    $display("after quotes: runs %0d pre %0d skip %0d pass %0d accept %0d reject %0d orders %0d",
             stats.n_runs, stats.n_pre, stats.n_pre_skip, stats.n_pass, stats.n_accept, stats.n_reject, n_orders);
    // 5. close everything that is open, then trade again
    for (int i = 0; i < N; i++) if (open_vec[i]) begin
      @(negedge clk); close_valid = 1; close_idx = idx_t'(i);
      while (!close_ready) @(negedge clk);
      @(negedge clk); close_valid = 0;
      model_open[i] = 0;
    end
    s0 = n_groups;
    for (int k = 0; k < 6; k++) quote(k * 21 % N, 75 + k);
    wait_quiet();
    $display("end: feeds %0d events %0d runs %0d pre %0d skip %0d pass %0d accept %0d reject %0d close %0d orders %0d",
             stats.n_feeds, stats.n_events, stats.n_runs, stats.n_pre, stats.n_pre_skip, stats.n_pass,
             stats.n_accept, stats.n_reject, stats.n_close, n_orders);
    $display("mechanisms: vwap-in-run %0d feed-in-run %0d pre-after-open %0d order-stall %0d",
             vw_in_run, feed_in_run, pre_after_open, stall);
    checks++;
    if (n_orders != int'(stats.n_accept) * NS || n_orders == 0) begin failures++; $display("orders %0d", n_orders); end
    checks++; if (stats.n_feeds <= stats.n_events) begin failures++; $display("no quote filtered"); end
    checks++; if (stats.n_pre_skip == 0) begin failures++; $display("preprocessing never skipped"); end
    checks++; if (pre_after_open == 0) begin failures++; $display("no preprocessing after opening"); end
    checks++; if (stats.n_reject == 0) begin failures++; $display("no rejection"); end
    checks++; if (stats.n_close == 0) begin failures++; $display("no close"); end
    checks++; if (vw_in_run == 0 || feed_in_run == 0) begin failures++; $display("no update during a run"); end
    checks++; if (stall == 0) begin failures++; $display("no back-pressure"); end
    checks++; if (n_groups == s0) begin failures++; $display("no opening after the closes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
