// tb_workload_latency: the published operating point run on the full-size
// top (N = 128, Ns = 4, 8 MMTE blocks of 16 lanes, 300 SB steps), measuring
// what the published figures are about: the length of one SBM run and the
// delay from a market feed to the first order, plus the behaviour under a
// burst of feeds.
//
//   1. Run length. Every run of the SBM module is timed from the cycle
//      sbm_busy rises to the cycle it falls. A run with tick preprocessing
//      must take at least T_pre + T_core + T_post cycles and at most 16
//      cycles more (controller and handshake overhead); a run that skips
//      the preprocessing at least T_core + T_post. The component counts are
//      this design's: T_pre = 2N+1, T_core = N/M + 3 + 300 (N/M * N/L + 5),
//      T_post = N + Ns^2 + 2.
//   2. Burst. With trading disabled, one feed starts the runs and 64 more
//      feeds with new quotes (deviations not used before) arrive during
//      the first run. All must be taken in (the feed and event counters
//      grow by 65) and they must be folded into few preprocessing passes:
//      at most 3 for the 65 events.
//   3. Feed-to-order latency. With trading enabled and the module idle, a
//      single feed is sent and the cycles until the first order record are
//      counted; at most n_run runs (each with preprocessing, the worst case)
//      plus 64 cycles of channel hops may pass. Up to four feeds are tried
//      until one produces an order. The latency is printed in cycles and in
//      microseconds at a 208 MHz clock.
// The problem data are the same kind as in the end-to-end test: half the
// stocks quoted below their VWAP and half above, with small random-looking
// correlation factors.
module tb_workload_latency;
  import sbm_pkg::*;
  localparam int N = 128, NS = 4, M = 8, L = 16, NSTEP = 300, NRUN = 2;
  localparam int T_PRE  = 2 * N + 1;
  localparam int T_CORE = N / M + 3 + NSTEP * ((N / M) * (N / L) + 5);
  localparam int T_POST = N + NS * NS + 2;
  localparam int SLACK  = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic seed_load = 0, feed_valid = 0, feed_ready, host_we = 0, day_prep = 0;
  feed_t feed;
  host_wr_t host_wr;
  logic vw_valid = 0, vw_ready, close_valid = 0, close_ready, ord_valid, ord_ready = 1, sbm_busy;
  vwap_info_t vw;
  idx_t close_idx;
  order_t ord;
  logic [N-1:0] open_vec;
  stats_t stats;

  trading_fpga_top dut (.clk, .rst_n, .cfg, .seed_load, .feed_valid, .feed_ready, .feed,
    .host_we, .host_wr, .day_prep, .vw_valid, .vw_ready, .vw, .close_valid, .close_ready,
    .close_idx, .ord_valid, .ord_ready, .ord, .open_vec, .sbm_busy, .stats);

  bit below [N];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // 1. time every run (busy interval) once the day preprocessing is over
  bit timing_on = 0, busy_q = 0;
  longint t_rise = 0;
  logic [31:0] pre_at_rise = 0;
  int runs_pre = 0, runs_skip = 0, min_pre = 0, max_pre = 0, min_skip = 0, max_skip = 0;
  always @(posedge clk) if (rst_n) begin
    busy_q <= sbm_busy;
    if (timing_on && sbm_busy && !busy_q) begin t_rise = cyc; pre_at_rise = stats.n_pre; end
    if (timing_on && !sbm_busy && busy_q) begin
      int d, lo;
      d = int'(cyc - t_rise);
      checks++;
      if (stats.n_pre != pre_at_rise) begin
        lo = T_PRE + T_CORE + T_POST;
        if (runs_pre == 0 || d < min_pre) min_pre = d;
        if (d > max_pre) max_pre = d;
        runs_pre++;
      end else begin
        lo = T_CORE + T_POST;
        if (runs_skip == 0 || d < min_skip) min_skip = d;
        if (d > max_skip) max_skip = d;
        runs_skip++;
      end
      if (d < lo || d > lo + SLACK) begin
        failures++; $display("run of %0d cycles, expected %0d..%0d", d, lo, lo + SLACK);
      end
    end
  end

  int n_orders = 0;
  longint t_first_order = -1;
  always @(posedge clk) if (rst_n && ord_valid && ord_ready) begin
    if (t_first_order < 0) t_first_order = cyc;
    n_orders++;
  end

  task automatic send_feed(int i, price_t a, price_t b);
    @(negedge clk);
    feed_valid = 1; feed.idx = idx_t'(i); feed.ask = a; feed.bid = b;
    while (!feed_ready) @(negedge clk);
    @(negedge clk); feed_valid = 0;
  endtask
  task automatic quote(int i, int dev);
    if (below[i]) send_feed(i, price_t'(20005 - dev), price_t'(19995 - dev));
    else          send_feed(i, price_t'(20005 + dev), price_t'(19995 + dev));
  endtask
  task automatic send_vwap(int i, int v);
    @(negedge clk);
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
    logic [31:0] f0, e0, p0, r0;
    longint t0, lat;
    int tries;
    cfg = '0;
    cfg.c1 = 32'sd100 <<< 24;
    cfg.c2 = 32'sh0080_0000;
    cfg.c3 = 32'sh0080_0000;
    cfg.dt_c0 = 32'sh0019_999a;
    cfg.dt_a0 = 32'sh0019_999a;
    cfg.damp_dec = 32'sh0000_15d8;
    cfg.n_step = 16'(NSTEP);
    cfg.n_run = 16'(NRUN);
    cfg.cost_thr = 32'sh0000_0000;
    cfg.seed = 32'hC0FF_EE01;
    cfg.pmax = 4;
    cfg.trade_en = 0;
    for (int i = 0; i < N; i++) below[i] = (i % 2) == 1;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); seed_load = 1; @(negedge clk); seed_load = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        @(negedge clk); host_we = 1; host_wr.tgt = HW_SIGMA; host_wr.addr = 32'(i * N + j);
        host_wr.data = (i == j) ? 32'h0100_0000 : 32'(((i * 104729 + j * 104729 + (i * j) % 89) * 2246822519) % 32'h0040_0000);
      end
    for (int i = 0; i < N; i++) begin
      @(negedge clk); host_wr.tgt = HW_INVBASE; host_wr.addr = 32'(i); host_wr.data = 32'(64'h1_0000_0000 / 64'(20000));
      @(negedge clk); host_wr.tgt = HW_LOTS; host_wr.addr = 32'(i); host_wr.data = 32'(1 + i % 5);
    end
    @(negedge clk); host_we = 0; day_prep = 1; @(negedge clk); day_prep = 0;
    for (int i = 0; i < N; i++) send_vwap(i, 20000 * 256);
    wait_quiet();
    timing_on = 1;
    for (int i = 0; i < N; i++) quote(i, 5 + (i * 53) % 60);
    wait_quiet();

    // 2. burst of feeds during a run, trading disabled
    f0 = stats.n_feeds; e0 = stats.n_events; p0 = stats.n_pre; r0 = stats.n_runs;
    quote(3, 66);
    while (!sbm_busy) @(negedge clk);
    for (int k = 0; k < 64; k++) quote(k * 2, 67 + (k * 29) % 25);
    wait_quiet();
    $display("burst: feeds +%0d events +%0d runs +%0d pre +%0d",
             stats.n_feeds - f0, stats.n_events - e0, stats.n_runs - r0, stats.n_pre - p0);
    checks++;
    if (stats.n_feeds - f0 != 65 || stats.n_events - e0 != 65) begin failures++; $display("feeds lost"); end
    checks++;
    if (stats.n_pre - p0 > 3 || stats.n_pre - p0 == 0) begin failures++; $display("burst not folded"); end
    checks++;
    if (n_orders != 0) begin failures++; $display("orders while trading is disabled"); end

    // 3. feed-to-order latency, trading enabled, module idle
    cfg.trade_en = 1;
    repeat (4) @(negedge clk);
    tries = 0;
    while (n_orders == 0 && tries < 4) begin
      @(negedge clk); t0 = cyc;
      quote(tries * 8 + 1, 70 + tries);
      wait_quiet();
      tries++;
    end
    checks++;
    if (n_orders == 0) begin failures++; $display("no order after %0d feeds", tries); end
    else begin
      lat = t_first_order - t0;
      $display("feed-to-order latency %0d cycles = %0.1f us at 208 MHz (feed %0d of %0d)",
               lat, real'(lat) / 208.0, tries, tries);
      if (lat > longint'(NRUN * (T_PRE + T_CORE + T_POST + SLACK) + 64) || lat < longint'(T_CORE)) begin
        failures++; $display("latency outside the expected range");
      end
      checks++;
      if (n_orders % NS != 0) begin failures++; $display("partial group"); end
    end

    $display("runs with preprocessing %0d (%0d..%0d cycles, %0.1f us), without %0d (%0d..%0d cycles)",
             runs_pre, min_pre, max_pre, real'(max_pre) / 208.0, runs_skip, min_skip, max_skip);
    checks++;
    if (runs_pre == 0 || runs_skip == 0) begin failures++; $display("a run kind never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
