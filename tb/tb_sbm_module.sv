// tb_sbm_module: the SBM module at N = 16, Ns = 2, M = 4, L = 4, with the
// price list and the judgment module modelled in the testbench. It loads
// sigma and 1/pbase, runs the day preprocessing, sets VWAPs and quotes, and
// then sends tick events. Checks:
//   - every candidate group satisfies the constraints (2 stocks, one long,
//     one short, none open) with sides matching the deviations, and its
//     cost, recomputed here, is within the threshold;
//   - each tick event re-arms n_run runs, and the run counter matches;
//   - preprocessing runs on the first run after a tick, after an opening
//     (verdict open), after a VWAP update and after a close (open-list
//     change), and is skipped otherwise;
//   - open stocks are never proposed again.
module tb_sbm_module;
  import sbm_pkg::*;
  localparam int N = 16, NS = 2, M = 4, L = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic seed_load = 0, host_we = 0, day_prep = 0;
  host_wr_t host_wr;
  logic ev_valid = 0, ev_ready, vw_valid = 0, vw_ready;
  idx_t ev_idx;
  vwap_info_t vw;
  logic [3:0] p_idx;
  price_t p_ask, p_bid;
  logic [N-1:0] open_vec = '0;
  logic o_changed = 0, verdict_valid = 0, verdict_open = 0, cand_valid, cand_ready = 0, busy;
  idx_t cand_idx [NS];
  side_e cand_side [NS];
  logic [31:0] n_runs, n_pre, n_pre_skip, n_pass, n_days;

  sbm_module #(.N(N), .NS(NS), .M(M), .L(L)) dut (.clk, .rst_n, .cfg, .seed_load, .host_we, .host_wr,
    .day_prep, .ev_valid, .ev_ready, .ev_idx, .vw_valid, .vw_ready, .vw, .p_idx, .p_ask, .p_bid,
    .open_vec, .o_changed, .verdict_valid, .verdict_open, .cand_valid, .cand_ready, .cand_idx,
    .cand_side, .busy, .n_runs, .n_pre, .n_pre_skip, .n_pass, .n_days);

  price_t ask [N], bid [N];
  assign p_ask = ask[p_idx];
  assign p_bid = bid[p_idx];
  longint sigma [N][N], vwap [N];
  logic [31:0] inv [N];

  function automatic longint clip(longint v);
    if (v > 64'sh7fff_ffff) return 64'sh7fff_ffff;
    if (v < -64'sh8000_0000) return -64'sh8000_0000;
    return v;
  endfunction
  function automatic longint mul(longint a, longint b);
    return clip((a * b) >>> 24);
  endfunction
  function automatic longint dpv(int i);
    if (ask[i] == 0 || bid[i] == 0 || open_vec[i]) return 0;
    return clip((((longint'(ask[i]) + longint'(bid[i])) * 128 - vwap[i]) * longint'(inv[i])) >>> 16);
  endfunction

  task automatic hw(host_tgt_e t, int a, logic [31:0] d);
    @(negedge clk); host_we = 1; host_wr.tgt = t; host_wr.addr = 32'(a); host_wr.data = d;
    @(negedge clk); host_we = 0;
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog: runs %0d", n_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // judgment model: opens every valid group while fewer than 4 stocks are open
  int accepted = 0, proposals = 0;
  always @(posedge clk) begin
    verdict_valid <= 0;
    o_changed <= 0;
    if (cand_valid && cand_ready) begin
      longint d0, d1, c;
      proposals++;
      d0 = dpv(cand_idx[0]); d1 = dpv(cand_idx[1]);
      c = clip(-mul(cfg.c1, d0 < 0 ? -d0 : d0) - mul(cfg.c1, d1 < 0 ? -d1 : d1)
               + sigma[cand_idx[0]][cand_idx[1]] + sigma[cand_idx[1]][cand_idx[0]]);
      checks++;
      if (cand_idx[0] == cand_idx[1] || open_vec[cand_idx[0]] || open_vec[cand_idx[1]] ||
          d0 == 0 || d1 == 0 || (d0 < 0) == (d1 < 0) ||
          cand_side[0] != (d0 < 0 ? SIDE_BUY : SIDE_SELL) || cand_side[1] != (d1 < 0 ? SIDE_BUY : SIDE_SELL) ||
          c > longint'(cfg.cost_thr)) begin
        failures++;
        $display("bad group %0d %0d dp %0d %0d cost %0d", cand_idx[0], cand_idx[1], d0, d1, c);
      end
      verdict_valid <= 1;
      if ($countones(open_vec) + NS <= 4) begin
        verdict_open <= 1;
        open_vec[cand_idx[0]] <= 1; open_vec[cand_idx[1]] <= 1;
        o_changed <= 1;
        accepted++;
      end else verdict_open <= 0;
    end
  end
  always @(negedge clk) cand_ready = ($urandom % 2) != 0;

  task automatic wait_idle();
    do @(negedge clk); while (busy || ev_valid || vw_valid || dut.runs_left != 0);
    repeat (3) @(negedge clk);
  endtask
  task automatic tick(int i, price_t a, price_t b);
    ask[i] = a; bid[i] = b;
    @(negedge clk); ev_valid = 1; ev_idx = idx_t'(i);
    while (!ev_ready) @(negedge clk);
    @(negedge clk); ev_valid = 0;
  endtask

  initial begin
    int r0, p0, s0, a0;
    cfg = '0;
    cfg.c1 = 32'sd100 <<< 24;         // 100
    cfg.c2 = 32'sh0080_0000;          // 0.5
    cfg.c3 = 32'sh0080_0000;          // 0.5
    cfg.dt_c0 = 32'sh0019_999a;       // dt * c0 = 0.02 * 5
    cfg.dt_a0 = 32'sh0019_999a;       // dt * a0 = 0.02 * 5
    cfg.damp_dec = 32'sh0000_15d8;    // dt * a0 / 300
    cfg.n_step = 300;
    cfg.n_run = 3;
    cfg.cost_thr = 32'sh0000_0000;
    cfg.seed = 32'h0BAD_5EED;
    cfg.pmax = 4;
    cfg.trade_en = 1;
    for (int i = 0; i < N; i++) begin
      ask[i] = 0; bid[i] = 0;
      for (int j = i; j < N; j++) begin
        sigma[i][j] = (i == j) ? 32'sh0100_0000 : longint'($urandom % 32'h0040_0000);
        sigma[j][i] = sigma[i][j];
      end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); seed_load = 1; @(negedge clk); seed_load = 0;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) hw(HW_SIGMA, i * N + j, 32'(sigma[i][j]));
      inv[i] = 32'(64'h1_0000_0000 / 64'(20000));
      hw(HW_INVBASE, i, inv[i]);
    end
    @(negedge clk); day_prep = 1; @(negedge clk); day_prep = 0;
    for (int i = 0; i < N; i++) begin
      vwap[i] = 20000 * 256;
      @(negedge clk); vw_valid = 1; vw.idx = idx_t'(i); vw.vwap = vwap_t'(vwap[i]);
      while (!vw_ready) @(negedge clk);
    end
    @(negedge clk); vw_valid = 0;
    wait_idle();
    checks++;
    if (n_days != 1 || n_runs != 0) begin failures++; $display("day %0d runs %0d", n_days, n_runs); end
    // quotes: stocks 0..7 below VWAP (long candidates), 8..15 above
    for (int i = 0; i < N; i++) begin
      int dev;
      dev = 10 + $urandom % 60;
      tick(i, price_t'(i < 8 ? 20000 - dev : 20000 + dev), price_t'(i < 8 ? 19990 - dev : 19990 + dev));
    end
    wait_idle();
    $display("runs %0d pre %0d skip %0d pass %0d proposals %0d accepted %0d", n_runs, n_pre, n_pre_skip, n_pass, proposals, accepted);
    checks++;
    if (n_runs < 32'(cfg.n_run) || n_runs > 32'(cfg.n_run) * N) begin failures++; $display("run count"); end
    checks++;
    if (n_pre + n_pre_skip != n_runs) failures++;
    // quiet market: a single tick -> exactly n_run runs, preprocessing only on
    // the first run unless the last run opened positions
    r0 = n_runs; p0 = n_pre; s0 = n_pre_skip; a0 = accepted;
    tick(3, 19950, 19940);
    wait_idle();
    checks++;
    if (n_runs - r0 != 32'(cfg.n_run)) begin failures++; $display("tick gave %0d runs", n_runs - r0); end
    checks++;
    if (n_pre - p0 < 1 || n_pre - p0 > 1 + (accepted - a0)) begin failures++; $display("pre %0d", n_pre - p0); end
    checks++;
    if (n_pre_skip == 0) begin failures++; $display("preprocessing never skipped"); end
    // a VWAP update and a close between runs force preprocessing
    r0 = n_runs; p0 = n_pre;
    @(negedge clk); vw_valid = 1; vw.idx = 0; vw.vwap = vwap_t'(20010 * 256); vwap[0] = 20010 * 256;
    while (!vw_ready) @(negedge clk);
    @(negedge clk); vw_valid = 0;
    tick(5, 19960, 19950);
    wait_idle();
    checks++;
    if (n_pre - p0 < 1) begin failures++; $display("VWAP update did not force preprocessing"); end
    for (int i = 0; i < N; i++) if (open_vec[i]) begin
      @(negedge clk); open_vec[i] = 0; o_changed = 1; @(negedge clk); o_changed = 0;
    end
    p0 = n_pre;
    tick(9, 20070, 20060);
    wait_idle();
    checks++;
    if (n_pre - p0 < 1) begin failures++; $display("close did not force preprocessing"); end
    $display("runs %0d pre %0d skip %0d pass %0d proposals %0d accepted %0d", n_runs, n_pre, n_pre_skip, n_pass, proposals, accepted);
    checks++;
    if (proposals == 0 || accepted == 0) begin failures++; $display("no group was proposed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
