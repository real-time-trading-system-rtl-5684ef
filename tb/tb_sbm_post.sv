// tb_sbm_post: postprocessing at N = 8, Ns = 2 over 300 random spin
// configurations (1 to 3 stocks selected, random deviation signs, some zero
// deviations). Checks pass/fail against the constraints (group size,
// delta-neutral balance, no zero deviation, H_cost <= threshold), the cost
// -c1 sum |dp_i| b_i + sum_{i!=j} sigma_ij b_i b_j of exact-size groups,
// the group and sides, that each reason for rejection occurs, and the
// N + Ns^2 + 2 cycle schedule.
module tb_sbm_post;
  import sbm_pkg::*;
  localparam int N = 8, NS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, busy, done, pass;
  fix_t c1 = 32'sh0800_0000, cost_thr = -32'sh0000_1000;
  logic [2:0] rd_i;
  logic [5:0] sig_addr;
  fix_t x, dp, sig_data, cost;
  idx_t cand_idx [NS];
  side_e cand_side [NS];
  logic [15:0] n_sel;
  logic signed [15:0] balance;
  fix_t xs [N], dps [N], sigma [N*N];
  assign x = xs[rd_i];
  assign dp = dps[rd_i];
  assign sig_data = sigma[sig_addr];
  sbm_post #(.N(N), .NS(NS)) dut (.clk, .rst_n, .start, .busy, .done, .c1, .cost_thr, .rd_i, .x, .dp,
    .sig_addr, .sig_data, .pass, .cost, .cand_idx, .cand_side, .n_sel, .balance);

  function automatic longint clip(longint v);
    if (v > 64'sh7fff_ffff) return 64'sh7fff_ffff;
    if (v < -64'sh8000_0000) return -64'sh8000_0000;
    return v;
  endfunction
  function automatic longint mul(longint a, longint b);
    return clip((a * b) >>> 24);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pick, cyc, nsel, bal, sel [$], n_pass = 0, r_size = 0, r_bal = 0, r_zero = 0, r_cost = 0;
    bit zero, exp_pass;
    longint c;
    for (int i = 0; i < N * N; i++) sigma[i] = fix_t'($urandom % 32'h0080_0000);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      sel.delete(); nsel = 0; bal = 0; zero = 0; c = 0;
      for (int i = 0; i < N; i++) begin
        dps[i] = ($urandom % 10 == 0) ? 0 : fix_t'($signed($urandom) >>> 12);
        xs[i] = -fix_t'($urandom % 32'h0100_0000);
      end
      nsel = 1 + $urandom % 3;
      for (int k = 0; k < nsel; k++) begin
        pick = $urandom % N;
        if (xs[pick] <= 0) xs[pick] = fix_t'(1 + $urandom % 32'h0100_0000);
      end
      nsel = 0;
      for (int i = 0; i < N; i++) if (xs[i] > 0) begin
        sel.push_back(i); nsel++;
        bal += (dps[i] > 0) ? 1 : (dps[i] < 0) ? -1 : 0;
        if (dps[i] == 0) zero = 1;
        c -= mul(c1, dps[i] < 0 ? -dps[i] : dps[i]);
      end
      if (nsel == NS) c += sigma[sel[0]*N+sel[1]] + sigma[sel[1]*N+sel[0]];
      c = clip(c);
      exp_pass = (nsel == NS) && bal == 0 && !zero && c <= cost_thr;
      if (nsel != NS) r_size++; else if (bal != 0) r_bal++; else if (zero) r_zero++;
      else if (c > cost_thr) r_cost++; else n_pass++;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != N + NS * NS + 2) begin failures++; $display("post took %0d cycles", cyc); end
      checks++;
      if (pass != exp_pass) begin failures++; $display("trial %0d pass %b expected %b", t, pass, exp_pass); end
      if (nsel == NS) begin
        checks++;
        if (longint'(cost) != c) begin failures++; $display("cost %0d vs %0d", cost, c); end
        for (int k = 0; k < NS; k++) begin
          checks++;
          if (int'(cand_idx[k]) != sel[k] ||
              cand_side[k] != ((dps[sel[k]] < 0) ? SIDE_BUY : SIDE_SELL)) failures++;
        end
      end
    end
    checks++;
    if (n_pass == 0 || r_size == 0 || r_bal == 0 || r_zero == 0 || r_cost == 0) begin
      failures++; $display("cases pass %0d size %0d bal %0d zero %0d cost %0d", n_pass, r_size, r_bal, r_zero, r_cost);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
