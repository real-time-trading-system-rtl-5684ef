// tb_sbm_pre: preprocessing at N = 8, Ns = 2. The testbench models the
// memory units (sigma, price list, VWAP, 1/pbase, open list, dp) and
// captures every write to the SB-core problem memories. Checks the day pass
// (Jday_ij = -(sigma_ij + c2)/2 off the diagonal, 0 on it, and
// hday_i = (sum_{j!=i} sigma_ij + c2 (N - 2Ns))/2) and two tick passes
// (dp, sgn, htick = -c1|dp|/2 + c3 (sum sgn)/2 sgn_i; zero dp for open or
// unquoted stocks), and the pass lengths N*N + 1 and 2N + 1 cycles.
module tb_sbm_pre;
  import sbm_pkg::*;
  localparam int N = 8, NS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start_day = 0, start_tick = 0, busy, done;
  fix_t c1 = 32'sh0400_0000, c2 = 32'sh0020_0000, c3 = 32'sh0030_0000;
  logic [5:0] sig_addr;
  logic [2:0] rd_i, jd_i, jd_j;
  fix_t sig_data, dp_rd, dp_wdata, jd_data, hd_data, ht_data;
  price_t ask, bid;
  vwap_t vwap;
  inv_t invbase;
  logic [N-1:0] open_vec = '0;
  logic dp_we, jd_we, hd_we, ht_we, sg_we;
  sgn_t sg_data;
  logic signed [15:0] sgn_sum;

  fix_t sigma [N*N], dpm [N];
  price_t pa [N], pb [N];
  vwap_t vw [N];
  inv_t inv [N];
  assign sig_data = sigma[sig_addr];
  assign ask = pa[rd_i];
  assign bid = pb[rd_i];
  assign vwap = vw[rd_i];
  assign invbase = inv[rd_i];
  assign dp_rd = dpm[rd_i];

  sbm_pre #(.N(N), .NS(NS)) dut (.clk, .rst_n, .start_day, .start_tick, .busy, .done, .c1, .c2, .c3,
    .sig_addr, .sig_data, .rd_i, .ask, .bid, .vwap, .invbase, .open_vec, .dp_rd, .dp_we, .dp_wdata,
    .jd_we, .jd_i, .jd_j, .jd_data, .hd_we, .hd_data, .ht_we, .ht_data, .sg_we, .sg_data, .sgn_sum);

  longint gj [N][N], ghd [N], ght [N];
  int gsg [N];
  always @(posedge clk) begin
    if (dp_we) dpm[rd_i] <= dp_wdata;
    if (jd_we) gj[jd_i][jd_j] = jd_data;
    if (hd_we) ghd[jd_i] = hd_data;
    if (ht_we) ght[rd_i] = ht_data;
    if (sg_we) gsg[rd_i] = sg_data;
  end

  function automatic longint clip(longint v);
    if (v > 64'sh7fff_ffff) return 64'sh7fff_ffff;
    if (v < -64'sh8000_0000) return -64'sh8000_0000;
    return v;
  endfunction
  function automatic longint mul(longint a, longint b);
    return clip((a * b) >>> 24);
  endfunction

  task automatic pulse_and_time(input bit day, output int cyc);
    @(negedge clk);
    if (day) start_day = 1; else start_tick = 1;
    @(negedge clk); start_day = 0; start_tick = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, s;
    longint h, dp [N], e;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) sigma[i*N+j] = fix_t'($urandom % 32'h0100_0000);
    repeat (2) @(posedge clk); rst_n = 1;
    pulse_and_time(1, cyc);
    checks++;
    if (cyc != N * N + 1) begin failures++; $display("day pass %0d cycles", cyc); end
    for (int i = 0; i < N; i++) begin
      h = 0;
      for (int j = 0; j < N; j++) begin
        e = (i == j) ? 0 : -clip((longint'(sigma[i*N+j]) + c2) >>> 1);
        if (i != j) h += sigma[i*N+j];
        checks++;
        if (gj[i][j] != e) begin failures++; $display("Jday[%0d][%0d] %0d vs %0d", i, j, gj[i][j], e); end
      end
      e = clip((h + longint'(c2) * (N - 2 * NS)) >>> 1);
      checks++;
      if (ghd[i] != e) begin failures++; $display("hday[%0d] %0d vs %0d", i, ghd[i], e); end
    end
    for (int round = 0; round < 2; round++) begin
      for (int i = 0; i < N; i++) begin
        pa[i] = (i == 5 && round == 0) ? 0 : 20000 + $urandom % 100;
        pb[i] = pa[i] == 0 ? 0 : pa[i] - 10;
        vw[i] = (20000 + $urandom % 100) * 256 + $urandom % 256;
        inv[i] = 32'(64'h1_0000_0000 / 64'(20000 + $urandom % 5));
      end
      open_vec = round == 0 ? 8'b0000_0100 : 8'b1000_0000;
      pulse_and_time(0, cyc);
      checks++;
      if (cyc != 2 * N + 1) begin failures++; $display("tick pass %0d cycles", cyc); end
      s = 0;
      for (int i = 0; i < N; i++) begin
        if (pa[i] == 0 || pb[i] == 0 || open_vec[i]) dp[i] = 0;
        else dp[i] = clip((((longint'(pa[i]) + longint'(pb[i])) * 128 - longint'(vw[i])) * longint'(inv[i])) >>> 16);
        s += (dp[i] > 0) ? 1 : (dp[i] < 0) ? -1 : 0;
        checks++;
        if (longint'(dpm[i]) != dp[i]) begin failures++; $display("dp[%0d] %0d vs %0d", i, dpm[i], dp[i]); end
        checks++;
        if (gsg[i] != ((dp[i] > 0) ? 1 : (dp[i] < 0) ? -1 : 0)) failures++;
      end
      for (int i = 0; i < N; i++) begin
        e = clip(-(mul(c1, dp[i] < 0 ? -dp[i] : dp[i]) >>> 1)
                 + ((dp[i] > 0) ? 1 : (dp[i] < 0) ? -1 : 0) * clip((longint'(c3) * s) >>> 1));
        checks++;
        if (ght[i] != e) begin failures++; $display("htick[%0d] %0d vs %0d", i, ght[i], e); end
      end
      checks++;
      if (int'(sgn_sum) != s) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
