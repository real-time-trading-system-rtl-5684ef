// tb_mmte: one MMTE block (block 1 of 4, N = 16, L = 4). After loading its
// J-day rows and biases it is initialised (x = 0 written to X', random y
// from its xorshift generator) and then driven through three time-evolution
// steps with random position chunks; every X' write-back is compared with a
// behavioural model of JX (row dot product) followed by the TE update, and
// the latency from the last chunk of a row to its X' write (4 clock edges) is
// checked.
module tb_mmte;
  import sbm_pkg::*;
  localparam int N = 16, M = 4, L = 4, R = N / M, C = N / L, BLK = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic jd_we = 0, hd_we = 0, ht_we = 0, seed_load = 0, init_valid = 0, chunk_valid = 0;
  logic [3:0] jd_row, jd_col, hd_row, ht_row, init_row, row;
  logic [1:0] chunk;
  fix_t jd_data, hd_data, ht_data, dy_tick;
  fix_t xin [L];
  sgn_t sgn_all [N];
  logic xw_valid, busy;
  logic [3:0] xw_idx;
  fix_t xw_x;
  fix_t c3_half = 32'sh0030_0000, dt_c0 = 32'sh0020_0000, dt_a0 = 32'sh0030_0000, damp = 32'sh0010_0000;
  logic [31:0] seed = 32'hCAFE_0001;
  mmte #(.N(N), .M(M), .L(L), .BLK(BLK)) dut (.clk, .rst_n, .jd_we, .jd_row, .jd_col, .jd_data,
    .hd_we, .hd_row, .hd_data, .ht_we, .ht_row, .ht_data, .seed_load, .seed, .init_valid, .init_row,
    .chunk_valid, .row, .chunk, .xin, .dy_tick, .sgn_all, .c3_half, .dt_c0, .dt_a0, .damp,
    .xw_valid, .xw_idx, .xw_x, .busy);

  function automatic longint clip(longint v);
    if (v > 64'sh7fff_ffff) return 64'sh7fff_ffff;
    if (v < -64'sh8000_0000) return -64'sh8000_0000;
    return v;
  endfunction
  function automatic longint mul(longint a, longint b);
    return clip((a * b) >>> 24);
  endfunction
  function automatic logic [31:0] xs(logic [31:0] s);
    s ^= s << 13; s ^= s >> 17; s ^= s << 5; return s;
  endfunction

  longint J [R][N], hd [R], ht [R], x [R], y [R], exp_x [N];
  logic exp_v [N];
  int last_chunk_cyc [N], cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && xw_valid) begin
    checks++;
    if (!exp_v[xw_idx] || longint'(xw_x) != exp_x[xw_idx]) begin
      failures++; $display("write idx %0d x=%0d expected %0d", xw_idx, xw_x, exp_x[xw_idx]);
    end
    if (last_chunk_cyc[xw_idx] >= 0) begin
      checks++;
      if (cyc - last_chunk_cyc[xw_idx] != 5) begin
        failures++; $display("latency %0d", cyc - last_chunk_cyc[xw_idx]);
      end
    end
    exp_v[xw_idx] = 0;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rs;
    longint xv [N], dy, jx, f, t, y1, x1;
    int writes;
    for (int i = 0; i < N; i++) begin exp_v[i] = 0; last_chunk_cyc[i] = -1; sgn_all[i] = sgn_t'(int'($urandom % 3) - 1); end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < R; r++) begin
      for (int j = 0; j < N; j++) begin
        J[r][j] = longint'($signed($urandom)) >>> 8;
        @(negedge clk); jd_we = 1; jd_row = 4'(r); jd_col = 4'(j); jd_data = fix_t'(J[r][j]);
      end
      hd[r] = longint'($signed($urandom)) >>> 9; ht[r] = longint'($signed($urandom)) >>> 9;
      @(negedge clk); jd_we = 0; hd_we = 1; ht_we = 1; hd_row = 4'(r); ht_row = 4'(r);
      hd_data = fix_t'(hd[r]); ht_data = fix_t'(ht[r]);
    end
    @(negedge clk); hd_we = 0; ht_we = 0; seed_load = 1;
    @(negedge clk); seed_load = 0;
    rs = seed ^ (32'h9E37_79B9 * 32'(BLK + 1));
    for (int r = 0; r < R; r++) begin
      x[r] = 0; y[r] = longint'($signed(rs)) >>> 10; rs = xs(rs);
      exp_x[BLK*R+r] = 0; exp_v[BLK*R+r] = 1;
      init_valid = 1; init_row = 4'(r);
      @(negedge clk);
    end
    init_valid = 0;
    repeat (3) @(negedge clk);
    for (int s = 0; s < 3; s++) begin
      for (int i = 0; i < N; i++) xv[i] = (i / R == BLK) ? x[i % R] : longint'($signed($urandom)) >>> 8;
      dy = longint'($signed($urandom)) >>> 8;
      dy_tick = fix_t'(dy);
      for (int r = 0; r < R; r++) begin
        jx = 0;
        for (int j = 0; j < N; j++) jx += mul(J[r][j], xv[j]);
        jx = clip(jx);
        t  = clip(dy - sgn_all[BLK*R+r] * x[r]);
        f  = clip(jx - hd[r] - ht[r] - sgn_all[BLK*R+r] * mul(c3_half, t));
        y1 = clip(y[r] + mul(dt_c0, f) - mul(damp, x[r]));
        x1 = clip(x[r] + mul(dt_a0, y1));
        if (x1 > (1 <<< 24)) begin x1 = 1 <<< 24; y1 = 0; end
        else if (x1 < -(1 <<< 24)) begin x1 = -(1 <<< 24); y1 = 0; end
        exp_x[BLK*R+r] = x1; exp_v[BLK*R+r] = 1;
        for (int c = 0; c < C; c++) begin
          chunk_valid = 1; row = 4'(r); chunk = 2'(c);
          for (int l = 0; l < L; l++) xin[l] = fix_t'(xv[c*L+l]);
          if (c == C - 1) last_chunk_cyc[BLK*R+r] = cyc;
          @(negedge clk);
        end
        x[r] = x1; y[r] = y1;
      end
      chunk_valid = 0;
      repeat (6) @(negedge clk);
    end
    writes = 0;
    for (int i = 0; i < N; i++) if (exp_v[i]) writes++;
    checks++;
    if (writes != 0) begin failures++; $display("%0d write-backs missing", writes); end
    checks++;
    if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
