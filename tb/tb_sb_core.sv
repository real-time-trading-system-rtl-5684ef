// tb_sb_core: self-checking test of the SB core at N = 16, M = 4, L = 4.
// Random day couplings, biases and tick signs are written into the core; a
// behavioural ballistic-SB model (same Q7.24 arithmetic, written out here
// independently of the RTL) predicts every final position after n_step
// steps, including the xorshift initial momenta. The cycle count of a run is
// checked against R*C + 5 cycles per step plus the initialisation.
module tb_sb_core;
  import sbm_pkg::*;
  localparam int N = 16, M = 4, L = 4, R = N / M, C = N / L, NSTEP = 25;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic jd_we = 0, hd_we = 0, ht_we = 0, sg_we = 0, seed_load = 0, start = 0;
  logic [3:0] jd_i, jd_j, hd_i, ht_i, sg_i, pt_idx;
  fix_t jd_data, hd_data, ht_data, pt_x;
  sgn_t sg_data;
  logic busy, done;
  fix_t c3_half = 32'sh0020_0000, dt_c0 = 32'sh0008_0000, dt_a0 = 32'sh0005_0000;
  fix_t damp_dec = 32'sh0000_3000;
  logic [31:0] seed = 32'h1234_5678;

  sb_core #(.N(N), .M(M), .L(L)) dut (.clk, .rst_n, .jd_we, .jd_i, .jd_j, .jd_data,
    .hd_we, .hd_i, .hd_data, .ht_we, .ht_i, .ht_data, .sg_we, .sg_i, .sg_data,
    .seed_load, .seed, .c3_half, .dt_c0, .dt_a0, .damp_dec, .n_step(16'(NSTEP)),
    .start, .busy, .done, .pt_idx, .pt_x);

  longint J [N][N];
  longint hd [N], ht [N], x [N], y [N];
  int sg [N];

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

  task automatic model();
    longint jx [N], nx [N], ny [N], dY, damp, f, t, ft, y1, x1;
    logic [31:0] r;
    for (int m = 0; m < M; m++) begin
      r = seed ^ (32'h9E37_79B9 * 32'(m + 1));
      if (r == 0) r = 1;
      for (int k = 0; k < R; k++) begin
        x[m*R+k] = 0;
        y[m*R+k] = longint'($signed(r)) >>> 10;
        r = xs(r);
      end
    end
    damp = dt_a0;
    for (int s = 0; s < NSTEP; s++) begin
      dY = 0;
      for (int j = 0; j < N; j++) dY += sg[j] * x[j];
      dY = clip(dY);
      for (int i = 0; i < N; i++) begin
        jx[i] = 0;
        for (int j = 0; j < N; j++) jx[i] += mul(J[i][j], x[j]);
        jx[i] = clip(jx[i]);
        t  = clip(dY - sg[i] * x[i]);
        ft = -sg[i] * mul(c3_half, t);
        f  = clip(jx[i] - hd[i] - ht[i] + ft);
        y1 = clip(y[i] + mul(dt_c0, f) - mul(damp, x[i]));
        x1 = clip(x[i] + mul(dt_a0, y1));
        if (x1 > (1 <<< 24)) begin nx[i] = 1 <<< 24; ny[i] = 0; end
        else if (x1 < -(1 <<< 24)) begin nx[i] = -(1 <<< 24); ny[i] = 0; end
        else begin nx[i] = x1; ny[i] = y1; end
      end
      x = nx; y = ny;
      damp = (damp > damp_dec) ? damp - damp_dec : 0;
    end
  endtask

  int cyc;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      for (int j = i; j < N; j++) begin
        J[i][j] = (i == j) ? 0 : longint'($signed($urandom % 32'h0100_0000)) - 64'sh0080_0000;
        J[j][i] = J[i][j];
      end
      hd[i] = longint'($urandom % 32'h0040_0000) - 64'sh0020_0000;
      ht[i] = longint'($urandom % 32'h0040_0000) - 64'sh0020_0000;
      sg[i] = int'($urandom % 3) - 1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // load problem
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        jd_we <= 1; jd_i <= 4'(i); jd_j <= 4'(j); jd_data <= fix_t'(J[i][j]);
        @(posedge clk);
      end
      jd_we <= 0;
      hd_we <= 1; hd_i <= 4'(i); hd_data <= fix_t'(hd[i]);
      ht_we <= 1; ht_i <= 4'(i); ht_data <= fix_t'(ht[i]);
      sg_we <= 1; sg_i <= 4'(i); sg_data <= sgn_t'(sg[i]);
      @(posedge clk);
      hd_we <= 0; ht_we <= 0; sg_we <= 0;
    end
    seed_load <= 1; @(posedge clk); seed_load <= 0;
    model();
    start <= 1; @(posedge clk); start <= 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    // R init cycles, wait and swap, then NSTEP * (R*C + 5)
    checks++;
    if (cyc != R + 3 + NSTEP * (R * C + 5)) begin
      failures++; $display("cycle count %0d, expected %0d", cyc, R + 3 + NSTEP * (R * C + 5));
    end
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      pt_idx = 4'(i); #1;
      checks++;
      if (longint'(pt_x) != x[i]) begin
        failures++; $display("x[%0d] = %0d expected %0d", i, pt_x, x[i]);
      end
    end
    // positions must have moved away from zero
    checks++;
    if (x[0] == 0 && x[1] == 0 && x[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
