// mmte: one MMTE block of the SB core, responsible for the R = N/M
// oscillators i = BLK*R .. BLK*R+R-1. It combines
//   - the J-day memory J_B (its R rows of the N x N day-by-day coupling,
//     stored as R*C words of L couplings, C = N/L),
//   - a JX unit: L multipliers and an adder tree that take one L-wide chunk
//     of positions from the global X' memory per cycle and accumulate
//     sum_j Jday_ij x_j over the C chunks of row i,
//   - a TE unit (te_unit) that time-evolves oscillator i once its sum is
//     complete,
//   - the local memories X_B, Y_B (position, momentum), H_B^day and the
//     added H_B^tick.
// Updated positions go both to X_B and, through xw_*, to the next bank of
// the global X' memory.
//
// The sequencer in sb_core drives all MMTE blocks in lock step: init_valid
// with init_row sets x = 0 and y = a small random value (+-1/8 from this
// block's xorshift generator); chunk_valid with row/chunk streams the rows.
// The JX sum of a row is registered one cycle after its last chunk, goes
// through the two TE pipeline stages, and the updated x is presented on
// xw_* (and written to X_B/Y_B) on the fourth clock edge after the last
// chunk; busy stays high while any of these stages holds a row. The memory organisation, lane count and
// initial-state distribution are this design's choices; the paper gives the
// block structure (J_B, JX, TE, X_B, Y_B, H_B^day, H_B^tick).
module mmte
  import sbm_pkg::*;
#(
  parameter int N   = 128,
  parameter int M   = 8,
  parameter int L   = 16,
  parameter int BLK = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // problem memories (written by preprocessing)
  input  logic                 jd_we,
  input  logic [$clog2(N)-1:0] jd_row,    // local row 0..R-1 (upper bits unused)
  input  logic [$clog2(N)-1:0] jd_col,    // global column j
  input  fix_t                 jd_data,
  input  logic                 hd_we,
  input  logic [$clog2(N)-1:0] hd_row,
  input  fix_t                 hd_data,
  input  logic                 ht_we,
  input  logic [$clog2(N)-1:0] ht_row,
  input  fix_t                 ht_data,
  // random initial state
  input  logic                 seed_load,
  input  logic [31:0]          seed,
  input  logic                 init_valid,
  input  logic [$clog2(N)-1:0] init_row,
  // time-evolution stream
  input  logic                 chunk_valid,
  input  logic [$clog2(N)-1:0] row,
  input  logic [$clog2(N/L > 1 ? N/L : 2)-1:0] chunk,
  input  fix_t                 xin [L],
  input  fix_t                 dy_tick,
  input  sgn_t                 sgn_all [N],
  input  fix_t                 c3_half,
  input  fix_t                 dt_c0,
  input  fix_t                 dt_a0,
  input  fix_t                 damp,
  // write-back to X'
  output logic                 xw_valid,
  output logic [$clog2(N)-1:0] xw_idx,
  output fix_t                 xw_x,
  output logic                 busy      // a row is in the JX/TE pipeline
);
  localparam int R  = N / M;
  localparam int C  = N / L;
  localparam int IW = $clog2(N);

  fix_t jd [R*C][L];
  fix_t xb [R], yb [R], hd [R], ht [R];

  // random generator for the initial momenta
  logic [31:0] rnd;
  xorshift32 u_rng (.clk, .rst_n, .load(seed_load),
                    .seed(seed ^ (32'h9E37_79B9 * 32'(BLK + 1))),
                    .next(init_valid), .rnd);

  // problem memory writes
  always_ff @(posedge clk) begin
    if (jd_we) jd[int'(jd_row) * C + int'(jd_col) / L][int'(jd_col) % L] <= jd_data;
    if (hd_we) hd[hd_row] <= hd_data;
    if (ht_we) ht[ht_row] <= ht_data;
  end

  // JX: L products per cycle, accumulated over C chunks
  logic signed [47:0] psum, acc;
  always_comb begin
    psum = '0;
    for (int l = 0; l < L; l++)
      psum = psum + 48'(fmul(jd[int'(row) * C + int'(chunk)][l], xin[l]));
  end

  logic    rv;        // row sum complete
  logic [IW-1:0] rr;
  fix_t    jxs;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; rv <= 1'b0; rr <= '0; jxs <= '0;
    end else begin
      rv <= 1'b0;
      if (chunk_valid) begin
        acc <= (chunk == 0 ? 48'sd0 : acc) + psum;
        if (int'(chunk) == C - 1) begin
          rv  <= 1'b1;
          rr  <= row;
          jxs <= sat(80'((chunk == 0 ? 48'sd0 : acc) + psum));
        end
      end
    end
  end

  // TE
  logic          tv;
  logic [IW-1:0] tr;
  fix_t          tx, ty;
  te_unit #(.TAG_W(IW)) u_te (
    .clk, .rst_n, .in_valid(rv), .in_tag(rr),
    .jx(jxs), .hday(hd[rr]), .htick(ht[rr]), .dy_tick,
    .sgn(sgn_all[BLK * R + int'(rr)]), .x(xb[rr]), .y(yb[rr]),
    .c3_half, .dt_c0, .dt_a0, .damp,
    .out_valid(tv), .out_tag(tr), .x_new(tx), .y_new(ty));

  // state memories: initialisation and write-back
  always_ff @(posedge clk) begin
    if (init_valid) begin
      xb[init_row] <= '0;
      yb[init_row] <= $signed(rnd) >>> 10;
    end else if (tv) begin
      xb[tr] <= tx;
      yb[tr] <= ty;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xw_valid <= 1'b0; xw_idx <= '0; xw_x <= '0;
    end else begin
      xw_valid <= init_valid || tv;
      xw_idx   <= IW'(BLK * R) + (init_valid ? init_row : tr);
      xw_x     <= init_valid ? '0 : tx;
    end
  end

  logic rv_d;   // row in the first TE stage
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rv_d <= 1'b0; else rv_d <= rv;
  assign busy = rv || rv_d || tv || xw_valid;
endmodule
