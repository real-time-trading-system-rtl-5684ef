// sb_core: the customised simulated-bifurcation (SB) core. It solves the
// Ising problem
//   H = -1/2 sum_ij (Jday_ij + Jtick_ij) s_i s_j + sum_i (hday_i + htick_i) s_i
// by ballistic SB: N oscillators (x_i, y_i) are time-evolved for n_step
// steps while the pump a(t) rises linearly from 0 to a0, and the signs of
// the final positions are the spins.
//
// Structure (as in the core diagram): M MMTE blocks, each with its own
// J-day rows, JX unit and TE unit, form a loop with the global X' memory;
// the added MAC-tick unit computes the tick-by-tick term from N stored
// signs instead of an N x N matrix. A sequencer drives the loop:
//   INIT  - every block writes x = 0 and a random y for its R = N/M rows
//   STEP  - for row r = 0..R-1, chunk c = 0..C-1 (C = N/L) the X' chunk c
//           is broadcast to all JX units and to MAC-tick; each block
//           time-evolves oscillator BLK*R + r when its row completes
//   DRAIN - wait for the JX/TE pipelines, swap the X' banks, lower the
//           damping dt*(a0 - a(t)) by damp_dec
// A step takes R*C + 5 cycles (133 for N = 128, M = 8, L = 16); the
// published core takes 110 cycles per step, with a lane organisation the
// paper does not give. M and L are this design's choices.
//
// Interface: start (pulse) begins a run; done pulses when the n_step-th step
// has been swapped into X'; pt_idx/pt_x then read the final positions.
// Problem memories are written through the jd/hd/ht/sg ports with global
// oscillator indices and must not be written while busy.
module sb_core
  import sbm_pkg::*;
#(
  parameter int N = 128,
  parameter int M = 8,
  parameter int L = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 jd_we,
  input  logic [$clog2(N)-1:0] jd_i,
  input  logic [$clog2(N)-1:0] jd_j,
  input  fix_t                 jd_data,
  input  logic                 hd_we,
  input  logic [$clog2(N)-1:0] hd_i,
  input  fix_t                 hd_data,
  input  logic                 ht_we,
  input  logic [$clog2(N)-1:0] ht_i,
  input  fix_t                 ht_data,
  input  logic                 sg_we,
  input  logic [$clog2(N)-1:0] sg_i,
  input  sgn_t                 sg_data,
  input  logic                 seed_load,
  input  logic [31:0]          seed,
  input  fix_t                 c3_half,
  input  fix_t                 dt_c0,
  input  fix_t                 dt_a0,
  input  fix_t                 damp_dec,
  input  logic [15:0]          n_step,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  input  logic [$clog2(N)-1:0] pt_idx,
  output fix_t                 pt_x
);
  localparam int R  = N / M;
  localparam int C  = N / L;
  localparam int IW = $clog2(N);
  localparam int CW = $clog2(C > 1 ? C : 2);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_INIT_WAIT, S_STEP, S_DRAIN} state_e;
  state_e st;
  logic [IW-1:0] r;
  logic [CW-1:0] c;
  logic [15:0]   step;
  fix_t          damp;
  logic          swap;

  // shared buses
  fix_t xch [L];
  fix_t dy;
  logic dy_valid;
  sgn_t sgn_all [N];
  logic [M-1:0] xw_valid, mbusy;
  logic [IW-1:0] xw_idx [M];
  fix_t          xw_x [M];

  logic chunk_valid, init_valid;
  assign chunk_valid = (st == S_STEP);
  assign init_valid  = (st == S_INIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; r <= '0; c <= '0; step <= '0; damp <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          st <= S_INIT; r <= '0; step <= '0; damp <= dt_a0;
        end
        S_INIT: begin
          if (int'(r) == R - 1) begin r <= '0; st <= S_INIT_WAIT; end
          else r <= r + 1'b1;
        end
        S_INIT_WAIT: if (mbusy == '0) begin
          st <= S_STEP; r <= '0; c <= '0;
        end
        S_STEP: begin
          if (int'(c) == C - 1) begin
            c <= '0;
            if (int'(r) == R - 1) begin r <= '0; st <= S_DRAIN; end
            else r <= r + 1'b1;
          end else c <= c + 1'b1;
        end
        S_DRAIN: if (mbusy == '0) begin
          step <= step + 1'b1;
          damp <= (damp > damp_dec) ? damp - damp_dec : '0;
          if (step + 1'b1 >= n_step) begin st <= S_IDLE; done <= 1'b1; end
          else begin st <= S_STEP; r <= '0; c <= '0; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
  // the banks swap in the same edge that starts the next step
  assign swap = (st == S_INIT_WAIT || st == S_DRAIN) && (mbusy == '0);
  assign busy = (st != S_IDLE);

  xprime_mem #(.N(N), .L(L), .M(M)) u_xmem (
    .clk, .rst_n, .swap, .rd_chunk(c), .rd_x(xch),
    .wr_valid(xw_valid), .wr_idx(xw_idx), .wr_x(xw_x), .pt_idx, .pt_x);

  mac_tick #(.N(N), .L(L)) u_mac_tick (
    .clk, .rst_n, .sg_we, .sg_addr(sg_i), .sg_data, .sgn_all,
    .chunk_valid, .first_row(r == '0), .chunk(c), .xin(xch),
    .dy, .dy_valid);

  for (genvar m = 0; m < M; m++) begin : g_mmte
    logic sel_jd, sel_hd, sel_ht;
    assign sel_jd = (int'(jd_i) / R == m);
    assign sel_hd = (int'(hd_i) / R == m);
    assign sel_ht = (int'(ht_i) / R == m);
    mmte #(.N(N), .M(M), .L(L), .BLK(m)) u_mmte (
      .clk, .rst_n,
      .jd_we(jd_we && sel_jd), .jd_row(IW'(int'(jd_i) % R)), .jd_col(jd_j), .jd_data,
      .hd_we(hd_we && sel_hd), .hd_row(IW'(int'(hd_i) % R)), .hd_data,
      .ht_we(ht_we && sel_ht), .ht_row(IW'(int'(ht_i) % R)), .ht_data,
      .seed_load, .seed, .init_valid, .init_row(r),
      .chunk_valid, .row(r), .chunk(c), .xin(xch), .dy_tick(dy), .sgn_all,
      .c3_half, .dt_c0, .dt_a0, .damp,
      .xw_valid(xw_valid[m]), .xw_idx(xw_idx[m]), .xw_x(xw_x[m]), .busy(mbusy[m]));
  end

  // the tick sum of a step is complete when row 0's JX sum reaches the TE
  // units, i.e. in the cycle that issues row 1
  assert property (@(posedge clk) disable iff (!rst_n)
    (chunk_valid && r == IW'(1) && c == '0) |-> dy_valid);
endmodule
