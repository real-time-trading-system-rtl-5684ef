// sbm_pre: preprocessing unit of the SBM module. It turns the data of the
// three memory units (sigma: day-by-day, VWAP: every second, price list and
// open list: tick-by-tick) into the Ising problem held by the SB core.
//
// The selection QUBO is
//   H = sum_i -c1|dp_i| b_i + sum_{i!=j} sigma_ij b_i b_j
//       + c2 (sum_i b_i - Ns)^2 + c3 (sum_i sgn(dp_i) b_i)^2
// and with s = 2b - 1, J_ij = -Q_ij/2 (i != j), h_i = sum_j Q_ij/2 it splits
// into a day part and a tick part:
//   Jday_ij  = -(sigma_ij + c2)/2  (i != j),  Jday_ii = 0
//   hday_i   = (sum_{j!=i} sigma_ij + c2 (N - 2 Ns)) / 2
//   Jtick_ij = -(c3/2) sgn_i sgn_j  (kept as the N signs only)
//   htick_i  = -c1 |dp_i| / 2 + c3 (sum_j sgn_j / 2) sgn_i
// where dp_i = (mid_i - VWAP_i) / pbase_i, mid = (ask + bid)/2, and dp_i is
// forced to 0 for stocks in the open list (no duplicate opening) and for
// stocks without a two-sided quote.
//
// start_day : N*N cycles, one sigma element per cycle -> Jday, hday.
// start_tick: pass A, N cycles: dp_i, sgn_i and S = sum sgn_i;
//             pass B, N cycles: htick_i (needs the complete S).
// done pulses in the cycle after the last write. All reads are
// combinational through rd_i / sig_addr. The formulas follow the paper's
// QUBO and its Ising mapping; the two-pass schedule (2N cycles against the
// 129 cycles the paper reports), the fixed-point scaling and the use of a
// host-supplied reciprocal base price are this design's choices.
module sbm_pre
  import sbm_pkg::*;
#(
  parameter int N  = 128,
  parameter int NS = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start_day,
  input  logic                   start_tick,
  output logic                   busy,
  output logic                   done,
  input  fix_t                   c1,
  input  fix_t                   c2,
  input  fix_t                   c3,
  // memory reads
  output logic [$clog2(N*N)-1:0] sig_addr,
  input  fix_t                   sig_data,
  output logic [$clog2(N)-1:0]   rd_i,
  input  price_t                 ask,
  input  price_t                 bid,
  input  vwap_t                  vwap,
  input  inv_t                   invbase,
  input  logic [N-1:0]           open_vec,
  input  fix_t                   dp_rd,
  // dp memory write
  output logic                   dp_we,
  output fix_t                   dp_wdata,
  // SB core problem memories
  output logic                   jd_we,
  output logic [$clog2(N)-1:0]   jd_i,
  output logic [$clog2(N)-1:0]   jd_j,
  output fix_t                   jd_data,
  output logic                   hd_we,
  output fix_t                   hd_data,
  output logic                   ht_we,
  output fix_t                   ht_data,
  output logic                   sg_we,
  output sgn_t                   sg_data,
  output logic signed [15:0]     sgn_sum
);
  localparam int IW = $clog2(N);
  typedef enum logic [1:0] {P_IDLE, P_DAY, P_TICK_A, P_TICK_B} state_e;
  state_e st;
  logic [IW-1:0] i, j;
  logic signed [47:0] hacc;
  logic signed [15:0] s_acc;

  assign busy     = (st != P_IDLE);
  assign rd_i     = i;
  assign sig_addr = ($clog2(N*N))'(int'(i) * N + int'(j));
  assign jd_i     = i;
  assign jd_j     = j;
  assign sgn_sum  = s_acc;

  // day: Jday and hday
  logic signed [47:0] hsum;
  always_comb begin
    jd_we   = (st == P_DAY);
    jd_data = (i == j) ? '0 : -sat((80'(sig_data) + 80'(c2)) >>> 1);
    hsum    = hacc + ((i == j) ? 48'sd0 : 48'(sig_data));
    hd_we   = (st == P_DAY) && (int'(j) == N - 1);
    hd_data = sat((80'(hsum) + 80'(c2) * 80'(N - 2 * NS)) >>> 1);
  end

  // tick pass A: price deviation
  logic signed [41:0] d_q8;
  logic signed [79:0] prod;
  fix_t dp_c;
  always_comb begin
    d_q8 = (42'(ask) + 42'(bid)) * 42'sd128 - 42'(vwap);
    prod = 80'(d_q8) * 80'(invbase);
    if (ask == 0 || bid == 0 || open_vec[i]) dp_c = '0;
    else dp_c = sat(prod >>> 16);
    dp_we    = (st == P_TICK_A);
    dp_wdata = dp_c;
    sg_we    = (st == P_TICK_A);
    sg_data  = fsgn(dp_c);
  end

  // tick pass B: htick from the stored dp and the complete sign sum
  fix_t c3s_half, ht_c;
  sgn_t sb;
  always_comb begin
    c3s_half = sat((80'(c3) * 80'(s_acc)) >>> 1);
    sb       = fsgn(dp_rd);
    ht_c     = sat(-(80'(fmul(c1, fabs(dp_rd))) >>> 1)
                   + ((sb == 2'sd1) ? 80'(c3s_half) : (sb == -2'sd1) ? -80'(c3s_half) : 80'sd0));
    ht_we    = (st == P_TICK_B);
    ht_data  = ht_c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; i <= '0; j <= '0; hacc <= '0; s_acc <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        P_IDLE: begin
          i <= '0; j <= '0; hacc <= '0;
          if (start_day) st <= P_DAY;
          else if (start_tick) begin st <= P_TICK_A; s_acc <= '0; end
        end
        P_DAY: begin
          if (int'(j) == N - 1) begin
            j <= '0; hacc <= '0;
            if (int'(i) == N - 1) begin st <= P_IDLE; done <= 1'b1; end
            else i <= i + 1'b1;
          end else begin
            j <= j + 1'b1; hacc <= hsum;
          end
        end
        P_TICK_A: begin
          s_acc <= s_acc + 16'(sg_data);
          if (int'(i) == N - 1) begin i <= '0; st <= P_TICK_B; end
          else i <= i + 1'b1;
        end
        P_TICK_B: begin
          if (int'(i) == N - 1) begin i <= '0; st <= P_IDLE; done <= 1'b1; end
          else i <= i + 1'b1;
        end
        default: st <= P_IDLE;
      endcase
    end
  end
endmodule
