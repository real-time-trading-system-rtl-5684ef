// sbm_post: postprocessing unit of the SBM module. It reads the spins of a
// finished SB run (b_i = 1 when x_i > 0) and evaluates the selection:
//   constraint 1: sum_i b_i = Ns                      (Ns-stock selection)
//   constraint 2: sum_i sgn(dp_i) b_i = 0              (delta neutral)
//   no selected stock may have dp_i = 0 (open or unquoted)
//   objective  : H_cost = -c1 sum_i |dp_i| b_i + sum_{i!=j} sigma_ij b_i b_j
// and passes the group to the judgment module when all constraints hold and
// H_cost <= cost_thr. Side: dp_i < 0 -> long (buy), dp_i > 0 -> short (sell).
//
// Schedule: pass A scans the N spins (N cycles), collecting up to Ns selected
// indices; pass B reads the Ns*(Ns-1) sigma pairs of the group (Ns*Ns
// cycles); done pulses one cycle later with pass, cost and the group. The
// checks and the objective are the paper's; the threshold test and the
// schedule (N + Ns^2 + 2 cycles against the paper's 648) are this design's.
module sbm_post
  import sbm_pkg::*;
#(
  parameter int N  = 128,
  parameter int NS = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  input  fix_t                   c1,
  input  fix_t                   cost_thr,
  output logic [$clog2(N)-1:0]   rd_i,
  input  fix_t                   x,
  input  fix_t                   dp,
  output logic [$clog2(N*N)-1:0] sig_addr,
  input  fix_t                   sig_data,
  output logic                   pass,
  output fix_t                   cost,
  output idx_t                   cand_idx  [NS],
  output side_e                  cand_side [NS],
  output logic [15:0]            n_sel,
  output logic signed [15:0]     balance
);
  localparam int IW  = $clog2(N);
  localparam int KW  = $clog2(NS > 1 ? NS : 2);
  typedef enum logic [1:0] {Q_IDLE, Q_SCAN, Q_PAIRS, Q_DONE} state_e;
  state_e st;
  logic [IW-1:0] i;
  logic [KW-1:0] a, b;
  logic          zero_sel;
  logic signed [47:0] acc;
  sgn_t s;
  logic sel;

  assign busy = (st != Q_IDLE);
  assign rd_i = i;
  assign s    = fsgn(dp);
  assign sel  = !x[31] && (x != 0);
  assign sig_addr = ($clog2(N*N))'(int'(cand_idx[a]) * N + int'(cand_idx[b]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= Q_IDLE; i <= '0; a <= '0; b <= '0; acc <= '0; zero_sel <= 1'b0;
      n_sel <= '0; balance <= '0; pass <= 1'b0; cost <= '0; done <= 1'b0;
      for (int k = 0; k < NS; k++) begin cand_idx[k] <= '0; cand_side[k] <= SIDE_BUY; end
    end else begin
      done <= 1'b0;
      case (st)
        Q_IDLE: if (start) begin
          st <= Q_SCAN; i <= '0; acc <= '0; zero_sel <= 1'b0; n_sel <= '0; balance <= '0;
        end
        Q_SCAN: begin
          if (sel) begin
            if (int'(n_sel) < NS) begin
              cand_idx[n_sel[KW-1:0]]  <= idx_t'(i);
              cand_side[n_sel[KW-1:0]] <= (s == -2'sd1) ? SIDE_BUY : SIDE_SELL;
            end
            n_sel   <= n_sel + 1'b1;
            balance <= balance + 16'(s);
            acc     <= acc - 48'(fmul(c1, fabs(dp)));
            if (s == 2'sd0) zero_sel <= 1'b1;
          end
          if (int'(i) == N - 1) begin
            i <= '0; a <= '0; b <= '0;
            st <= Q_PAIRS;
          end else i <= i + 1'b1;
        end
        Q_PAIRS: begin
          // pairs are only meaningful for a group of exactly NS stocks
          if (int'(n_sel) == NS && a != b) acc <= acc + 48'(sig_data);
          if (int'(b) == NS - 1) begin
            b <= '0;
            if (int'(a) == NS - 1) st <= Q_DONE;
            else a <= a + 1'b1;
          end else b <= b + 1'b1;
        end
        Q_DONE: begin
          cost <= sat(80'(acc));
          pass <= (int'(n_sel) == NS) && (balance == 0) && !zero_sel && (sat(80'(acc)) <= cost_thr);
          done <= 1'b1;
          st   <= Q_IDLE;
        end
        default: st <= Q_IDLE;
      endcase
    end
  end
endmodule
