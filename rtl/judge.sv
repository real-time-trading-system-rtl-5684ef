// judge: the judgment module, owner of the open list O. It receives an open
// candidate group (Ns stocks with their sides) from the SBM module and opens
// it only if trading is enabled, none of its stocks is already open (no
// duplicate positions) and the number of open positions stays within Pmax.
// On opening it first registers the stocks in O, then issues one order
// request per stock, in group order, to the message generator, and reports
// the verdict back to the SBM module (the "open info" path), whose price
// deviations of open stocks are zeroed by the preprocessing. Close
// confirmations from the host (one stock index each) deregister a stock and
// pulse o_changed.
//
// Handshakes are valid/ready; close confirmations take priority over a
// waiting candidate. A group is decided in the cycle it is taken; its orders
// follow on consecutive cycles while ord_ready is high. The checks follow
// the paper (open list, no duplicates, Pmax); the handshake, the priority
// and the per-stock order requests are this design's.
module judge
  import sbm_pkg::*;
#(
  parameter int N  = 128,
  parameter int NS = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [7:0]   pmax,
  input  logic         trade_en,
  input  logic         cand_valid,
  output logic         cand_ready,
  input  idx_t         cand_idx  [NS],
  input  side_e        cand_side [NS],
  input  logic         close_valid,
  output logic         close_ready,
  input  idx_t         close_idx,
  output logic         ord_valid,
  input  logic         ord_ready,
  output order_req_t   ord,
  output logic [N-1:0] open_vec,
  output logic         verdict_valid,
  output logic         verdict_open,
  output logic         o_changed,
  output logic [31:0]  n_accept,
  output logic [31:0]  n_reject,
  output logic [31:0]  n_close
);
  localparam int KW = $clog2(NS > 1 ? NS : 2);
  typedef enum logic {J_IDLE, J_ISSUE} state_e;
  state_e st;
  logic [KW-1:0] k;
  idx_t  gi [NS];
  side_e gs [NS];
  logic  ok;
  int    n_open;

  always_comb begin
    n_open = 0;
    for (int i = 0; i < N; i++) n_open += int'(open_vec[i]);
    ok = trade_en && (n_open + NS <= int'(pmax));
    for (int q = 0; q < NS; q++)
      if (int'(cand_idx[q]) >= N || open_vec[cand_idx[q][$clog2(N)-1:0]]) ok = 1'b0;
  end

  assign close_ready = (st == J_IDLE);
  assign cand_ready  = (st == J_IDLE) && !close_valid;
  assign ord_valid   = (st == J_ISSUE);
  assign ord.idx     = gi[k];
  assign ord.side    = gs[k];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= J_IDLE; k <= '0; open_vec <= '0; verdict_valid <= 1'b0; verdict_open <= 1'b0;
      o_changed <= 1'b0; n_accept <= '0; n_reject <= '0; n_close <= '0;
      for (int q = 0; q < NS; q++) begin gi[q] <= '0; gs[q] <= SIDE_BUY; end
    end else begin
      verdict_valid <= 1'b0;
      o_changed     <= 1'b0;
      case (st)
        J_IDLE: begin
          if (close_valid) begin
            if (int'(close_idx) < N) open_vec[close_idx[$clog2(N)-1:0]] <= 1'b0;
            o_changed <= 1'b1;
            n_close   <= n_close + 1;
          end else if (cand_valid) begin
            verdict_valid <= 1'b1;
            verdict_open  <= ok;
            if (ok) begin
              for (int q = 0; q < NS; q++) begin
                open_vec[cand_idx[q][$clog2(N)-1:0]] <= 1'b1;
                gi[q] <= cand_idx[q];
                gs[q] <= cand_side[q];
              end
              o_changed <= 1'b1;
              n_accept  <= n_accept + 1;
              k  <= '0;
              st <= J_ISSUE;
            end else n_reject <= n_reject + 1;
          end
        end
        J_ISSUE: if (ord_ready) begin
          if (int'(k) == NS - 1) st <= J_IDLE;
          else k <= k + 1'b1;
        end
        default: st <= J_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) ord_valid && !ord_ready |=> ord_valid && $stable(ord));
endmodule
