// price_buffer: the price list P, holding the best ask and best bid of each
// of the N stocks of the universe. Every market-feed word from the receiver
// carries one stock's current ask and bid; the buffer stores it and, only
// when the ask or the bid has changed, forwards the stock index as a tick
// event to the SBM module, which starts (or schedules) an optimisation run.
// The SBM reads the list through rd_idx -> rd_ask/rd_bid (combinational).
//
// Handshake: valid/ready. A feed word is taken only while the event output
// is ready, so no change is lost. The list resets to zero (no quote).
// The paper gives the buffer's role and the change-triggered operation; the
// filtering of unchanged quotes and the reset value are this design's.
module price_buffer
  import sbm_pkg::*;
#(
  parameter int N = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 feed_valid,
  output logic                 feed_ready,
  input  feed_t                feed,
  output logic                 ev_valid,
  input  logic                 ev_ready,
  output idx_t                 ev_idx,
  input  logic [$clog2(N)-1:0] rd_idx,
  output price_t               rd_ask,
  output price_t               rd_bid,
  output logic [31:0]          n_feeds,
  output logic [31:0]          n_events
);
  price_t ask [N], bid [N];
  logic   in_range, changed, take;

  assign in_range   = (int'(feed.idx) < N);
  assign changed    = in_range && ((ask[feed.idx[$clog2(N)-1:0]] != feed.ask) ||
                                   (bid[feed.idx[$clog2(N)-1:0]] != feed.bid));
  assign feed_ready = !ev_valid || ev_ready;
  assign take       = feed_valid && feed_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin ask[i] <= '0; bid[i] <= '0; end
      ev_valid <= 1'b0; ev_idx <= '0; n_feeds <= '0; n_events <= '0;
    end else begin
      if (ev_valid && ev_ready) ev_valid <= 1'b0;
      if (take) begin
        n_feeds <= n_feeds + 1;
        if (changed) begin
          ask[feed.idx[$clog2(N)-1:0]] <= feed.ask;
          bid[feed.idx[$clog2(N)-1:0]] <= feed.bid;
          ev_valid <= 1'b1;
          ev_idx   <= feed.idx;
          n_events <= n_events + 1;
        end
      end
    end
  end

  assign rd_ask = ask[rd_idx];
  assign rd_bid = bid[rd_idx];

  assert property (@(posedge clk) disable iff (!rst_n) ev_valid && !ev_ready |=> ev_valid && $stable(ev_idx));
endmodule
