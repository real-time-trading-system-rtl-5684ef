// tb_price_buffer: sends random quotes for 8 stocks, half of them repeats of
// the stored quote, with random back-pressure on the event output. Checks
// that exactly the changed quotes produce events, in order, that the price
// list reads back the latest quotes and that the counters agree.
module tb_price_buffer;
  import sbm_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic feed_valid = 0, feed_ready, ev_valid, ev_ready = 0;
  feed_t feed;
  idx_t ev_idx;
  logic [2:0] rd_idx = 0;
  price_t rd_ask, rd_bid;
  logic [31:0] n_feeds, n_events;
  price_buffer #(.N(N)) dut (.clk, .rst_n, .feed_valid, .feed_ready, .feed, .ev_valid, .ev_ready,
    .ev_idx, .rd_idx, .rd_ask, .rd_bid, .n_feeds, .n_events);
  price_t ask [N], bid [N];
  idx_t q [$];
  int nf = 0, ne = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n) begin
    if (ev_valid && ev_ready) begin
      checks++;
      if (q.size() == 0 || ev_idx != q[0]) begin failures++; $display("event %0d unexpected", ev_idx); end
      else void'(q.pop_front());
    end
    if (feed_valid && feed_ready) begin
      nf++;
      if (feed.ask != ask[feed.idx] || feed.bid != bid[feed.idx]) begin
        q.push_back(feed.idx); ne++;
        ask[feed.idx] = feed.ask; bid[feed.idx] = feed.bid;
      end
    end
  end
  initial begin
    for (int i = 0; i < N; i++) begin ask[i] = 0; bid[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      ev_ready = ($urandom % 3) != 0;
      if (!feed_valid || feed_ready) begin
        feed_valid = ($urandom % 2) != 0;
        feed.idx = idx_t'($urandom % N);
        if ($urandom % 2) begin feed.ask = ask[feed.idx]; feed.bid = bid[feed.idx]; end
        else begin feed.ask = 1000 + $urandom % 8; feed.bid = 990 + $urandom % 8; end
      end
    end
    @(negedge clk); feed_valid = 0; ev_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (q.size() != 0 || n_feeds != 32'(nf) || n_events != 32'(ne) || ne == 0 || ne == nf) begin
      failures++; $display("left %0d feeds %0d/%0d events %0d/%0d", q.size(), n_feeds, nf, n_events, ne);
    end
    for (int i = 0; i < N; i++) begin
      rd_idx = 3'(i); #1;
      checks++;
      if (rd_ask != ask[i] || rd_bid != bid[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
