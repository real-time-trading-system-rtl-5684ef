// tb_fifo_channel: random valid/ready traffic through a 4-deep channel;
// checks order and content of every word against a queue, that the channel
// fills (in_ready low at 4 words) and empties, and the count output.
module tb_fifo_channel;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  logic [2:0] count;
  fifo_channel #(.W(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .count);
  logic [W-1:0] q [$];
  int full_seen = 0, sent = 0, got = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(count) != q.size()) begin failures++; $display("count %0d vs %0d", count, q.size()); end
    if (!in_ready) full_seen++;
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || out_data != q[0]) begin failures++; $display("data mismatch"); end
      void'(q.pop_front()); got++;
    end
    if (in_valid && in_ready) begin q.push_back(in_data); sent++; end
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      in_valid  = ($urandom % 4) != 0;
      in_data   = W'($urandom);
      out_ready = (k < 1000) ? (($urandom % 3) == 0) : (($urandom % 4) != 0);
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (full_seen == 0 || got != sent || out_valid) begin
      failures++; $display("full_seen=%0d sent=%0d got=%0d", full_seen, sent, got);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
