// tb_msg_gen: loads a lots table, sends random order requests with random
// back-pressure and checks every order record (sequence number, stock,
// side, lots from the table) in order.
module tb_msg_gen;
  import sbm_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic lots_we = 0, req_valid = 0, req_ready, out_valid, out_ready = 0;
  logic [3:0] lots_idx;
  logic [31:0] lots_data;
  order_req_t req;
  order_t out;
  msg_gen #(.N(N)) dut (.clk, .rst_n, .lots_we, .lots_idx, .lots_data, .req_valid, .req_ready,
    .req, .out_valid, .out_ready, .out);
  logic [31:0] lots [N];
  order_t q [$];
  int seq = 0, got = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++; got++;
      if (q.size() == 0 || out != q[0]) begin failures++; $display("order mismatch seq %0d", out.seq); end
      else void'(q.pop_front());
    end
    if (req_valid && req_ready) begin
      q.push_back('{seq: 32'(seq), idx: req.idx, side: req.side, lots: lots[req.idx]});
      seq++;
    end
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); lots_we = 1; lots_idx = 4'(i); lots_data = 100 + $urandom % 900; lots[i] = lots_data;
    end
    @(negedge clk); lots_we = 0;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      out_ready = ($urandom % 3) != 0;
      if (!req_valid || req_ready) begin
        req_valid = ($urandom % 2) != 0;
        req.idx = idx_t'($urandom % N); req.side = side_e'($urandom % 2);
      end
    end
    @(negedge clk); req_valid = 0; out_ready = 1;
    repeat (4) @(negedge clk);
    checks++;
    if (q.size() != 0 || got != seq || got < 100) begin failures++; $display("got %0d sent %0d", got, seq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
