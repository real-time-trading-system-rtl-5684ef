// tb_judge: offers candidate groups of 2 stocks (N = 16, Pmax = 4) and
// close confirmations. Checks, against a model of the open list, that a
// group is opened only when trading is enabled, none of its stocks is open
// and Pmax is respected; that each opening issues one order request per
// stock with the right side, under back-pressure; the verdicts; and that
// closes deregister stocks.
module tb_judge;
  import sbm_pkg::*;
  localparam int N = 16, NS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] pmax = 4;
  logic trade_en = 1, cand_valid = 0, cand_ready, close_valid = 0, close_ready;
  idx_t cand_idx [NS];
  side_e cand_side [NS];
  idx_t close_idx;
  logic ord_valid, ord_ready = 1;
  order_req_t ord;
  logic [N-1:0] open_vec;
  logic verdict_valid, verdict_open, o_changed;
  logic [31:0] n_accept, n_reject, n_close;
  judge #(.N(N), .NS(NS)) dut (.clk, .rst_n, .pmax, .trade_en, .cand_valid, .cand_ready,
    .cand_idx, .cand_side, .close_valid, .close_ready, .close_idx, .ord_valid, .ord_ready,
    .ord, .open_vec, .verdict_valid, .verdict_open, .o_changed, .n_accept, .n_reject, .n_close);

  logic [N-1:0] model_open = '0;
  order_req_t exp_q [$];
  logic exp_verdict [$];
  int acc = 0, rej = 0, cls = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (ord_valid && ord_ready) begin
      checks++;
      if (exp_q.size() == 0 || ord != exp_q[0]) begin failures++; $display("unexpected order %0d", ord.idx); end
      else void'(exp_q.pop_front());
    end
    if (verdict_valid) begin
      checks++;
      if (exp_verdict.size() == 0 || verdict_open != exp_verdict[0]) begin failures++; $display("verdict"); end
      else void'(exp_verdict.pop_front());
    end
  end

  always @(negedge clk) ord_ready = ($urandom % 4) != 0;

  initial begin
    int cnt;
    logic ok;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      trade_en  = (k % 50) < 45;
      if ($urandom % 3 == 0) begin
        close_idx = idx_t'($urandom % N);
        close_valid = 1;
        while (!close_ready) @(negedge clk);
        @(negedge clk);   // taken at the posedge just passed
        model_open[close_idx] = 1'b0; cls++;
        close_valid = 0;
      end else begin
        cand_idx[0] = idx_t'($urandom % N);
        cand_idx[1] = idx_t'((int'(cand_idx[0]) + 1 + $urandom % (N - 1)) % N);
        cand_side[0] = side_e'($urandom % 2); cand_side[1] = side_e'($urandom % 2);
        cnt = $countones(model_open);
        ok = trade_en && (cnt + NS <= int'(pmax)) && !model_open[cand_idx[0]] && !model_open[cand_idx[1]];
        cand_valid = 1;
        while (!cand_ready) @(negedge clk);
        @(negedge clk);   // the handshake happened at the posedge just passed
        cand_valid = 0;
        exp_verdict.push_back(ok);
        if (ok) begin
          acc++;
          model_open[cand_idx[0]] = 1'b1; model_open[cand_idx[1]] = 1'b1;
          for (int q = 0; q < NS; q++) exp_q.push_back('{idx: cand_idx[q], side: cand_side[q]});
        end else rej++;
      end
      repeat (3) @(negedge clk);
      checks++;
      if (open_vec != model_open) begin failures++; $display("open list %h vs %h", open_vec, model_open); end
    end
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || n_accept != 32'(acc) || n_reject != 32'(rej) || n_close != 32'(cls) || acc == 0 || rej == 0) begin
      failures++; $display("acc %0d/%0d rej %0d/%0d close %0d/%0d left %0d", n_accept, acc, n_reject, rej, n_close, cls, exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
