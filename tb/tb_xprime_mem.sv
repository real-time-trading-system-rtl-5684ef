// tb_xprime_mem: writes random positions through all M write ports into
// the next bank, checks that the current bank is unchanged until swap and
// then that chunk reads and point reads return the new values.
module tb_xprime_mem;
  import sbm_pkg::*;
  localparam int N = 32, L = 8, M = 4, C = N / L;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic swap = 0;
  logic [1:0] rd_chunk = 0;
  fix_t rd_x [L];
  logic [M-1:0] wr_valid = 0;
  logic [4:0] wr_idx [M];
  fix_t wr_x [M];
  logic [4:0] pt_idx = 0;
  fix_t pt_x;
  xprime_mem #(.N(N), .L(L), .M(M)) dut (.clk, .rst_n, .swap, .rd_chunk, .rd_x,
    .wr_valid, .wr_idx, .wr_x, .pt_idx, .pt_x);
  fix_t ref_cur [N], ref_nxt [N];
  task automatic fill();
    for (int r = 0; r < N / M; r++) begin
      @(negedge clk);
      wr_valid = '1;
      for (int m = 0; m < M; m++) begin
        wr_idx[m] = 5'(m * (N / M) + r);
        wr_x[m] = fix_t'($urandom);
        ref_nxt[m * (N / M) + r] = wr_x[m];
      end
    end
    @(negedge clk); wr_valid = '0;
  endtask
  task automatic check_cur();
    for (int c = 0; c < C; c++) begin
      rd_chunk = 2'(c); #1;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rd_x[l] != ref_cur[c*L+l]) failures++;
      end
    end
    for (int i = 0; i < N; i++) begin
      pt_idx = 5'(i); #1;
      checks++;
      if (pt_x != ref_cur[i]) failures++;
    end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      fill();
      if (round > 0) check_cur();   // old data still visible
      @(negedge clk); swap = 1; @(negedge clk); swap = 0;
      ref_cur = ref_nxt;
      check_cur();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
