// tb_mac_tick: writes random signs into the J-tick memory, streams random
// position chunks for several steps (first row) plus non-first rows that
// must be ignored, and checks dY = sum sgn_j x_j one cycle after the last
// chunk, and the sign read-back.
module tb_mac_tick;
  import sbm_pkg::*;
  localparam int N = 32, L = 8, C = N / L;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sg_we = 0, chunk_valid = 0, first_row = 0, dy_valid;
  logic [4:0] sg_addr;
  sgn_t sg_data;
  sgn_t sgn_all [N];
  logic [1:0] chunk = 0;
  fix_t xin [L];
  fix_t dy;
  mac_tick #(.N(N), .L(L)) dut (.clk, .rst_n, .sg_we, .sg_addr, .sg_data, .sgn_all,
    .chunk_valid, .first_row, .chunk, .xin, .dy, .dy_valid);
  int sg [N];
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    longint exp_dy;
    fix_t xv [N];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      sg[i] = int'($urandom % 3) - 1;
      @(negedge clk); sg_we = 1; sg_addr = 5'(i); sg_data = sgn_t'(sg[i]);
    end
    @(negedge clk); sg_we = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (int'(sgn_all[i]) != sg[i]) failures++;
    end
    for (int s = 0; s < 6; s++) begin
      exp_dy = 0;
      for (int i = 0; i < N; i++) begin
        xv[i] = $signed($urandom) >>> 7;
        exp_dy += sg[i] * longint'(xv[i]);
      end
      for (int r = 0; r < 2; r++)
        for (int c = 0; c < C; c++) begin
          @(negedge clk);
          chunk_valid = 1; first_row = (r == 0); chunk = 2'(c);
          for (int l = 0; l < L; l++) xin[l] = (r == 0) ? xv[c*L+l] : fix_t'($urandom);
          if (r == 1 && c == 0) begin
            checks++;
            if (!dy_valid || longint'(dy) != exp_dy) begin
              failures++; $display("step %0d dy=%0d expected %0d valid=%b", s, dy, exp_dy, dy_valid);
            end
          end else if (dy_valid) begin
            failures++; $display("dy_valid at wrong time");
          end
        end
      @(negedge clk); chunk_valid = 0;
      checks++;
      if (longint'(dy) != exp_dy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
