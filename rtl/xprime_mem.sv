// xprime_mem: the global X' memory of the SB core. It holds every
// oscillator position twice (two banks): the JX units of all MMTE blocks
// read the current bank, L positions per cycle (one "chunk"), while the TE
// units write the positions of the next step into the other bank. swap
// exchanges the banks at the end of a time-evolution step, which closes the
// circulating loop MMTE -> X' -> MMTE of the machine.
//
// Ports: chunk read (rd_chunk -> rd_x, combinational), one write port per
// MMTE block (wr_valid[m], wr_idx[m], wr_x[m], into the next bank), a single
// position read (pt_idx -> pt_x, current bank) for the post-processing.
// Double buffering is this design's reading of the stacked X' boxes in the
// core diagram; the paper names the memory without giving its insides.
module xprime_mem
  import sbm_pkg::*;
#(
  parameter int N = 128,
  parameter int L = 16,
  parameter int M = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 swap,
  input  logic [$clog2(N/L > 1 ? N/L : 2)-1:0] rd_chunk,
  output fix_t                 rd_x [L],
  input  logic [M-1:0]         wr_valid,
  input  logic [$clog2(N)-1:0] wr_idx [M],
  input  fix_t                 wr_x [M],
  input  logic [$clog2(N)-1:0] pt_idx,
  output fix_t                 pt_x
);
  fix_t mem [2][N];
  logic cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cur <= 1'b0;
    else if (swap) cur <= ~cur;
  end

  always_ff @(posedge clk) begin
    for (int m = 0; m < M; m++)
      if (wr_valid[m]) mem[~cur][wr_idx[m]] <= wr_x[m];
  end

  always_comb begin
    for (int l = 0; l < L; l++) rd_x[l] = mem[cur][int'(rd_chunk) * L + l];
  end
  assign pt_x = mem[cur][pt_idx];
endmodule
