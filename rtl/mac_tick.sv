// mac_tick: the MAC-tick unit (JX-tick plus the J-tick memory) added to the
// SB core for the tick-by-tick part of the problem. The N x N tick coupling
// Jtick_ij = -(c3/2) sgn(dp_i) sgn(dp_j) is never stored; the J-tick memory
// keeps only the N signs sgn(dp_i), written by the preprocessing unit.
// Once per time-evolution step the unit forms the common value
//   dY = sum_j sgn(dp_j) x_j
// from the X' chunks streamed to all JX units, with L add/subtract lanes in
// parallel (the multiply by -1/0/+1 needs no multiplier), and hands dY and
// the signs to the TE units.
//
// Timing: chunks arrive with chunk_valid, in order 0..C-1 (C = N/L), with
// first_row high during the first row of the step; dy_valid pulses one
// cycle after the last chunk of that row and dy holds until the next step.
module mac_tick
  import sbm_pkg::*;
#(
  parameter int N = 128,
  parameter int L = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // J-tick memory write (preprocessing)
  input  logic                 sg_we,
  input  logic [$clog2(N)-1:0] sg_addr,
  input  sgn_t                 sg_data,
  output sgn_t                 sgn_all [N],
  // chunk stream
  input  logic                 chunk_valid,
  input  logic                 first_row,
  input  logic [$clog2(N/L > 1 ? N/L : 2)-1:0] chunk,
  input  fix_t                 xin [L],
  output fix_t                 dy,
  output logic                 dy_valid
);
  localparam int C = N / L;
  sgn_t sg [N];
  logic signed [47:0] acc, psum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < N; i++) sg[i] <= '0;
    else if (sg_we) sg[sg_addr] <= sg_data;
  end
  assign sgn_all = sg;

  always_comb begin
    psum = '0;
    for (int l = 0; l < L; l++) begin
      case (sg[int'(chunk) * L + l])
        2'sd1:   psum = psum + 48'(xin[l]);
        -2'sd1:  psum = psum - 48'(xin[l]);
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; dy <= '0; dy_valid <= 1'b0;
    end else begin
      dy_valid <= 1'b0;
      if (chunk_valid && first_row) begin
        if (int'(chunk) == C - 1) begin
          dy <= sat(80'((chunk == 0 ? 48'sd0 : acc) + psum));
          dy_valid <= 1'b1;
        end
        acc <= (chunk == 0 ? 48'sd0 : acc) + psum;
      end
    end
  end
endmodule
