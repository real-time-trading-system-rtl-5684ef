// te_unit: time-evolution (TE) unit of the ballistic simulated bifurcation
// (bSB) machine, extended with the tick-by-tick momentum correction.
//
// For oscillator i it takes the day-by-day interaction sum
// jx = sum_j Jday_ij x_j (from its JX unit), the biases hday_i and htick_i,
// the common value dY = sum_j sgn(dp_j) x_j (from the MAC-tick unit), the
// sign sgn_i of the stock's price deviation and the state (x_i, y_i), and
// forms
//   f      = jx - hday_i + dytick_i
//   dytick = -(c3/2) * sgn_i * (dY - sgn_i * x_i) - htick_i
//   y'     = y + dt*c0*f - damp*x,        damp = dt*(a0 - a(t))
//   x'     = x + dt*a0*y'
//   if |x'| > 1 : x' = sign(x'), y' = 0   (inelastic wall of bSB)
// The tick term is the exact contribution of Jtick_ij = -(c3/2) sgn_i sgn_j
// (i != j) of the Ising form; the paper prints it with the opposite sign and
// with sgn_i*x_i where sgn_i^2*x_i is exact, and this unit follows the Ising
// form so that the delta-neutral penalty acts as a penalty. The bSB update
// rule itself is the published ballistic SB rule, not spelled out in the paper.
//
// Timing: fully pipelined, one oscillator per cycle, result two cycles after
// in_valid. The tag travels with the data.
module te_unit
  import sbm_pkg::*;
#(
  parameter int TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  fix_t             jx,
  input  fix_t             hday,
  input  fix_t             htick,
  input  fix_t             dy_tick,   // dY = sum sgn_j x_j
  input  sgn_t             sgn,
  input  fix_t             x,
  input  fix_t             y,
  input  fix_t             c3_half,   // c3 / 2
  input  fix_t             dt_c0,
  input  fix_t             dt_a0,
  input  fix_t             damp,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output fix_t             x_new,
  output fix_t             y_new
);
  // stage 1: momentum
  fix_t sx, t, ft, f, y1_c;
  always_comb begin
    sx = (sgn == 2'sd1) ? x : (sgn == -2'sd1) ? -x : '0;
    t  = sat(80'(dy_tick) - 80'(sx));
    ft = (sgn == 2'sd1) ? -fmul(c3_half, t) : (sgn == -2'sd1) ? fmul(c3_half, t) : '0;
    f  = sat(80'(jx) - 80'(hday) - 80'(htick) + 80'(ft));
    y1_c = sat(80'(y) + 80'(fmul(dt_c0, f)) - 80'(fmul(damp, x)));
  end

  logic             v1;
  logic [TAG_W-1:0] tag1;
  fix_t             x1, y1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; tag1 <= '0; x1 <= '0; y1 <= '0;
    end else begin
      v1 <= in_valid; tag1 <= in_tag; x1 <= x; y1 <= y1_c;
    end
  end

  // stage 2: position and wall
  fix_t x2_c;
  always_comb x2_c = sat(80'(x1) + 80'(fmul(dt_a0, y1)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_tag <= '0; x_new <= '0; y_new <= '0;
    end else begin
      out_valid <= v1; out_tag <= tag1;
      if (x2_c > FIX_ONE)       begin x_new <= FIX_ONE;  y_new <= '0; end
      else if (x2_c < -FIX_ONE) begin x_new <= -FIX_ONE; y_new <= '0; end
      else                      begin x_new <= x2_c;     y_new <= y1; end
    end
  end
endmodule
