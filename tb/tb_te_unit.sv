// tb_te_unit: drives the TE unit with random oscillator states, interaction
// sums, biases and signs, one per cycle, and compares each result, two
// cycles later, with a behavioural model of the ballistic-SB update
// (momentum kick with the tick correction, drift, inelastic wall at |x| = 1).
module tb_te_unit;
  import sbm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  logic [7:0] in_tag = 0, out_tag;
  fix_t jx, hday, htick, dy, x, y, x_new, y_new;
  sgn_t sgn;
  fix_t c3_half = 32'sh0040_0000, dt_c0 = 32'sh0010_0000, dt_a0 = 32'sh0040_0000, damp = 32'sh0020_0000;

  te_unit #(.TAG_W(8)) dut (.clk, .rst_n, .in_valid, .in_tag, .jx, .hday, .htick,
    .dy_tick(dy), .sgn, .x, .y, .c3_half, .dt_c0, .dt_a0, .damp,
    .out_valid, .out_tag, .x_new, .y_new);

  function automatic longint clip(longint v);
    if (v > 64'sh7fff_ffff) return 64'sh7fff_ffff;
    if (v < -64'sh8000_0000) return -64'sh8000_0000;
    return v;
  endfunction
  function automatic longint mul(longint a, longint b);
    return clip((a * b) >>> 24);
  endfunction

  longint ex [256], ey [256];
  int walls = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (longint'(x_new) != ex[out_tag] || longint'(y_new) != ey[out_tag]) begin
      failures++;
      $display("tag %0d: got (%0d,%0d) expected (%0d,%0d)", out_tag, x_new, y_new, ex[out_tag], ey[out_tag]);
    end
  end

  initial begin
    longint f, t, y1, x1, s;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      in_valid = 1; in_tag = 8'(k);
      jx = $signed($urandom) >>> 6; hday = $signed($urandom) >>> 8; htick = $signed($urandom) >>> 8;
      dy = $signed($urandom) >>> 5; sgn = sgn_t'(int'($urandom % 3) - 1);
      x = $signed($urandom) >>> 7; y = $signed($urandom) >>> 6;
      s = sgn;
      t  = clip(longint'(dy) - s * longint'(x));
      f  = clip(longint'(jx) - hday - htick - s * mul(c3_half, t));
      y1 = clip(longint'(y) + mul(dt_c0, f) - mul(damp, x));
      x1 = clip(longint'(x) + mul(dt_a0, y1));
      if (x1 > (1 <<< 24)) begin ex[k] = 1 <<< 24; ey[k] = 0; walls++; end
      else if (x1 < -(1 <<< 24)) begin ex[k] = -(1 <<< 24); ey[k] = 0; walls++; end
      else begin ex[k] = x1; ey[k] = y1; end
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (checks != 201) begin failures++; $display("only %0d results", checks - 1); end
    checks++;
    if (walls == 0 || walls == 200) begin failures++; $display("wall case not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
