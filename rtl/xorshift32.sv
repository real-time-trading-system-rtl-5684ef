// xorshift32: Marsaglia's 32-bit xorshift generator (shifts 13, 17, 5),
// used to draw the initial oscillator momenta of every SB run. The paper
// names an internal xorshift-type generator; the 32-bit variant and its
// shift triple are this design's choice.
// load: state <= seed (a zero seed is replaced by 1, which xorshift needs);
// next: advance one state. rnd shows the current state.
module xorshift32 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [31:0] seed,
  input  logic        next,
  output logic [31:0] rnd
);
  function automatic logic [31:0] step(input logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      rnd <= 32'd2463534242;
    else if (load)   rnd <= (seed == 0) ? 32'd1 : seed;
    else if (next)   rnd <= step(rnd);
  end
endmodule
