// fifo_channel: the streaming channel that links the independent modules of
// the trading datapath (receiver -> price buffer -> SBM -> judge -> message
// generator -> transmitter). Each producer/consumer pair talks through one
// such FIFO, so no module waits on another's timing.
//
// Interface: valid/ready on both sides; a word moves when valid && ready.
// in_ready is low when the FIFO holds DEPTH words; out_valid is high when it
// holds at least one. Data written in cycle t can be read in cycle t+1.
// Storage is a register array with separate read and write pointers. The
// depth and the handshake are this design's choices; the paper only says the
// modules are joined by FIFO-buffered streaming channels.
module fifo_channel #(
  parameter int W     = 32,
  parameter int DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic push, pop;

  assign in_ready  = (count != DEPTH[$bits(count)-1:0]);
  assign out_valid = (count != 0);
  assign out_data  = mem[rp];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  // a full FIFO never reports ready, an empty one never valid
  assert property (@(posedge clk) disable iff (!rst_n) count <= DEPTH);
endmodule
