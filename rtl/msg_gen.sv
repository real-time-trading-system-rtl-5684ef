// msg_gen: the message generator. It turns each order request of the
// judgment module (stock index and side) into an order record for the
// transmitter: a running sequence number, the stock, buy/sell and the number
// of lots. The lots per order, L_i = floor(A_trans / (S_i^min * pbase_i)),
// are computed by the host once a day and written into the lots table
// (lots_we/lots_idx/lots_data), since they depend only on the day's base
// prices. The record layout and the sequence numbering are this design's;
// the wire format of the exchange protocol is left to the transmitter.
//
// Timing: one-deep registered output; a request is taken when the output
// register is empty or being read, and appears one cycle later.
module msg_gen
  import sbm_pkg::*;
#(
  parameter int N = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 lots_we,
  input  logic [$clog2(N)-1:0] lots_idx,
  input  logic [31:0]          lots_data,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  order_req_t           req,
  output logic                 out_valid,
  input  logic                 out_ready,
  output order_t               out
);
  logic [31:0] lots [N];
  logic [31:0] seq;

  always_ff @(posedge clk) if (lots_we) lots[lots_idx] <= lots_data;

  assign req_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out <= '0; seq <= '0;
    end else if (req_ready) begin
      out_valid <= req_valid;
      if (req_valid) begin
        out.seq  <= seq;
        out.idx  <= req.idx;
        out.side <= req.side;
        out.lots <= (int'(req.idx) < N) ? lots[req.idx[$clog2(N)-1:0]] : '0;
        seq      <= seq + 1;
      end
    end
  end
endmodule
