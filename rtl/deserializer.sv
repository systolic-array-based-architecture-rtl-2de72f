// deserializer: collects host bus words into input tokens.
//
// A token is TOK_W bits (D_MODEL 3-bit codes, channel k in bits
// [3k+2:3k]) carried by ceil(TOK_W/BUS_W) bus words, least significant word
// first. Words are accepted with a valid/ready handshake; a complete token is
// offered on tok_* with its own valid/ready handshake, and no new word is
// accepted while a finished token waits. The paper shows a deserializer
// between the input and the input selector; the word order and handshakes
// are this design's. Throughput: one word per cycle.
module deserializer
  import sa_pkg::*;
#(
  parameter int TOK_W = D_MODEL * DW,
  localparam int WORDS = (TOK_W + BUS_W - 1) / BUS_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [BUS_W-1:0] in_data,
  input  logic             in_valid,
  output logic             in_ready,
  output logic [TOK_W-1:0] tok,
  output logic             tok_valid,
  input  logic             tok_ready
);
  logic [WORDS*BUS_W-1:0]        buf_q;
  logic [$clog2(WORDS+1)-1:0]    n;

  assign in_ready  = !tok_valid;
  assign tok       = buf_q[TOK_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0; n <= '0; tok_valid <= 1'b0;
    end else begin
      if (tok_valid && tok_ready) tok_valid <= 1'b0;
      if (in_valid && in_ready) begin
        buf_q[int'(n)*BUS_W +: BUS_W] <= in_data;
        if (int'(n) == WORDS - 1) begin
          n <= '0; tok_valid <= 1'b1;
        end else begin
          n <= n + 1'b1;
        end
      end
    end
  end
endmodule
