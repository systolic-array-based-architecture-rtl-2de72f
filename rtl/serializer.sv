// serializer: sends result tokens to the host as bus words.
//
// A result token (D_HEAD 3-bit codes, channel k in bits [3k+2:3k]) is taken
// with a valid/ready handshake and sent as ceil(TOK_W/BUS_W) words, least
// significant first, unused high bits zero. The word order and handshakes are
// this design's; the paper only states a 64-bit-per-cycle link.
// Throughput: one word per cycle while out_ready is high.
module serializer
  import sa_pkg::*;
#(
  parameter int TOK_W = D_HEAD * DW,
  localparam int WORDS = (TOK_W + BUS_W - 1) / BUS_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [TOK_W-1:0] tok,
  input  logic             tok_valid,
  output logic             tok_ready,
  output logic [BUS_W-1:0] out_data,
  output logic             out_valid,
  input  logic             out_ready
);
  logic [WORDS*BUS_W-1:0]     buf_q;
  logic [$clog2(WORDS+1)-1:0] n;

  assign tok_ready = !out_valid;
  assign out_data  = buf_q[int'(n)*BUS_W +: BUS_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0; n <= '0; out_valid <= 1'b0;
    end else begin
      if (tok_valid && tok_ready) begin
        buf_q     <= (WORDS*BUS_W)'(tok);
        n         <= '0;
        out_valid <= 1'b1;
      end else if (out_valid && out_ready) begin
        if (int'(n) == WORDS - 1) out_valid <= 1'b0;
        else                      n <= n + 1'b1;
      end
    end
  end
endmodule
