// weight_loader: weight loading unit for the matrix-multiplication arrays.
//
// A shift-register chain per row (ALONG_COLS = 1) or per column
// (ALONG_COLS = 0) receives one token vector per in_valid; each push moves the
// chain one position towards index 0 and enters the new vector at the far end,
// so after DEPTH_N pushes position p holds the p-th token pushed. Every chain
// entry has a "latch" beside it: the enable `en` copies the whole chain into
// the latches at once, and the latches feed the MAC weights until the next
// enable, while the chain is already refilled with the next head's matrix.
// This follows the paper's shift chain plus latch structure; the latches are
// written here as flip-flops with enable, and the push counter and `full`
// flag are this design's own. ALONG_COLS = 1 loads K as the weights of the
// Q*K^T array (w[r][c] = K[c][r]); ALONG_COLS = 0 loads V as the weights of
// the A*V array (w[r][c] = V[r][c]). Latency: en acts at the next edge.
module weight_loader
  import sa_pkg::*;
#(
  parameter int ROWS       = D_HEAD,
  parameter int COLS       = N_TOK,
  parameter bit ALONG_COLS = 1'b1,
  localparam int LEN       = ALONG_COLS ? ROWS : COLS,
  localparam int DEPTH_N   = ALONG_COLS ? COLS : ROWS
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  code_t in_vec [LEN],
  input  logic  en,
  output code_t w_out  [1][ROWS][COLS],
  output logic  full
);
  code_t sr [ROWS][COLS];
  logic [$clog2(DEPTH_N+1)-1:0] count;

  assign full = (count == DEPTH_N[$bits(count)-1:0]);

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          if (ALONG_COLS) sr[r][c] <= (c == COLS-1) ? in_vec[r] : sr[r][c+1];
          else            sr[r][c] <= (r == ROWS-1) ? in_vec[c] : sr[r+1][c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) w_out[0][r][c] <= '0;
    end else begin
      if (en) begin
        w_out[0] <= sr;
        count    <= in_valid ? 1 : 0;
      end else if (in_valid && !full) begin
        count <= count + 1'b1;
      end
    end
  end

  // a push into a full chain that is not being latched would lose a token
  always_ff @(posedge clk) begin
    a_no_overfill: assert (!(in_valid && full && !en))
      else $error("weight_loader: push into a full chain");
  end
endmodule
