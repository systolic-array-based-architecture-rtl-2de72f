// scaleq: softmax quantizer with a dynamically scaled step (ScaleQ).
//
// Lane i counts the thresholds j for which e_i * 2^SQ_F >= S * delta_j,
// where e_i is the channel's exponential, S the sum of all exponentials of
// the token, and delta_j the j-th step (SQ_F fraction bits, per head). The
// count 0..7 is the 3-bit quantized softmax probability e_i / S, obtained
// without a divider: this is the paper's ScaleQ. S enters at the last lane and
// moves one lane to the left per cycle, so lane i receives its e_i through a
// triangular delay of 2*(LANES-1-i)+1 cycles. Latency: one cycle after S
// reaches the lane.
module scaleq
  import sa_pkg::*;
#(
  parameter int LANES = N_TOK,
  parameter int NB    = N_HEAD
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [EXP_W-1:0] e        [LANES],
  input  side_t            side_in  [LANES],
  input  logic [SUM_W-1:0] s_in,
  input  logic [15:0]      delta    [NB][N_TH],
  output code_t            q        [LANES],
  output side_t            side_out [LANES]
);
  logic [SUM_W-1:0] s_r [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic [SUM_W-1:0]    s_u;
    logic [SUM_W+16-1:0] lhs, rhs;
    code_t               cnt;
    int                  hb;
    always_comb begin
      s_u = (i == LANES-1) ? s_in : s_r[(i == LANES-1) ? i : i+1];
      hb  = int'(side_in[i].tag) % NB;
      lhs = (SUM_W+16)'(e[i]) << SQ_F;
      cnt = '0;
      for (int j = 0; j < N_TH; j++) begin
        rhs = (SUM_W+16)'(s_u) * (SUM_W+16)'(delta[hb][j]);
        cnt += code_t'(lhs >= rhs);
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        s_r[i] <= '0; q[i] <= '0; side_out[i] <= '0;
      end else begin
        s_r[i]      <= s_u;
        q[i]        <= cnt;
        side_out[i] <= side_in[i];
      end
    end
  end
endmodule
