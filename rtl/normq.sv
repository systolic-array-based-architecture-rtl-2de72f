// normq: division-free, square-root-free layer normalization + 3-bit quantizer.
//
// For channel value x, running mean mu and M2 (= n * variance) the
// quantized layer-norm output is the number of thresholds s_j with
// gamma*(x-mu)/sigma + beta > s_j. With c_j = (s_j - beta)/gamma (gamma > 0
// assumed) and a = s*x - mu (s = prescale, which cancels), each test becomes
//   a > 0 :  c_j < 0  or  a^2 > c_j^2 * sigma^2
//   a <= 0:  c_j < 0  and not (a^2 > c_j^2 * sigma^2)
// so one squared comparison and two signs decide it, as the paper describes.
// The host precomputes P_j = c_j^2 / n with NQ_PF fraction bits and the sign
// bit cneg_j = (c_j < 0), per head, channel and threshold; the comparison is
// (a^2 << NQ_PF) > M2 * P_j. The statistics enter at the last lane and move
// one lane to the left per cycle (post-aggregation order), so lane i must
// receive its x 2*(LANES-1-i)+1 cycles after it left the MAC array (see
// tri_delay). Output: the count 0..7, re-coded as count-4 when OUT_SIGNED.
// Latency: one cycle after the statistics reach the lane.
module normq
  import sa_pkg::*;
#(
  parameter int LANES      = D_HEAD,
  parameter int NB         = N_HEAD,
  parameter bit OUT_SIGNED = 1'b1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  pm_t                    x        [LANES],
  input  side_t                  side_in  [LANES],
  input  logic signed [MU_W-1:0] mu_in,
  input  logic [VAR_W-1:0]       var_in,
  input  logic [NQ_P_W-1:0]      p        [NB][LANES][N_TH],
  input  logic                   cneg     [NB][LANES][N_TH],
  output code_t                  q        [LANES],
  output side_t                  side_out [LANES]
);
  logic signed [MU_W-1:0] mu_r  [LANES];
  logic [VAR_W-1:0]       var_r [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic signed [MU_W-1:0] mu_u, a;
    logic [VAR_W-1:0]       var_u;
    logic [2*MU_W+NQ_PF-1:0] lhs;
    logic [VAR_W+NQ_P_W-1:0] rhs;
    logic                    pos, gt, cn, hit;
    code_t                   cnt;
    int                      hb;

    always_comb begin
      mu_u  = (i == LANES-1) ? mu_in  : mu_r [(i == LANES-1) ? i : i+1];
      var_u = (i == LANES-1) ? var_in : var_r[(i == LANES-1) ? i : i+1];
      hb    = int'(side_in[i].tag) % NB;
      a     = (MU_W'(x[i]) <<< PRESCALE_SH) - mu_u;
      pos   = (a > 0);
      lhs   = (2*MU_W+NQ_PF)'(unsigned'((2*MU_W)'(a) * (2*MU_W)'(a))) << NQ_PF;
      cnt   = '0;
      for (int j = 0; j < N_TH; j++) begin
        rhs = (VAR_W+NQ_P_W)'(var_u) * (VAR_W+NQ_P_W)'(p[hb][i][j]);
        gt  = ((VAR_W+NQ_P_W+32)'(lhs) > (VAR_W+NQ_P_W+32)'(rhs));
        cn  = cneg[hb][i][j];
        hit = pos ? (cn | gt) : (cn & !gt);
        cnt += code_t'(hit);
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        mu_r[i] <= '0; var_r[i] <= '0; q[i] <= '0; side_out[i] <= '0;
      end else begin
        mu_r[i]     <= mu_u;
        var_r[i]    <= var_u;
        q[i]        <= OUT_SIGNED ? to_signed_code(cnt) : cnt;
        side_out[i] <= side_in[i];
      end
    end
  end
endmodule
