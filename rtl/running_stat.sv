// running_stat: systolic running mean / variance (Welford) aggregation chain.
//
// PE i (i = 1..LANES) takes the post-MAC value x_i of its channel, prescaled
// by s = 2^PRESCALE_SH, and the statistics of PE i-1, and computes
//   d      = s*x_i - mu_{i-1}
//   mu_i   = mu_{i-1} + ((round(2^NU / i) * d) >>> NU)
//   M2_i   = M2_{i-1} + d * (s*x_i - mu_i)
// with mu_0 = M2_0 = 0. This is the paper's fixed-point form of Welford's
// update (numerator 2^NU = 64, prescale s = 32). M2 is the sum of squared
// deviations, i.e. n times the variance; the 1/n is folded into the NormQ
// parameters. Each PE takes one cycle, and channel i arrives one cycle after
// channel i-1 (systolic order), so the final statistics of a token whose
// channel 0 arrived at cycle t leave the chain at cycle t + LANES. The valid
// bit and head tag of the last channel come out with them.
module running_stat
  import sa_pkg::*;
#(
  parameter int LANES = D_HEAD
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  pm_t                    x       [LANES],
  input  side_t                  side_in [LANES],
  output logic signed [MU_W-1:0] mu_out,
  output logic [VAR_W-1:0]       var_out,
  output side_t                  side_out
);
  logic signed [MU_W-1:0] mu_r [LANES];
  logic [VAR_W-1:0]       m2_r [LANES];
  side_t                  s_r  [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_pe
    localparam int RINV = ((2 << NU) + (i + 1)) / (2 * (i + 1));  // round(2^NU/(i+1))
    logic signed [MU_W-1:0]   mu_p, sx, d, mu_n, e;
    logic [VAR_W-1:0]         m2_p;
    logic signed [MU_W+8:0]   prod;
    logic signed [2*MU_W-1:0] dd;
    always_comb begin
      mu_p = (i == 0) ? '0 : mu_r[(i == 0) ? 0 : i-1];
      m2_p = (i == 0) ? '0 : m2_r[(i == 0) ? 0 : i-1];
      sx   = MU_W'(x[i]) <<< PRESCALE_SH;
      d    = sx - mu_p;
      prod = (MU_W+9)'(d) * (MU_W+9)'(RINV);
      mu_n = mu_p + MU_W'(prod >>> NU);
      e    = sx - mu_n;
      dd   = (2*MU_W)'(d) * (2*MU_W)'(e);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        mu_r[i] <= '0; m2_r[i] <= '0; s_r[i] <= '0;
      end else begin
        mu_r[i] <= mu_n;
        m2_r[i] <= m2_p + VAR_W'(dd);
        s_r[i]  <= side_in[i];
      end
    end
  end

  assign mu_out   = mu_r[LANES-1];
  assign var_out  = m2_r[LANES-1];
  assign side_out = s_r[LANES-1];
endmodule
