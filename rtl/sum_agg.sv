// sum_agg: systolic adder chain (the softmax "Sum" aggregation).
//
// PE i adds the exponential of channel i to the partial sum of PE i-1 and
// registers it for PE i+1. Channels arrive in systolic order (channel i one
// cycle after channel i-1), so the sum of a token whose channel 0 arrived at
// cycle t leaves the chain at cycle t + LANES with the valid bit and head tag
// of the last channel. The paper describes exactly this one-cycle-per-PE
// chain; the SUM_W width is this design's.
module sum_agg
  import sa_pkg::*;
#(
  parameter int LANES = N_TOK
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [EXP_W-1:0] x       [LANES],
  input  side_t            side_in [LANES],
  output logic [SUM_W-1:0] sum_out,
  output side_t            side_out
);
  logic [SUM_W-1:0] s_r  [LANES];
  side_t            sd_r [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LANES; i++) begin s_r[i] <= '0; sd_r[i] <= '0; end
    end else begin
      for (int i = 0; i < LANES; i++) begin
        s_r[i]  <= ((i == 0) ? '0 : s_r[(i == 0) ? 0 : i-1]) + SUM_W'(x[i]);
        sd_r[i] <= side_in[i];
      end
    end
  end
  assign sum_out  = s_r[LANES-1];
  assign side_out = sd_r[LANES-1];
endmodule
