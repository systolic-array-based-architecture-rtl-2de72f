// qk_array: the systolic array that produces the normalized 3-bit query or
// key codes, Q_3b = q(LN(z * U_q)) (same structure for K).
//
// Pipeline: a ROWS x COLS weight-stationary MAC array with one weight bank
// per head -> Scale+Bias per column (1 cycle) -> running mean/variance
// aggregation from column 0 to COLS-1 (1 cycle per column) -> the statistics
// travel back from column COLS-1 to column 0 (1 cycle per column) while a
// triangular delay holds each column's value until they arrive -> NormQ per
// column. This is the paper's Q/K row of its operation table (WS, Scale +
// Bias, Normalization, NormQ). A token whose element 0 enters row 0 at cycle
// t gives the code of column c at cycle t + ROWS + 2*COLS - c + 2, so the
// output is in reversed systolic order (last column first). The output codes
// are signed (count - 4).
module qk_array
  import sa_pkg::*;
#(
  parameter int ROWS = D_MODEL,
  parameter int COLS = D_HEAD,
  parameter int NB   = N_HEAD
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  code_t                  x_in     [ROWS],
  input  side_t                  side_in  [ROWS],
  input  code_t                  w        [NB][ROWS][COLS],
  input  logic signed [15:0]     sb_scale [NB][COLS],
  input  logic signed [31:0]     sb_bias  [NB][COLS],
  input  logic [NQ_P_W-1:0]      nq_p     [NB][COLS][N_TH],
  input  logic                   nq_cneg  [NB][COLS][N_TH],
  output code_t                  q        [COLS],
  output side_t                  side_out [COLS]
);
  localparam int LW = PM_W + $bits(side_t);
  acc_t  acc  [COLS];
  side_t as   [COLS];
  pm_t   y    [COLS];
  side_t ys   [COLS];
  logic [LW-1:0] dl_in [COLS], dl_out [COLS];
  pm_t   yd   [COLS];
  side_t ysd  [COLS];
  logic signed [MU_W-1:0] mu;
  logic [VAR_W-1:0]       m2;
  side_t                  st_side;

  mac_array #(.ROWS(ROWS), .COLS(COLS), .NB(NB), .X_SIGNED(1'b1), .W_SIGNED(1'b1)) u_mac (
    .clk, .rst_n, .x_in, .side_in, .w, .sum_out(acc), .side_out(as));

  for (genvar c = 0; c < COLS; c++) begin : g_col
    int hb;
    assign hb = int'(as[c].tag) % NB;
    scale_bias u_sb (.clk, .rst_n, .acc(acc[c]), .side_in(as[c]),
      .scale(sb_scale[hb][c]), .bias(sb_bias[hb][c]), .y(y[c]), .side_out(ys[c]));
    assign dl_in[c] = {ys[c], y[c]};
    assign {ysd[c], yd[c]} = dl_out[c];
  end

  running_stat #(.LANES(COLS)) u_stat (.clk, .rst_n, .x(y), .side_in(ys),
    .mu_out(mu), .var_out(m2), .side_out(st_side));

  tri_delay #(.LANES(COLS), .W(LW), .BASE(1), .STEP(2), .ASCEND(1'b0)) u_tri (
    .clk, .rst_n, .din(dl_in), .dout(dl_out));

  normq #(.LANES(COLS), .NB(NB), .OUT_SIGNED(1'b1)) u_nq (.clk, .rst_n, .x(yd), .side_in(ysd),
    .mu_in(mu), .var_in(m2), .p(nq_p), .cneg(nq_cneg), .q, .side_out);

  // the statistics must arrive at the last column together with its value
  a_stat_aligned: assert property (@(posedge clk) ysd[COLS-1].valid |-> st_side.valid)
    else $error("qk_array: statistics and delayed value out of step");
endmodule
