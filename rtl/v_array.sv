// v_array: the systolic array that produces the 3-bit value codes,
// V_3b = q(z * U_v * scale + bias).
//
// A ROWS x COLS weight-stationary MAC array (one weight bank per head),
// followed per column by Scale+Bias and a 7-threshold quantizer: the
// paper's V row (WS, Scale + Bias + Quantizer, no aggregation). A token whose
// element 0 enters row 0 at cycle t gives column c at cycle t + ROWS + c + 2
// (systolic order). Output codes are signed (count - 4).
module v_array
  import sa_pkg::*;
#(
  parameter int ROWS = D_MODEL,
  parameter int COLS = D_HEAD,
  parameter int NB   = N_HEAD
) (
  input  logic               clk,
  input  logic               rst_n,
  input  code_t              x_in     [ROWS],
  input  side_t              side_in  [ROWS],
  input  code_t              w        [NB][ROWS][COLS],
  input  logic signed [15:0] sb_scale [NB][COLS],
  input  logic signed [31:0] sb_bias  [NB][COLS],
  input  pm_t                th       [NB][COLS][N_TH],
  output code_t              q        [COLS],
  output side_t              side_out [COLS]
);
  acc_t  acc [COLS];
  side_t as  [COLS];
  pm_t   y   [COLS];
  side_t ys  [COLS];

  mac_array #(.ROWS(ROWS), .COLS(COLS), .NB(NB), .X_SIGNED(1'b1), .W_SIGNED(1'b1)) u_mac (
    .clk, .rst_n, .x_in, .side_in, .w, .sum_out(acc), .side_out(as));

  for (genvar c = 0; c < COLS; c++) begin : g_col
    int hb, hq;
    assign hb = int'(as[c].tag) % NB;
    assign hq = int'(ys[c].tag) % NB;
    scale_bias u_sb (.clk, .rst_n, .acc(acc[c]), .side_in(as[c]),
      .scale(sb_scale[hb][c]), .bias(sb_bias[hb][c]), .y(y[c]), .side_out(ys[c]));
    quantizer #(.W(PM_W), .OUT_SIGNED(1'b1)) u_q (.clk, .rst_n, .x(y[c]), .side_in(ys[c]),
      .th(th[hq][c]), .q(q[c]), .side_out(side_out[c]));
  end
endmodule
