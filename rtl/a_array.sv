// a_array: the attention-score array, A_3b = q(softmax(Q K^T)).
//
// The keys of one head are loaded through a weight loading unit (one chain
// per row, K token c ends up in column c) and latched as the weights of a
// ROWS x COLS (head dim x tokens) weight-stationary MAC array. Each query
// token entering in systolic order produces one score per key column; per
// column a three-cycle exponential unit (per-head scale, log2 e, shift) feeds
// a systolic sum over all key columns; the sum travels back from the last
// column while a triangular delay holds each exponential, and ScaleQ
// quantizes e_c / sum into 0..7. This is the paper's A row (WS + W-Load,
// Scale + Exp, Sum, ScaleQ). A query whose element 0 enters row 0 at cycle t
// gives column c at cycle t + ROWS + 2*COLS - c + 4 (reversed order). The
// output codes are unsigned (probabilities are not negative).
module a_array
  import sa_pkg::*;
#(
  parameter int ROWS = D_HEAD,
  parameter int COLS = N_TOK,
  parameter int NB   = N_HEAD
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               k_valid,
  input  code_t              k_vec     [ROWS],
  input  logic               k_en,
  output logic               k_full,
  input  code_t              x_in      [ROWS],
  input  side_t              side_in   [ROWS],
  input  logic signed [15:0] exp_scale [NB],
  input  logic [15:0]        sq_delta  [NB][N_TH],
  output code_t              q         [COLS],
  output side_t              side_out  [COLS]
);
  localparam int LW = EXP_W + $bits(side_t);
  code_t wl [1][ROWS][COLS];
  acc_t  acc [COLS];
  side_t as  [COLS];
  logic [EXP_W-1:0] e [COLS], ed [COLS];
  side_t es [COLS], esd [COLS];
  logic [LW-1:0] dl_in [COLS], dl_out [COLS];
  logic [SUM_W-1:0] s;
  side_t            s_side;

  weight_loader #(.ROWS(ROWS), .COLS(COLS), .ALONG_COLS(1'b1)) u_wl (
    .clk, .rst_n, .in_valid(k_valid), .in_vec(k_vec), .en(k_en), .w_out(wl), .full(k_full));

  mac_array #(.ROWS(ROWS), .COLS(COLS), .NB(1), .X_SIGNED(1'b1), .W_SIGNED(1'b1)) u_mac (
    .clk, .rst_n, .x_in, .side_in, .w(wl), .sum_out(acc), .side_out(as));

  for (genvar c = 0; c < COLS; c++) begin : g_col
    int hb;
    assign hb = int'(as[c].tag) % NB;
    exp_unit u_exp (.clk, .rst_n, .acc(acc[c]), .side_in(as[c]), .scale(exp_scale[hb]),
      .e(e[c]), .side_out(es[c]));
    assign dl_in[c] = {es[c], e[c]};
    assign {esd[c], ed[c]} = dl_out[c];
  end

  sum_agg #(.LANES(COLS)) u_sum (.clk, .rst_n, .x(e), .side_in(es), .sum_out(s), .side_out(s_side));

  tri_delay #(.LANES(COLS), .W(LW), .BASE(1), .STEP(2), .ASCEND(1'b0)) u_tri (
    .clk, .rst_n, .din(dl_in), .dout(dl_out));

  scaleq #(.LANES(COLS), .NB(NB)) u_sq (.clk, .rst_n, .e(ed), .side_in(esd), .s_in(s),
    .delta(sq_delta), .q, .side_out);

  a_sum_aligned: assert property (@(posedge clk) esd[COLS-1].valid |-> s_side.valid)
    else $error("a_array: sum and delayed exponential out of step");
endmodule
