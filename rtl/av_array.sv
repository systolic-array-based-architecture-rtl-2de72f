// av_array: the attention-output array, SA_3b = q(A V).
//
// The value codes of one head (NT tokens x head dim) are loaded through a
// weight loading unit (one chain per column, V token r ends up in row r) and
// latched as the weights of a ROWS x COLS (tokens x head dim)
// weight-stationary MAC array. Each row of A (one query's quantized
// probabilities over all key tokens) enters in systolic order; every column
// result goes through a 7-threshold quantizer. This is the paper's Av row
// (WS + W-Load, Quantizer). A query whose element 0 enters row 0 at cycle t
// gives column c at cycle t + ROWS + c + 1. A codes are unsigned, V codes
// and the outputs signed (count - 4).
module av_array
  import sa_pkg::*;
#(
  parameter int ROWS = N_TOK,
  parameter int COLS = D_HEAD,
  parameter int NB   = N_HEAD
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   v_valid,
  input  code_t  v_vec    [COLS],
  input  logic   v_en,
  output logic   v_full,
  input  code_t  x_in     [ROWS],
  input  side_t  side_in  [ROWS],
  input  acc_t   th       [NB][COLS][N_TH],
  output code_t  q        [COLS],
  output side_t  side_out [COLS]
);
  code_t wl [1][ROWS][COLS];
  acc_t  acc [COLS];
  side_t as  [COLS];

  weight_loader #(.ROWS(ROWS), .COLS(COLS), .ALONG_COLS(1'b0)) u_wl (
    .clk, .rst_n, .in_valid(v_valid), .in_vec(v_vec), .en(v_en), .w_out(wl), .full(v_full));

  mac_array #(.ROWS(ROWS), .COLS(COLS), .NB(1), .X_SIGNED(1'b0), .W_SIGNED(1'b1)) u_mac (
    .clk, .rst_n, .x_in, .side_in, .w(wl), .sum_out(acc), .side_out(as));

  for (genvar c = 0; c < COLS; c++) begin : g_col
    int hb;
    assign hb = int'(as[c].tag) % NB;
    quantizer #(.W(ACC_W), .OUT_SIGNED(1'b1)) u_q (.clk, .rst_n, .x(acc[c]), .side_in(as[c]),
      .th(th[hb][c]), .q(q[c]), .side_out(side_out[c]));
  end
endmodule
