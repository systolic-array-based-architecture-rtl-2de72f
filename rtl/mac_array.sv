// mac_array: ROWS x COLS weight-stationary systolic MAC array computing W^T X.
//
// Row r receives element r of each input token, one cycle after row r-1
// (systolic, "skewed" order). Activations move right, partial sums move down;
// column c therefore delivers sum_r x[r]*W[r][c] for a token that entered
// row 0 at cycle t at cycle t + ROWS + c, together with the token's valid bit
// and head tag. Weight bank b of PE (r,c) is w[b][r][c]; the PE uses the bank
// named by the token's head tag (NB = 1 for arrays whose weights come from a
// weight loading unit). Only neighbour-to-neighbour wiring is used, as in the
// paper; there is no broadcast of data.
module mac_array
  import sa_pkg::*;
#(
  parameter int ROWS     = D_MODEL,
  parameter int COLS     = D_HEAD,
  parameter int NB       = N_HEAD,
  parameter bit X_SIGNED = 1'b1,
  parameter bit W_SIGNED = 1'b1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  code_t x_in    [ROWS],
  input  side_t side_in [ROWS],
  input  code_t w       [NB][ROWS][COLS],
  output acc_t  sum_out [COLS],
  output side_t side_out[COLS]
);
  code_t xg [ROWS][COLS+1];
  side_t sg [ROWS][COLS+1];
  acc_t  ag [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign xg[r][0] = x_in[r];
    assign sg[r][0] = side_in[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      code_t wb [NB];
      always_comb for (int b = 0; b < NB; b++) wb[b] = w[b][r][c];
      mac_pe #(.NB(NB), .X_SIGNED(X_SIGNED), .W_SIGNED(W_SIGNED)) u_pe (
        .clk, .rst_n,
        .x_in(xg[r][c]), .side_in(sg[r][c]), .sum_in(ag[r][c]), .w_bank(wb),
        .x_out(xg[r][c+1]), .side_out(sg[r][c+1]), .sum_out(ag[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_out
    assign ag[0][c]    = '0;
    assign sum_out[c]  = ag[ROWS][c];
    // the bottom PE of column c registered its x and its sum in the same cycle
    assign side_out[c] = sg[ROWS-1][c+1];
  end
endmodule
