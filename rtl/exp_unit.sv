// exp_unit: shift-based exponential for the softmax post-MAC stage.
//
// e^x = 2^(x*log2 e) = 2^I * 2^f with I = floor(x*log2 e) and f in [0,1).
// Stage 1 multiplies the MAC score by a per-head scale, giving x with 10
// fraction bits (the paper's 1024x prescale). Stage 2 multiplies by log2 e
// (1477/1024). Stage 3 splits integer and fraction bits, forms the mantissa
// 1/2 + f/2 (about 2^(f-1)) by a one-bit right shift of the fraction and
// overwriting its top bit with 1, and shifts it by I+1: the first-order
// approximation and the shift/overwrite trick are the paper's. The output is
// scaled by 2^E_OFF (the scale cancels in softmax) and saturates at
// EXP_W bits; both, and the log2 e constant, are this design's choices.
// Latency: three cycles (a multi-cycle unit as the paper describes).
module exp_unit
  import sa_pkg::*;
#(
  parameter int FRAC  = 10,
  parameter int E_OFF = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  acc_t               acc,
  input  side_t              side_in,
  input  logic signed [15:0] scale,
  output logic [EXP_W-1:0]   e,
  output side_t              side_out
);
  localparam logic signed [15:0] LOG2E = 16'sd1477;  // log2(e) * 1024

  logic signed [31:0] v1;
  logic signed [47:0] t2;
  side_t s1, s2;

  logic signed [47:0] ipart;
  logic [FRAC-1:0]    fpart, mant;
  int                 sh;
  logic [EXP_W-1:0]   e_c;
  logic [63:0]        wide;

  always_comb begin
    ipart = t2 >>> FRAC;
    fpart = t2[FRAC-1:0];
    mant  = fpart >> 1;
    mant[FRAC-1] = 1'b1;                 // 1/2 + f/2
    sh    = 0;
    wide  = '0;
    if (ipart > 48'sd40) begin
      e_c = '1;
    end else if (ipart < -48'sd40) begin
      e_c = '0;
    end else begin
      sh = int'(ipart) + 1 + E_OFF - FRAC;
      if (sh >= 0) begin
        wide = 64'(mant) << sh;
        e_c  = (wide >= 64'(1) << EXP_W) ? '1 : EXP_W'(wide);
      end else begin
        e_c  = EXP_W'(64'(mant) >> (-sh));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= '0; t2 <= '0; e <= '0; s1 <= '0; s2 <= '0; side_out <= '0;
    end else begin
      v1 <= 32'(acc) * 32'(scale);
      t2 <= (48'(v1) * 48'(LOG2E)) >>> FRAC;
      e  <= e_c;
      s1 <= side_in; s2 <= s1; side_out <= s2;
    end
  end
endmodule
