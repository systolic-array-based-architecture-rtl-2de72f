// quantizer: 3-bit threshold quantizer.
//
// Seven comparators test the input against seven thresholds in parallel and
// the number of thresholds reached (x >= th[j]) is the 3-bit result, 0..7.
// With thresholds (j + 1/2) * step this is round(x / step) clipped to 0..7,
// as in the paper. With OUT_SIGNED the count is re-coded as count - 4 in
// two's complement (offset binary), this design's way of giving signed
// 3-bit activations to the next array. Thresholds are expected ascending.
// Latency: one cycle.
module quantizer
  import sa_pkg::*;
#(
  parameter int W          = PM_W,
  parameter bit OUT_SIGNED = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] x,
  input  side_t               side_in,
  input  logic signed [W-1:0] th [N_TH],
  output code_t               q,
  output side_t               side_out
);
  code_t cnt;
  always_comb begin
    cnt = '0;
    for (int j = 0; j < N_TH; j++) cnt += code_t'(x >= th[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; side_out <= '0;
    end else begin
      q <= OUT_SIGNED ? to_signed_code(cnt) : cnt;
      side_out <= side_in;
    end
  end
endmodule
