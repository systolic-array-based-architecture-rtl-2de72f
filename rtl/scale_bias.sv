// scale_bias: element-wise post-MAC unit y = sat((acc * scale + bias) >>> SHIFT).
//
// It turns a MAC column result into a fixed-point value for the aggregation
// stage, applying the folded step sizes and the layer bias. The paper names
// the operation "Scale + Bias"; the fixed-point format (signed 16-bit scale
// with SHIFT fraction bits, bias in the same format as the product, rounding
// toward minus infinity, saturation to PM_W bits) is this design's choice.
// Latency: one cycle; the valid bit and head tag are delayed with the data.
module scale_bias
  import sa_pkg::*;
#(
  parameter int SHIFT = SB_SHIFT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  acc_t                    acc,
  input  side_t                   side_in,
  input  logic signed [15:0]      scale,
  input  logic signed [31:0]      bias,
  output pm_t                     y,
  output side_t                   side_out
);
  logic signed [39:0] full_v, sh;
  pm_t sat;

  always_comb begin
    full_v = 40'(acc) * 40'(scale) + 40'(bias);
    sh     = full_v >>> SHIFT;
    if (sh > 40'sd32767)       sat = 16'sh7fff;
    else if (sh < -40'sd32768) sat = 16'sh8000;
    else                       sat = PM_W'(sh);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y <= '0; side_out <= '0;
    end else begin
      y <= sat; side_out <= side_in;
    end
  end
endmodule
