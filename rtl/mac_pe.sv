// mac_pe: one 3-bit multiply-accumulate processing element of a
// weight-stationary systolic array.
//
// Each cycle the PE adds x*w to the partial sum arriving from the PE above and
// registers it for the PE below; the activation x (with its valid bit and
// head tag) is registered and passed to the PE on the right. This is the PE
// the paper draws: one multiplier, one adder, one register per direction.
// The weight is chosen from NB stored weights by the head tag carried with x,
// so a time-multiplexed accelerator can switch heads token by token; that
// tag-based selection, the operand signedness parameters and the reset of all
// registers are this design's choices. A token that is not valid adds zero.
// Latency: one cycle in both directions.
module mac_pe
  import sa_pkg::*;
#(
  parameter int NB       = N_HEAD,  // stored weights (one per head)
  parameter bit X_SIGNED = 1'b1,    // x is two's complement (else 0..7)
  parameter bit W_SIGNED = 1'b1     // w is two's complement (else 0..7)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  code_t x_in,
  input  side_t side_in,
  input  acc_t  sum_in,
  input  code_t w_bank [NB],
  output code_t x_out,
  output side_t side_out,
  output acc_t  sum_out
);
  logic signed [DW:0]   xs, ws;
  logic signed [2*DW+1:0] prod;
  code_t w;

  always_comb begin
    w    = (NB == 1) ? w_bank[0] : w_bank[int'(side_in.tag) % NB];
    xs   = X_SIGNED ? {x_in[DW-1], x_in} : {1'b0, x_in};
    ws   = W_SIGNED ? {w[DW-1], w}       : {1'b0, w};
    // keep the multiply self-contained signed: an unsigned '0 in the other
    // branch of ?: would turn the product unsigned
    prod = xs * ws;
    if (!side_in.valid) prod = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_out    <= '0;
      side_out <= '0;
      sum_out  <= '0;
    end else begin
      x_out    <= x_in;
      side_out <= side_in;
      sum_out  <= sum_in + ACC_W'(prod);
    end
  end
endmodule
