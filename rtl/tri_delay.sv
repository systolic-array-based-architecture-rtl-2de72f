// tri_delay: triangular delay, lane i delayed by an arithmetic sequence.
//
// Lane i is delayed by BASE + STEP*(LANES-1-i) cycles (ASCEND = 0), or by
// BASE + STEP*i cycles (ASCEND = 1). With ASCEND = 0, STEP = 2, BASE = 1 it
// aligns each post-MAC value with the aggregation result that travels back
// from the last aggregation PE right to left, one lane per cycle, as in the
// paper's triangular delay (delays nk, ..., 2k, k). With ASCEND = 1,
// STEP = 1, BASE = 0 it turns a token that arrives on all lanes at once into
// systolic order. Each lane is a circular buffer of its own depth rather
// than a shift chain (same behaviour); buffers are cleared by the reset.
module tri_delay #(
  parameter int  LANES  = 64,
  parameter int  W      = 16,
  parameter int  BASE   = 1,
  parameter int  STEP   = 2,
  parameter bit  ASCEND = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din  [LANES],
  output logic [W-1:0] dout [LANES]
);
  for (genvar i = 0; i < LANES; i++) begin : g_lane
    localparam int D = BASE + STEP * (ASCEND ? i : LANES - 1 - i);
    if (D == 0) begin : g_wire
      assign dout[i] = din[i];
    end else begin : g_buf
      localparam int PW = (D > 1) ? $clog2(D) : 1;
      logic [W-1:0]  mem [D];
      logic [PW-1:0] ptr;
      assign dout[i] = mem[ptr];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          ptr <= '0;
          for (int k = 0; k < D; k++) mem[k] <= '0;
        end else begin
          mem[ptr] <= din[i];
          ptr      <= (ptr == PW'(D - 1)) ? '0 : ptr + 1'b1;
        end
      end
    end
  end
endmodule
