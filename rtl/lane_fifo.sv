// lane_fifo: a bank of independent per-lane FIFOs that re-times tokens
// between systolic arrays.
//
// Each lane writes whenever its own input is valid, so tokens may arrive in
// any skew (systolic, reversed, or all lanes at once). A read of one token is
// started with pop_start. With SYSTOLIC = 0 all lanes are read in the same
// cycle (parallel order, used to feed a weight loading unit); with
// SYSTOLIC = 1 lane i is read i cycles after lane 0 (systolic order, used to
// feed the rows of a MAC array). Read data appear one cycle after the read,
// with the stored valid bit and head tag. LAST_LANE names the lane that is
// written last for a token; `avail` (that lane is not empty) and
// `cnt_last` are what a controller checks before reading, `cnt_first`
// (the lane written first, LANES-1-LAST_LANE) tells how full the bank is.
// The paper says only that FIFOs absorb the cycle mismatch between arrays;
// this per-lane arrangement, the depth and the flags are this design's.
module lane_fifo
  import sa_pkg::*;
#(
  parameter int LANES     = D_HEAD,
  parameter int DEPTH     = 2 * N_TOK,
  parameter bit SYSTOLIC  = 1'b1,
  parameter int LAST_LANE = 0,
  localparam int CW       = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  code_t         din      [LANES],
  input  side_t         side_in  [LANES],
  input  logic          pop_start,
  output code_t         dout     [LANES],
  output side_t         side_out [LANES],
  output logic          avail,
  output logic [CW-1:0] cnt_last,
  output logic [CW-1:0] cnt_first
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [CW-1:0] cnt [LANES];
  logic          pop [LANES];
  logic          pop_d [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    typedef struct packed { tag_t tag; code_t d; } ent_t;
    ent_t          mem [DEPTH];
    logic [AW-1:0] wp, rp;
    logic          push;

    assign pop[i] = SYSTOLIC ? ((i == 0) ? pop_start : pop_d[(i == 0) ? 0 : i-1]) : pop_start;
    assign push   = side_in[i].valid;

    always_ff @(posedge clk) begin
      if (push) mem[wp] <= '{tag: side_in[i].tag, d: din[i]};
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wp <= '0; rp <= '0; cnt[i] <= '0; pop_d[i] <= 1'b0;
        dout[i] <= '0; side_out[i] <= '0;
      end else begin
        pop_d[i] <= pop[i];
        if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
        if (pop[i]) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
        cnt[i] <= cnt[i] + CW'(push) - CW'(pop[i]);
        dout[i]           <= pop[i] ? mem[rp].d : '0;
        side_out[i].valid <= pop[i];
        side_out[i].tag   <= mem[rp].tag;
      end
    end

    a_no_overflow:  assert property (@(posedge clk) !(push && !pop[i] && cnt[i] == CW'(DEPTH)))
      else $error("lane_fifo: overflow on lane %0d", i);
    a_no_underflow: assert property (@(posedge clk) !(pop[i] && cnt[i] == '0))
      else $error("lane_fifo: read of empty lane %0d", i);
  end

  assign avail     = (cnt[LAST_LANE] != '0);
  assign cnt_last  = cnt[LAST_LANE];
  assign cnt_first = cnt[LANES-1-LAST_LANE];
endmodule
