// mm_ctrl: sequencing of one matrix-multiplication array (Q*K^T or A*V).
//
// Weight side: while the weight loading unit's chain holds fewer than NT
// tokens, w_pop reads one token (all lanes in parallel) from the weight FIFO
// whenever one is available. Latch: when the chain is full, the array has
// drained the previous head's activations and allow is high, latch_en
// copies the chain into the latches. Stream: after the latch, x_pop starts
// one activation token per cycle (as they become available) until NT tokens
// of this head have entered; DRAIN cycles later the array is free for the
// next latch. The paper fixes that the latched weights must be held from the
// first to the last activation of a head; the counters, the DRAIN rule and
// the `allow` gating are this design's. `latched` counts heads latched
// (wrapping).
module mm_ctrl #(
  parameter int NT    = 198,
  parameter int DRAIN = 64 + 198 + 2,
  localparam int CW   = $clog2(NT + 1),
  localparam int DW_  = $clog2(DRAIN + 1)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       w_avail,
  input  logic       loader_full,
  input  logic       x_avail,
  input  logic       allow,
  output logic       w_pop,
  output logic       latch_en,
  output logic       x_pop,
  output logic       busy,
  output logic [7:0] latched
);
  typedef enum logic [1:0] {IDLE, STREAM, DRAINING} state_t;
  state_t        st;
  logic [CW-1:0] wcnt, xcnt;
  logic [DW_-1:0] dcnt;

  assign w_pop    = w_avail && (int'(wcnt) < NT);
  assign latch_en = (st == IDLE) && loader_full && allow;
  assign x_pop    = (st == STREAM) && x_avail && (int'(xcnt) < NT);
  assign busy     = (st != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; wcnt <= '0; xcnt <= '0; dcnt <= '0; latched <= '0;
    end else begin
      if (latch_en) wcnt <= CW'(w_pop);
      else if (w_pop) wcnt <= wcnt + 1'b1;
      unique case (st)
        IDLE: if (latch_en) begin
          st <= STREAM; xcnt <= '0; latched <= latched + 1'b1;
        end
        STREAM: if (x_pop) begin
          if (int'(xcnt) == NT - 1) begin st <= DRAINING; dcnt <= '0; end
          xcnt <= xcnt + 1'b1;
        end
        DRAINING: if (int'(dcnt) == DRAIN - 1) st <= IDLE; else dcnt <= dcnt + 1'b1;
        default: st <= IDLE;
      endcase
    end
  end
endmodule
