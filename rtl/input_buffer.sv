// input_buffer: ping-pong token store with the input selector for head reuse.
//
// Tokens from the deserializer fill one bank of NT tokens while the other
// bank, once complete, is replayed NH times, once per attention head, so the
// host sends each input only once (the paper's accelerator pipelining with
// its Input_reuse selector). A pass (NT tokens, one per cycle) starts when
// pass_ok is high; the token of pass h carries head tag h, and `reuse` is low
// for the first pass of a bank (data just received) and high for the
// replays. After the last pass the bank is released to the writer. The first
// pass waits for the whole input, as in the paper's latency accounting; the
// two banks and the pass_ok gating are this design's. Read latency: one
// cycle from the pass start to the first token.
module input_buffer
  import sa_pkg::*;
#(
  parameter int TOK_W = D_MODEL * DW,
  parameter int NT    = N_TOK,
  parameter int NH    = N_HEAD
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [TOK_W-1:0] in_tok,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic             pass_ok,
  output logic             pass_start,
  output logic [TOK_W-1:0] out_tok,
  output side_t            out_side,
  output logic             reuse
);
  localparam int IW = $clog2(NT + 1);
  logic [TOK_W-1:0] mem [2*NT];
  logic       full [2];
  logic       wb, rb, active;
  logic [IW-1:0] wi, ri;
  tag_t       head;

  assign in_ready   = !full[wb];
  // the pass that is about to start (or running) reads a buffered input again
  assign reuse      = (head != '0);
  assign pass_start = !active && full[rb] && pass_ok;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[int'(wb)*NT + int'(wi)] <= in_tok;
    out_tok <= mem[int'(rb)*NT + int'(ri)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full[0] <= 1'b0; full[1] <= 1'b0; wb <= 1'b0; rb <= 1'b0; wi <= '0;
      ri <= '0; active <= 1'b0; head <= '0; out_side <= '0;
    end else begin
      if (in_valid && in_ready) begin
        if (int'(wi) == NT - 1) begin
          wi <= '0; full[wb] <= 1'b1; wb <= !wb;
        end else wi <= wi + 1'b1;
      end
      out_side <= '{valid: active, tag: head};
      if (pass_start) begin
        active <= 1'b1; ri <= '0;
      end else if (active) begin
        if (int'(ri) == NT - 1) begin
          active <= 1'b0; ri <= '0;
          if (int'(head) == NH - 1) begin
            head <= '0; full[rb] <= 1'b0; rb <= !rb;
          end else head <= head + 1'b1;
        end else ri <= ri + 1'b1;
      end
    end
  end
endmodule
