// sa_accel: one self-attention (SA) accelerator, time-multiplexed over all
// heads of a multi-head attention layer, for 3-bit integerized ViTs.
//
// The host sends the 3-bit input z (NT tokens x DM channels) once over a
// 64-bit word stream. The input buffer replays it once per head; each pass is
// skewed into systolic order and enters three arrays at once: Q and K
// (MAC, Scale+Bias, running statistics, NormQ) and V (MAC, Scale+Bias,
// quantizer). Per-lane FIFOs absorb the timing differences: K and V are
// re-ordered into parallel order and shifted into the weight loading units
// of the Q*K^T array and the A*V array; Q waits until the head's keys are
// latched and then enters the Q*K^T array, whose exponential, sum and ScaleQ
// stages produce the 3-bit attention matrix A; A waits until the head's
// values are latched and enters the A*V array; the quantized result SA_3b
// (NT tokens x DH channels per head, heads in order 0..NH-1) returns to the
// host as 64-bit words. Only 3-bit codes travel between arrays.
//
// The dataflow, array contents, sizes and head reuse follow the paper. The
// flow control (pass gating, latch gating, FIFO depths of 3*NT tokens) is
// this design's: a new head may start its projection pass while at most two
// heads are ahead of the Q*K^T latch and three of the A*V latch, so no FIFO
// can overflow. All weights and per-head constants are input ports, kept
// constant while the accelerator runs (the paper's parameter storage).
// Output word w of a result token holds channels 21w..21w+20 (3 bits each).
module sa_accel
  import sa_pkg::*;
#(
  parameter int NT = N_TOK,
  parameter int DM = D_MODEL,
  parameter int NH = N_HEAD,
  localparam int DH = DM / NH
) (
  input  logic               clk,
  input  logic               rst_n,
  // host -> accelerator: 3-bit input tokens, DM codes each
  input  logic [BUS_W-1:0]   in_data,
  input  logic               in_valid,
  output logic               in_ready,
  // accelerator -> host: 3-bit SA results, DH codes per token
  output logic [BUS_W-1:0]   out_data,
  output logic               out_valid,
  input  logic               out_ready,
  // parameters of all heads
  input  code_t              w_q       [NH][DM][DH],
  input  code_t              w_k       [NH][DM][DH],
  input  code_t              w_v       [NH][DM][DH],
  input  logic signed [15:0] sb_scale_q[NH][DH],
  input  logic signed [31:0] sb_bias_q [NH][DH],
  input  logic signed [15:0] sb_scale_k[NH][DH],
  input  logic signed [31:0] sb_bias_k [NH][DH],
  input  logic signed [15:0] sb_scale_v[NH][DH],
  input  logic signed [31:0] sb_bias_v [NH][DH],
  input  logic [NQ_P_W-1:0]  nq_p_q    [NH][DH][N_TH],
  input  logic               nq_cneg_q [NH][DH][N_TH],
  input  logic [NQ_P_W-1:0]  nq_p_k    [NH][DH][N_TH],
  input  logic               nq_cneg_k [NH][DH][N_TH],
  input  pm_t                v_th      [NH][DH][N_TH],
  input  logic signed [15:0] exp_scale [NH],
  input  logic [15:0]        sq_delta  [NH][N_TH],
  input  acc_t               av_th     [NH][DH][N_TH]
);
  localparam int TOK_W = DM * DW;
  localparam int SW    = $bits(side_t);
  localparam int QD    = 3 * NT;   // depth of the inter-array FIFOs
  localparam int OD    = 2 * NT;   // depth of the output FIFO

  // ---------------- input: deserializer, buffer, skew ----------------
  logic [TOK_W-1:0] d_tok, b_tok;
  logic             d_valid, d_ready, pass_ok, pass_start, reuse;
  side_t            b_side;
  logic [SW+DW-1:0] sk_in [DM], sk_out [DM];
  code_t            z_x [DM];
  side_t            z_s [DM];

  deserializer #(.TOK_W(TOK_W)) u_des (.clk, .rst_n, .in_data, .in_valid, .in_ready,
    .tok(d_tok), .tok_valid(d_valid), .tok_ready(d_ready));

  input_buffer #(.TOK_W(TOK_W), .NT(NT), .NH(NH)) u_ibuf (.clk, .rst_n,
    .in_tok(d_tok), .in_valid(d_valid), .in_ready(d_ready), .pass_ok, .pass_start,
    .out_tok(b_tok), .out_side(b_side), .reuse);

  for (genvar r = 0; r < DM; r++) begin : g_skew
    assign sk_in[r] = {b_side, b_tok[r*DW +: DW]};
    assign {z_s[r], z_x[r]} = sk_out[r];
  end
  tri_delay #(.LANES(DM), .W(SW + DW), .BASE(0), .STEP(1), .ASCEND(1'b1)) u_skew (
    .clk, .rst_n, .din(sk_in), .dout(sk_out));

  // ---------------- Q, K, V projection arrays ----------------
  code_t q_q [DH], k_q [DH], v_q [DH];
  side_t q_s [DH], k_s [DH], v_s [DH];

  qk_array #(.ROWS(DM), .COLS(DH), .NB(NH)) u_q (.clk, .rst_n, .x_in(z_x), .side_in(z_s),
    .w(w_q), .sb_scale(sb_scale_q), .sb_bias(sb_bias_q), .nq_p(nq_p_q), .nq_cneg(nq_cneg_q),
    .q(q_q), .side_out(q_s));
  qk_array #(.ROWS(DM), .COLS(DH), .NB(NH)) u_k (.clk, .rst_n, .x_in(z_x), .side_in(z_s),
    .w(w_k), .sb_scale(sb_scale_k), .sb_bias(sb_bias_k), .nq_p(nq_p_k), .nq_cneg(nq_cneg_k),
    .q(k_q), .side_out(k_s));
  v_array #(.ROWS(DM), .COLS(DH), .NB(NH)) u_v (.clk, .rst_n, .x_in(z_x), .side_in(z_s),
    .w(w_v), .sb_scale(sb_scale_v), .sb_bias(sb_bias_v), .th(v_th),
    .q(v_q), .side_out(v_s));

  // ---------------- re-timing FIFOs ----------------
  localparam int QCW = $clog2(QD + 1);
  localparam int OCW = $clog2(OD + 1);
  code_t qf_d [DH], kf_d [DH], vf_d [DH];
  side_t qf_s [DH], kf_s [DH], vf_s [DH];
  logic  qf_av, kf_av, vf_av, af_av, of_av;
  logic [QCW-1:0] unused_c0, unused_c1, unused_c2, unused_c3, unused_c4, unused_c5, unused_c6, unused_c7;
  logic [OCW-1:0] of_first, unused_o;
  logic  q_pop, k_pop, v_pop, a_pop, o_pop;

  lane_fifo #(.LANES(DH), .DEPTH(QD), .SYSTOLIC(1'b1), .LAST_LANE(0)) u_qf (.clk, .rst_n,
    .din(q_q), .side_in(q_s), .pop_start(q_pop), .dout(qf_d), .side_out(qf_s),
    .avail(qf_av), .cnt_last(unused_c0), .cnt_first(unused_c1));
  lane_fifo #(.LANES(DH), .DEPTH(QD), .SYSTOLIC(1'b0), .LAST_LANE(0)) u_kf (.clk, .rst_n,
    .din(k_q), .side_in(k_s), .pop_start(k_pop), .dout(kf_d), .side_out(kf_s),
    .avail(kf_av), .cnt_last(unused_c2), .cnt_first(unused_c3));
  lane_fifo #(.LANES(DH), .DEPTH(QD), .SYSTOLIC(1'b0), .LAST_LANE(DH-1)) u_vf (.clk, .rst_n,
    .din(v_q), .side_in(v_s), .pop_start(v_pop), .dout(vf_d), .side_out(vf_s),
    .avail(vf_av), .cnt_last(unused_c4), .cnt_first(unused_c5));

  // ---------------- Q*K^T and softmax ----------------
  logic  k_full, k_en, v_full, v_en, a_busy, av_busy;
  logic [7:0] a_lat, av_lat, passes;
  code_t a_q [NT], af_d [NT];
  side_t a_s [NT], af_s [NT];

  mm_ctrl #(.NT(NT), .DRAIN(DH + NT + 2)) u_ca (.clk, .rst_n,
    .w_avail(kf_av), .loader_full(k_full), .x_avail(qf_av),
    .allow($signed(8'(a_lat - av_lat)) < 8'sd2),
    .w_pop(k_pop), .latch_en(k_en), .x_pop(q_pop), .busy(a_busy), .latched(a_lat));

  a_array #(.ROWS(DH), .COLS(NT), .NB(NH)) u_a (.clk, .rst_n,
    .k_valid(kf_s[0].valid), .k_vec(kf_d), .k_en, .k_full,
    .x_in(qf_d), .side_in(qf_s), .exp_scale, .sq_delta, .q(a_q), .side_out(a_s));

  lane_fifo #(.LANES(NT), .DEPTH(QD), .SYSTOLIC(1'b1), .LAST_LANE(0)) u_af (.clk, .rst_n,
    .din(a_q), .side_in(a_s), .pop_start(a_pop), .dout(af_d), .side_out(af_s),
    .avail(af_av), .cnt_last(unused_c6), .cnt_first(unused_c7));

  // ---------------- A*V ----------------
  code_t av_q [DH], of_d [DH];
  side_t av_s [DH], of_s [DH];

  mm_ctrl #(.NT(NT), .DRAIN(NT + DH + 2)) u_cv (.clk, .rst_n,
    .w_avail(vf_av), .loader_full(v_full), .x_avail(af_av),
    .allow(int'(of_first) + NT <= OD),
    .w_pop(v_pop), .latch_en(v_en), .x_pop(a_pop), .busy(av_busy), .latched(av_lat));

  av_array #(.ROWS(NT), .COLS(DH), .NB(NH)) u_av (.clk, .rst_n,
    .v_valid(vf_s[0].valid), .v_vec(vf_d), .v_en, .v_full,
    .x_in(af_d), .side_in(af_s), .th(av_th), .q(av_q), .side_out(av_s));

  // ---------------- output ----------------
  logic             o_pending, s_ready;
  logic [DH*DW-1:0] o_tok;

  lane_fifo #(.LANES(DH), .DEPTH(OD), .SYSTOLIC(1'b0), .LAST_LANE(DH-1)) u_of (.clk, .rst_n,
    .din(av_q), .side_in(av_s), .pop_start(o_pop), .dout(of_d), .side_out(of_s),
    .avail(of_av), .cnt_last(unused_o), .cnt_first(of_first));

  assign o_pop = of_av && s_ready && !o_pending;
  for (genvar c = 0; c < DH; c++) begin : g_otok
    assign o_tok[c*DW +: DW] = of_d[c];
  end

  serializer #(.TOK_W(DH * DW)) u_ser (.clk, .rst_n, .tok(o_tok), .tok_valid(of_s[0].valid),
    .tok_ready(s_ready), .out_data, .out_valid, .out_ready);

  // ---------------- pass gating ----------------
  assign pass_ok = (8'(passes - a_lat) < 8'd2) && (8'(passes - av_lat) < 8'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      passes <= '0; o_pending <= 1'b0;
    end else begin
      if (pass_start) passes <= passes + 1'b1;
      o_pending <= o_pop;
    end
  end
endmodule
