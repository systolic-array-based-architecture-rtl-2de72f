// tb_sa_accel: end-to-end test of the time-multiplexed SA accelerator.
//
// Random 3-bit inputs, weights and per-head constants are generated; two
// input matrices are sent back to back over the 64-bit link (so both input
// banks and the head reuse are used) while the receiver stalls at random.
// Every output word is compared with a bit-exact reference computed here
// from the same integer arithmetic (projection, Scale+Bias, Welford
// statistics, NormQ, shift-based exponential, ScaleQ, A*V, quantizer).
// The test also counts the flow-control events the design relies on and
// fails if one never happens, and reports the cycle count of each head.
module tb_sa_accel;
  import sa_pkg::*;
  localparam int NT = 12, DM = 24, NH = 3;
  localparam int DH = DM / NH;
  localparam int NIN = 2;                          // input matrices sent
  localparam int IWORDS = (DM * DW + BUS_W - 1) / BUS_W;
  localparam int OWORDS = (DH * DW + BUS_W - 1) / BUS_W;
  localparam int WATCHDOG = 200000;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic [BUS_W-1:0] in_data, out_data;
  logic in_valid, in_ready, out_valid, out_ready;
  code_t              w_q [NH][DM][DH], w_k [NH][DM][DH], w_v [NH][DM][DH];
  logic signed [15:0] sb_scale_q [NH][DH], sb_scale_k [NH][DH], sb_scale_v [NH][DH];
  logic signed [31:0] sb_bias_q [NH][DH], sb_bias_k [NH][DH], sb_bias_v [NH][DH];
  logic [NQ_P_W-1:0]  nq_p_q [NH][DH][N_TH], nq_p_k [NH][DH][N_TH];
  logic               nq_cneg_q [NH][DH][N_TH], nq_cneg_k [NH][DH][N_TH];
  pm_t                v_th [NH][DH][N_TH];
  logic signed [15:0] exp_scale [NH];
  logic [15:0]        sq_delta [NH][N_TH];
  acc_t               av_th [NH][DH][N_TH];

  sa_accel #(.NT(NT), .DM(DM), .NH(NH)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- reference model ----------------
  code_t z [NIN][NT][DM];
  code_t ref_out [NIN][NH][NT][DH];
  code_t ref_q [NIN][NH][NT][DH], ref_k [NIN][NH][NT][DH], ref_v [NIN][NH][NT][DH];
  code_t ref_a [NIN][NH][NT][NT];

  function automatic longint sx3(code_t c); return longint'(signed'(c)); endfunction

  function automatic longint sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic longint wrap(longint v, int w);   // two's complement wrap to w bits
    longint m = (longint'(1) << w);
    longint r = v & (m - 1);
    if (r >= (m >> 1)) r -= m;
    return r;
  endfunction

  task automatic build_ref(int n);
    longint yq [NT][DH], yk [NT][DH], yv [NT][DH];
    code_t  cq [NT][DH], ck [NT][DH], cv [NT][DH], ca [NT][NT];
    for (int h = 0; h < NH; h++) begin
      for (int t = 0; t < NT; t++)
        for (int c = 0; c < DH; c++) begin
          longint aq = 0, ak = 0, av = 0;
          for (int r = 0; r < DM; r++) begin
            aq += sx3(z[n][t][r]) * sx3(w_q[h][r][c]);
            ak += sx3(z[n][t][r]) * sx3(w_k[h][r][c]);
            av += sx3(z[n][t][r]) * sx3(w_v[h][r][c]);
          end
          yq[t][c] = sat16((wrap(aq,16) * longint'(sb_scale_q[h][c]) + longint'(sb_bias_q[h][c])) >>> SB_SHIFT);
          yk[t][c] = sat16((wrap(ak,16) * longint'(sb_scale_k[h][c]) + longint'(sb_bias_k[h][c])) >>> SB_SHIFT);
          yv[t][c] = sat16((wrap(av,16) * longint'(sb_scale_v[h][c]) + longint'(sb_bias_v[h][c])) >>> SB_SHIFT);
        end
      for (int t = 0; t < NT; t++) begin
        norm_ref(yq[t], h, 1'b1, cq[t]);
        norm_ref(yk[t], h, 1'b0, ck[t]);
        for (int c = 0; c < DH; c++) begin
          int cnt = 0;
          for (int j = 0; j < N_TH; j++) cnt += int'(yv[t][c] >= longint'(v_th[h][c][j]));
          cv[t][c] = to_signed_code(code_t'(cnt));
        end
      end
      for (int t = 0; t < NT; t++) begin
        ref_q[n][h][t] = cq[t]; ref_k[n][h][t] = ck[t]; ref_v[n][h][t] = cv[t];
      end
      // attention
      for (int tq = 0; tq < NT; tq++) begin
        longint e [NT];
        longint s = 0;
        for (int tk = 0; tk < NT; tk++) begin
          longint sc = 0, v1, t2, ip, f, mant, sh;
          for (int c = 0; c < DH; c++) sc += sx3(cq[tq][c]) * sx3(ck[tk][c]);
          v1 = wrap(sc * longint'(exp_scale[h]), 32);
          t2 = (v1 * 1477) >>> 10;
          ip = t2 >>> 10;
          f  = t2 & 1023;
          mant = (f >> 1) | 512;
          if (ip > 40) e[tk] = 65535;
          else if (ip < -40) e[tk] = 0;
          else begin
            sh = ip + 1 + 8 - 10;
            if (sh >= 0) e[tk] = ((mant << sh) >= 65536) ? 65535 : (mant << sh);
            else e[tk] = mant >> (-sh);
          end
          s += e[tk];
        end
        s = s & ((longint'(1) << SUM_W) - 1);
        for (int tk = 0; tk < NT; tk++) begin
          int cnt = 0;
          for (int j = 0; j < N_TH; j++) cnt += int'((e[tk] << SQ_F) >= s * longint'(sq_delta[h][j]));
          ca[tq][tk] = code_t'(cnt);
          ref_a[n][h][tq][tk] = code_t'(cnt);
        end
      end
      for (int tq = 0; tq < NT; tq++)
        for (int c = 0; c < DH; c++) begin
          longint acc = 0;
          int cnt = 0;
          for (int tk = 0; tk < NT; tk++) acc += longint'(ca[tq][tk]) * sx3(cv[tk][c]);
          acc = wrap(acc, 16);
          for (int j = 0; j < N_TH; j++) cnt += int'(acc >= longint'(av_th[h][c][j]));
          ref_out[n][h][tq][c] = to_signed_code(code_t'(cnt));
        end
    end
  endtask

  // Welford statistics (fixed point) and NormQ for one token
  task automatic norm_ref(input longint y [DH], input int h, input bit isq, output code_t o [DH]);
    longint mu = 0, m2 = 0;
    for (int i = 0; i < DH; i++) begin
      longint sxv = wrap(y[i] << PRESCALE_SH, MU_W);
      longint rinv = ((2 << NU) + (i + 1)) / (2 * (i + 1));
      longint d = wrap(sxv - mu, MU_W);
      longint mun = wrap(mu + ((d * rinv) >>> NU), MU_W);
      longint ee = wrap(sxv - mun, MU_W);
      m2 = m2 + d * ee;
      mu = mun;
    end
    for (int i = 0; i < DH; i++) begin
      longint a = wrap((y[i] << PRESCALE_SH) - mu, MU_W);
      logic [127:0] lhs, rhs;
      int cnt = 0;
      lhs = 128'(a * a) << NQ_PF;
      for (int j = 0; j < N_TH; j++) begin
        bit gt, cn, hit;
        rhs = 128'(m2) * 128'(isq ? nq_p_q[h][i][j] : nq_p_k[h][i][j]);
        gt  = lhs > rhs;
        cn  = isq ? nq_cneg_q[h][i][j] : nq_cneg_k[h][i][j];
        hit = (a > 0) ? (cn | gt) : (cn & !gt);
        cnt += int'(hit);
      end
      o[i] = to_signed_code(code_t'(cnt));
    end
  endtask

  // ---------------- stimulus ----------------
  task automatic gen_params();
    real cth [N_TH];
    for (int j = 0; j < N_TH; j++) cth[j] = (real'(j) - 3.0) * 0.5;   // LN thresholds c_j
    for (int h = 0; h < NH; h++) begin
      for (int r = 0; r < DM; r++)
        for (int c = 0; c < DH; c++) begin
          w_q[h][r][c] = code_t'($urandom); w_k[h][r][c] = code_t'($urandom);
          w_v[h][r][c] = code_t'($urandom);
        end
      for (int c = 0; c < DH; c++) begin
        sb_scale_q[h][c] = 16'($urandom_range(128, 512));
        sb_scale_k[h][c] = 16'($urandom_range(128, 512));
        sb_scale_v[h][c] = 16'($urandom_range(64, 256));
        sb_bias_q[h][c]  = 32'(int'($urandom_range(0, 2000)) - 1000);
        sb_bias_k[h][c]  = 32'(int'($urandom_range(0, 2000)) - 1000);
        sb_bias_v[h][c]  = 32'(int'($urandom_range(0, 2000)) - 1000);
        for (int j = 0; j < N_TH; j++) begin
          nq_p_q[h][c][j]    = NQ_P_W'(longint'(cth[j] * cth[j] / real'(DH) * 4096.0));
          nq_cneg_q[h][c][j] = (cth[j] < 0.0);
          nq_p_k[h][c][j]    = NQ_P_W'(longint'(cth[j] * cth[j] / real'(DH) * 4096.0 * 1.2));
          nq_cneg_k[h][c][j] = (cth[j] < 0.0);
          v_th[h][c][j]      = 16'((j - 3) * 6 - 2 + int'($urandom_range(0, 3)));
          av_th[h][c][j]     = 16'((j - 3) * 8 + int'($urandom_range(0, 3)));
        end
      end
      exp_scale[h] = 16'($urandom_range(60, 200));
      for (int j = 0; j < N_TH; j++) sq_delta[h][j] = 16'((2 * j + 1) * 65536 / 16 / 2);
    end
  endtask

  // mechanism counters
  int n_reuse = 0, n_pass_stall = 0, n_in_stall = 0, n_out_stall = 0, n_latch_a = 0,
      n_latch_av = 0, n_allow_a_block = 0;
  int head_done_cyc [NIN*NH];
  always @(posedge clk) if (rst_n) begin
    if (dut.pass_start && dut.reuse) n_reuse++;
    if (dut.u_ibuf.pass_start == 1'b0 && !dut.u_ibuf.active && dut.u_ibuf.full[dut.u_ibuf.rb] && !dut.pass_ok)
      n_pass_stall++;
    if (in_valid && !in_ready) n_in_stall++;
    if (out_valid && !out_ready) n_out_stall++;
    if (dut.k_en) n_latch_a++;
    if (dut.v_en) n_latch_av++;
    if (!dut.u_ca.busy && k_full_w && !dut.u_ca.allow) n_allow_a_block++;
  end
  logic k_full_w;
  assign k_full_w = dut.k_full;

  // per-lane monitors of the intermediate codes Q, K, V and A: the k-th valid
  // code on a lane belongs to token k of the global (input, head, token) order
  int mq [DH], mk [DH], mv [DH], ma [NT];
  int inter_fail = 0;
  initial begin
    for (int c = 0; c < DH; c++) begin mq[c] = 0; mk[c] = 0; mv[c] = 0; end
    for (int c = 0; c < NT; c++) ma[c] = 0;
  end
  function automatic void split(int g, output int n, output int h, output int t);
    n = g / (NH*NT); h = (g / NT) % NH; t = g % NT;
  endfunction
  always @(posedge clk) if (rst_n) begin
    int n, h, t;
    for (int c = 0; c < DH; c++) begin
      if (dut.q_s[c].valid) begin split(mq[c], n, h, t); mq[c]++; checks++;
        if (n < NIN && dut.q_q[c] !== ref_q[n][h][t][c]) begin failures++; inter_fail++;
          if (inter_fail < 6) $display("Q mismatch in%0d h%0d t%0d c%0d got %0d exp %0d", n, h, t, c, dut.q_q[c], ref_q[n][h][t][c]); end end
      if (dut.k_s[c].valid) begin split(mk[c], n, h, t); mk[c]++; checks++;
        if (n < NIN && dut.k_q[c] !== ref_k[n][h][t][c]) begin failures++; inter_fail++;
          if (inter_fail < 6) $display("K mismatch in%0d h%0d t%0d c%0d got %0d exp %0d", n, h, t, c, dut.k_q[c], ref_k[n][h][t][c]); end end
      if (dut.v_s[c].valid) begin split(mv[c], n, h, t); mv[c]++; checks++;
        if (n < NIN && dut.v_q[c] !== ref_v[n][h][t][c]) begin failures++; inter_fail++;
          if (inter_fail < 6) $display("V mismatch in%0d h%0d t%0d c%0d got %0d exp %0d", n, h, t, c, dut.v_q[c], ref_v[n][h][t][c]); end end
    end
    for (int c = 0; c < NT; c++)
      if (dut.a_s[c].valid) begin split(ma[c], n, h, t); ma[c]++; checks++;
        if (n < NIN && dut.a_q[c] !== ref_a[n][h][t][c]) begin failures++; inter_fail++;
          if (inter_fail < 6) $display("A mismatch in%0d h%0d t%0d c%0d got %0d exp %0d", n, h, t, c, dut.a_q[c], ref_a[n][h][t][c]); end end
  end

  // host sender
  initial begin
    in_valid = 1'b0; in_data = '0;
    gen_params();
    for (int n = 0; n < NIN; n++)
      for (int t = 0; t < NT; t++)
        for (int r = 0; r < DM; r++) z[n][t][r] = code_t'($urandom);
    for (int n = 0; n < NIN; n++) build_ref(n);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int n = 0; n < NIN; n++)
      for (int t = 0; t < NT; t++) begin
        logic [IWORDS*BUS_W-1:0] tok = '0;
        for (int r = 0; r < DM; r++) tok[r*DW +: DW] = z[n][t][r];
        // drive and sample on the falling edge; the transfer happens on
        // the following rising edge
        for (int k = 0; k < IWORDS; k++) begin
          @(negedge clk);
          in_data  = tok[k*BUS_W +: BUS_W];
          in_valid = 1'b1;
          while (!in_ready) @(negedge clk);
          @(posedge clk);
        end
      end
    @(negedge clk);
    in_valid = 1'b0;
  end

  // host receiver
  int got_words = 0;
  int first_in_cyc = -1;
  initial begin
    out_ready = 1'b0;
    wait (rst_n);
    for (int n = 0; n < NIN; n++)
      for (int h = 0; h < NH; h++) begin
        for (int t = 0; t < NT; t++) begin
          logic [OWORDS*BUS_W-1:0] tok = '0;
          for (int k = 0; k < OWORDS; k++) begin
            forever begin
              @(negedge clk);
              out_ready = ($urandom_range(0, 3) != 0);
              if (out_valid && out_ready) break;
            end
            tok[k*BUS_W +: BUS_W] = out_data;
            @(posedge clk);
            got_words++;
          end
          for (int c = 0; c < DH; c++) begin
            checks++;
            if (tok[c*DW +: DW] !== ref_out[n][h][t][c]) begin
              failures++;
              if (failures < 10)
                $display("MISMATCH in %0d head %0d token %0d ch %0d: got %0d exp %0d", n, h, t, c,
                         tok[c*DW +: DW], ref_out[n][h][t][c]);
            end
          end
        end
        head_done_cyc[n*NH + h] = cyc;
      end
    @(negedge clk);
    out_ready = 1'b0;
    repeat (10) @(posedge clk);
    for (int i = 0; i < NIN*NH; i++) $display("head %0d result complete at cycle %0d", i, head_done_cyc[i]);
    $display("events: reuse=%0d pass_stall=%0d in_stall=%0d out_stall=%0d latchA=%0d latchAV=%0d latchA_blocked=%0d",
             n_reuse, n_pass_stall, n_in_stall, n_out_stall, n_latch_a, n_latch_av, n_allow_a_block);
    checks++; if (n_reuse != NIN*(NH-1)) begin failures++; $display("reuse count wrong"); end
    checks++; if (n_latch_a != NIN*NH || n_latch_av != NIN*NH) begin failures++; $display("latch count wrong"); end
    checks++; if (n_pass_stall == 0) begin failures++; $display("pass gating never stalled"); end
    checks++; if (n_in_stall == 0) begin failures++; $display("input backpressure never happened"); end
    checks++; if (n_out_stall == 0) begin failures++; $display("output backpressure never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d words received; passes=%0d latchedA=%0d latchedAV=%0d kfull=%0d vfull=%0d",
             got_words, dut.passes, dut.a_lat, dut.av_lat, dut.k_full, dut.v_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
