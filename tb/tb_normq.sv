// tb_normq: self-checking test of normq.
//
// Tokens of 8 lanes arrive in reversed skew (the last lane first) together
// with their mean and M2 at the last lane. Every code must equal the
// comparator model: the squared centred value against M2 * P_j with the
// sign rule, for random per-head constants of two heads. Independently, the
// codes must match a floating-point quantizer of (x - mean)/std against the
// thresholds c_j whose squares give P_j, away from the threshold edges.
module tb_normq;
  import sa_pkg::*;
  localparam int WATCHDOG = 100000;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask
  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  function automatic longint sx3(code_t c); return longint'(signed'(c)); endfunction
  function automatic longint wrap(longint v, int w);
    longint m = (longint'(1) << w);
    longint r = v & (m - 1);
    if (r >= (m >> 1)) r -= m;
    return r;
  endfunction
  localparam int L = 8, NTK = 60, NB = 2;
  pm_t x [L]; side_t si [L], so [L];
  logic signed [MU_W-1:0] mu; logic [VAR_W-1:0] m2;
  logic [NQ_P_W-1:0] p [NB][L][N_TH]; logic cneg [NB][L][N_TH];
  code_t q [L];
  normq #(.LANES(L), .NB(NB), .OUT_SIGNED(1'b1)) dut (.clk, .rst_n, .x, .side_in(si), .mu_in(mu),
    .var_in(m2), .p, .cneg, .q, .side_out(so));
  pm_t data [NTK][L];
  longint tmu [NTK], tm2 [NTK];
  real cth [N_TH] = '{-1.5, -1.0, -0.5, 0.0, 0.5, 1.0, 1.5};
  int got [L];
  initial begin
    x = '{default: '0}; si = '{default: '0}; mu = '0; m2 = '0;
    for (int b = 0; b < NB; b++) for (int i = 0; i < L; i++) for (int j = 0; j < N_TH; j++) begin
      p[b][i][j] = NQ_P_W'(longint'(cth[j] * cth[j] / real'(L) * 4096.0 * (b == 0 ? 1.0 : 1.3)));
      cneg[b][i][j] = (cth[j] < 0.0);
    end
    for (int k = 0; k < NTK; k++) begin
      automatic real s = 0.0, ss = 0.0;
      for (int i = 0; i < L; i++) begin
        data[k][i] = pm_t'(int'($urandom_range(0, 300)) - 150);
        s += real'(data[k][i]) * 32.0;
      end
      tmu[k] = longint'(s / L);
      for (int i = 0; i < L; i++) ss += (real'(data[k][i]) * 32.0 - real'(tmu[k])) ** 2;
      tm2[k] = longint'(ss);
    end
    for (int i = 0; i < L; i++) got[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < NTK + L + 4; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < L; i++) if (so[i].valid) begin
        automatic int k = got[i];
        automatic int b = k % NB;
        automatic longint a = wrap((longint'(data[k][i]) << PRESCALE_SH) - tmu[k], MU_W);
        automatic logic [127:0] lhs = 128'(a * a) << NQ_PF;
        automatic int cnt = 0, fcnt = 0;
        automatic bit edge_case = 0;
        automatic real z = real'(a) / $sqrt(real'(tm2[k]) / L);
        for (int j = 0; j < N_TH; j++) begin
          automatic bit gt = lhs > 128'(tm2[k]) * 128'(p[b][i][j]);
          cnt += int'((a > 0) ? (cneg[b][i][j] | gt) : (cneg[b][i][j] & !gt));
          fcnt += int'(z > cth[j] * (b == 0 ? 1.0 : $sqrt(1.3)));
          if ((z - cth[j] * (b == 0 ? 1.0 : $sqrt(1.3))) ** 2 < 0.01) edge_case = 1;
        end
        check(q[i] == to_signed_code(code_t'(cnt)) && int'(so[i].tag) == k % NB,
              $sformatf("token %0d lane %0d q %0d exp %0d", k, i, q[i], to_signed_code(code_t'(cnt))));
        if (!edge_case && a != 0)
          check(q[i] == to_signed_code(code_t'(fcnt)), $sformatf("float model token %0d lane %0d z %f", k, i, z));
        got[i]++;
      end
      for (int i = 0; i < L; i++) begin
        automatic int k = cyc - (L - 1 - i);
        si[i] = '{valid: (k >= 0 && k < NTK), tag: tag_t'(k % NB)};
        x[i]  = (k >= 0 && k < NTK) ? data[k][i] : '0;
      end
      mu = (cyc < NTK) ? MU_W'(tmu[cyc]) : '0;
      m2 = (cyc < NTK) ? VAR_W'(tm2[cyc]) : '0;
    end
    for (int i = 0; i < L; i++) check(got[i] == NTK, "all tokens");
    finish_tb();
  end
endmodule
