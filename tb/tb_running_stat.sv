// tb_running_stat: self-checking test of running_stat.
//
// A stream of 40 tokens enters 8 lanes in systolic skew (lane i one cycle
// after lane i-1). For each token the mean and M2 leaving the last lane must
// equal the fixed-point Welford model, and M2/n must be close to the exact
// variance of the prescaled values.
module tb_running_stat;
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
  localparam int L = 8, NTK = 40;
  pm_t x [L]; side_t si [L], so; logic signed [MU_W-1:0] mu; logic [VAR_W-1:0] m2;
  running_stat #(.LANES(L)) dut (.clk, .rst_n, .x, .side_in(si), .mu_out(mu), .var_out(m2), .side_out(so));
  pm_t data [NTK][L];
  int got = 0;
  initial begin
    x = '{default: '0}; si = '{default: '0};
    for (int k = 0; k < NTK; k++) for (int i = 0; i < L; i++)
      data[k][i] = pm_t'(int'($urandom_range(0, 400)) - 200 + (k % 3) * 50);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < NTK + L + 4; cyc++) begin
      @(negedge clk);
      if (so.valid) begin
        automatic longint m = 0, v = 0, s = 0, ss = 0;
        real mean, var_r;
        for (int i = 0; i < L; i++) begin
          automatic longint sxv = wrap(longint'(data[got][i]) << PRESCALE_SH, MU_W);
          automatic longint rinv = ((2 << NU) + (i + 1)) / (2 * (i + 1));
          automatic longint d = wrap(sxv - m, MU_W);
          automatic longint mn = wrap(m + ((d * rinv) >>> NU), MU_W);
          v += d * wrap(sxv - mn, MU_W);
          m = mn; s += sxv; ss += sxv * sxv;
        end
        check(longint'(mu) == m && longint'(m2) == v && int'(so.tag) == got % 8,
              $sformatf("token %0d mu %0d/%0d m2 %0d/%0d", got, mu, m, m2, v));
        mean = real'(s) / L;
        var_r = real'(ss) / L - mean * mean;
        check(real'(m2) / L > var_r * 0.8 - 2000.0 && real'(m2) / L < var_r * 1.2 + 2000.0,
              $sformatf("variance %f vs %f", real'(m2) / L, var_r));
        got++;
      end
      for (int i = 0; i < L; i++) begin
        automatic int k = cyc - i;
        si[i] = '{valid: (k >= 0 && k < NTK), tag: tag_t'(k)};
        x[i]  = (k >= 0 && k < NTK) ? data[k][i] : '0;
      end
    end
    check(got == NTK, "all tokens left the chain");
    finish_tb();
  end
endmodule
