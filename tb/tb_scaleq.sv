// tb_scaleq: self-checking test of scaleq.
//
// Rows of exponentials arrive in reversed skew with their row sum at the last
// lane; each code must be the number of thresholds Delta_j with
// e * 2^16 >= S * Delta_j, for two heads with different thresholds.
module tb_scaleq;
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
  localparam int L = 6, NTK = 40, NB = 2;
  logic [EXP_W-1:0] e [L]; side_t si [L], so [L]; logic [SUM_W-1:0] s;
  logic [15:0] delta [NB][N_TH]; code_t q [L];
  scaleq #(.LANES(L), .NB(NB)) dut (.clk, .rst_n, .e, .side_in(si), .s_in(s), .delta, .q, .side_out(so));
  logic [EXP_W-1:0] data [NTK][L];
  longint sums [NTK];
  int got [L];
  initial begin
    e = '{default: '0}; si = '{default: '0}; s = '0;
    for (int b = 0; b < NB; b++) for (int j = 0; j < N_TH; j++)
      delta[b][j] = 16'((2 * j + 1) * 65536 / (b == 0 ? 16 : 12) / 2);
    for (int k = 0; k < NTK; k++) begin
      sums[k] = 0;
      for (int i = 0; i < L; i++) begin
        data[k][i] = EXP_W'($urandom_range(0, 4000));
        sums[k] += data[k][i];
      end
    end
    for (int i = 0; i < L; i++) got[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < NTK + L + 4; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < L; i++) if (so[i].valid) begin
        automatic int k = got[i], cnt = 0;
        for (int j = 0; j < N_TH; j++)
          cnt += int'((longint'(data[k][i]) << SQ_F) >= sums[k] * longint'(delta[k % NB][j]));
        check(int'(q[i]) == cnt, $sformatf("row %0d lane %0d q %0d exp %0d", k, i, q[i], cnt));
        got[i]++;
      end
      for (int i = 0; i < L; i++) begin
        automatic int k = cyc - (L - 1 - i);
        si[i] = '{valid: (k >= 0 && k < NTK), tag: tag_t'(k % NB)};
        e[i]  = (k >= 0 && k < NTK) ? data[k][i] : '0;
      end
      s = (cyc < NTK) ? SUM_W'(sums[cyc]) : '0;
    end
    for (int i = 0; i < L; i++) check(got[i] == NTK, "all rows");
    finish_tb();
  end
endmodule
