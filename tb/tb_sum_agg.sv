// tb_sum_agg: self-checking test of sum_agg.
//
// Skewed rows of exponentials enter 10 lanes; the sum leaving the last lane
// must equal the row sum, and bubbles (invalid rows) must pass as invalid.
module tb_sum_agg;
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
  localparam int L = 10, NTK = 30;
  logic [EXP_W-1:0] x [L]; side_t si [L], so; logic [SUM_W-1:0] s;
  sum_agg #(.LANES(L)) dut (.clk, .rst_n, .x, .side_in(si), .sum_out(s), .side_out(so));
  logic [EXP_W-1:0] data [NTK][L];
  bit vld [NTK];
  int got = 0;
  initial begin
    x = '{default: '0}; si = '{default: '0};
    for (int k = 0; k < NTK; k++) begin
      vld[k] = (k % 5 != 3);
      for (int i = 0; i < L; i++) data[k][i] = vld[k] ? EXP_W'($urandom) : '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < NTK + L + 4; cyc++) begin
      @(negedge clk);
      if (cyc >= L && got < NTK) begin
        automatic longint e = 0;
        for (int i = 0; i < L; i++) e += longint'(data[got][i]);
        check(so.valid == vld[got] && (!vld[got] || longint'(s) == e),
              $sformatf("row %0d sum %0d exp %0d", got, s, e));
        got++;
      end
      for (int i = 0; i < L; i++) begin
        automatic int k = cyc - i;
        si[i] = '{valid: (k >= 0 && k < NTK) ? vld[k] : 1'b0, tag: '0};
        x[i]  = (k >= 0 && k < NTK) ? data[k][i] : '0;
      end
    end
    finish_tb();
  end
endmodule
