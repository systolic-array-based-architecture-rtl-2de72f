// tb_mac_array: self-checking test of mac_array.
//
// A 6x4 array with a bank of two weight sets gets skewed token rows (row r one
// cycle after row r-1) with head tags and bubbles; each column must deliver
// the dot product of the token with that head's weight column, in order.
// A second 5x3 array with unsigned x checks the unsigned-operand path.
module tb_mac_array;
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
  localparam int R = 6, C = 4, NB = 2, NTK = 30;
  code_t x [R]; side_t si [R]; code_t w [NB][R][C];
  acc_t sum [C]; side_t so [C];
  mac_array #(.ROWS(R), .COLS(C), .NB(NB), .X_SIGNED(1'b1), .W_SIGNED(1'b1)) dut (.clk, .rst_n,
    .x_in(x), .side_in(si), .w, .sum_out(sum), .side_out(so));
  code_t xu [5]; side_t su [5]; code_t wu [1][5][3]; acc_t sumu [3]; side_t sou [3];
  mac_array #(.ROWS(5), .COLS(3), .NB(1), .X_SIGNED(1'b0), .W_SIGNED(1'b1)) dut_u (.clk, .rst_n,
    .x_in(xu), .side_in(su), .w(wu), .sum_out(sumu), .side_out(sou));
  code_t data [NTK][R];
  bit vld [NTK];
  int got [C], gotu [3];
  initial begin
    x = '{default: '0}; si = '{default: '0}; xu = '{default: '0}; su = '{default: '0};
    for (int b = 0; b < NB; b++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) w[b][r][c] = code_t'($urandom);
    for (int r = 0; r < 5; r++) for (int c = 0; c < 3; c++) wu[0][r][c] = code_t'($urandom);
    for (int k = 0; k < NTK; k++) begin
      vld[k] = (k % 4 != 2);
      for (int r = 0; r < R; r++) data[k][r] = code_t'($urandom);
    end
    for (int c = 0; c < C; c++) got[c] = 0;
    for (int c = 0; c < 3; c++) gotu[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < NTK + R + C + 4; cyc++) begin
      @(negedge clk);
      for (int c = 0; c < C; c++) if (so[c].valid) begin
        automatic int k = got[c];
        automatic longint e = 0;
        while (!vld[k]) k++;
        for (int r = 0; r < R; r++) e += sx3(data[k][r]) * sx3(w[k % NB][r][c]);
        check(longint'(sum[c]) == e && int'(so[c].tag) == k % NB, $sformatf("token %0d col %0d: %0d exp %0d", k, c, sum[c], e));
        got[c] = k + 1;
      end
      for (int c = 0; c < 3; c++) if (sou[c].valid) begin
        automatic int k = gotu[c];
        automatic longint e = 0;
        while (!vld[k]) k++;
        for (int r = 0; r < 5; r++) e += longint'(data[k][r]) * sx3(wu[0][r][c]);
        check(longint'(sumu[c]) == e, $sformatf("unsigned token %0d col %0d", k, c));
        gotu[c] = k + 1;
      end
      for (int r = 0; r < R; r++) begin
        automatic int k = cyc - r;
        automatic bit on = (k >= 0 && k < NTK) && vld[(k >= 0 && k < NTK) ? k : 0];
        si[r] = '{valid: on, tag: tag_t'(on ? k % NB : 0)};
        x[r]  = on ? data[k][r] : code_t'($urandom);
        if (r < 5) begin su[r] = si[r]; xu[r] = x[r]; end
      end
    end
    for (int c = 0; c < C; c++) check(got[c] >= NTK - 1, "all tokens");
    finish_tb();
  end
endmodule
