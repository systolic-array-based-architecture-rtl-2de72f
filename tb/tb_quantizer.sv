// tb_quantizer: self-checking test of quantizer.
//
// Random values against 7 random sorted thresholds; the unsigned instance
// must output the number of thresholds not above the value and the signed
// instance the same count in offset form (count - 4).
module tb_quantizer;
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
  pm_t x; side_t si, so, so2; pm_t th [N_TH]; code_t qu, qs;
  quantizer #(.W(PM_W), .OUT_SIGNED(1'b0)) u_u (.clk, .rst_n, .x, .side_in(si), .th, .q(qu), .side_out(so));
  quantizer #(.W(PM_W), .OUT_SIGNED(1'b1)) u_s (.clk, .rst_n, .x, .side_in(si), .th, .q(qs), .side_out(so2));
  initial begin
    int cnt;
    x = '0; si = '0; th = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      th[0] = pm_t'(int'($urandom_range(0, 200)) - 400);
      for (int j = 1; j < N_TH; j++) th[j] = th[j-1] + pm_t'($urandom_range(0, 100));
      x = pm_t'(int'($urandom_range(0, 1000)) - 500);
      if (i % 7 == 0) x = th[i % N_TH];     // exactly on a threshold
      si = '{valid: 1'b1, tag: tag_t'(i)};
      cnt = 0;
      for (int j = 0; j < N_TH; j++) cnt += int'(x >= th[j]);
      @(negedge clk);
      check(int'(qu) == cnt, $sformatf("count %0d exp %0d", qu, cnt));
      check(qs == to_signed_code(code_t'(cnt)) && sx3(qs) == longint'(cnt - 4), "signed code");
      check(so == si && so2 == si, "side");
    end
    finish_tb();
  end
endmodule
