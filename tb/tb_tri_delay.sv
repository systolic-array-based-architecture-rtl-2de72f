// tb_tri_delay: self-checking test of tri_delay.
//
// Random words enter every lane each cycle; lane i must return its input
// after exactly BASE + STEP*i cycles (ascending) or BASE + STEP*(L-1-i)
// cycles (descending), for the two shapes the design uses.
module tb_tri_delay;
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
  localparam int L = 5, W = 8;
  logic [W-1:0] din [L], da [L], dd [L];
  tri_delay #(.LANES(L), .W(W), .BASE(0), .STEP(1), .ASCEND(1'b1)) u_a (.clk, .rst_n, .din, .dout(da));
  tri_delay #(.LANES(L), .W(W), .BASE(1), .STEP(2), .ASCEND(1'b0)) u_d (.clk, .rst_n, .din, .dout(dd));
  logic [W-1:0] hist [$][L];
  initial begin
    din = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 300; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < L; i++) din[i] = W'($urandom);
      hist.push_front(din);
      #1;
      for (int i = 0; i < L; i++) begin
        automatic int la = i, ld = 1 + 2 * (L - 1 - i);
        if (cyc >= la) check(da[i] == hist[la][i], $sformatf("ascending lane %0d", i));
        if (cyc >= ld) check(dd[i] == hist[ld][i], $sformatf("descending lane %0d", i));
      end
    end
    finish_tb();
  end
endmodule
