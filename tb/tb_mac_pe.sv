// tb_mac_pe: self-checking test of mac_pe.
//
// Two processing elements, one with a bank of 3 signed weights selected by the
// head tag and one with unsigned x and a single weight, get random operands.
// One cycle later the sum, the forwarded x and the forwarded side band are
// compared with the integer model; invalid tokens must add nothing.
module tb_mac_pe;
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
  code_t x, xo, xo2, wb [3], w1 [1];
  side_t si, so, so2;
  acc_t  sin, sout, sout2;
  mac_pe #(.NB(3), .X_SIGNED(1'b1), .W_SIGNED(1'b1)) u_s (.clk, .rst_n, .x_in(x), .side_in(si),
    .sum_in(sin), .w_bank(wb), .x_out(xo), .side_out(so), .sum_out(sout));
  mac_pe #(.NB(1), .X_SIGNED(1'b0), .W_SIGNED(1'b1)) u_u (.clk, .rst_n, .x_in(x), .side_in(si),
    .sum_in(sin), .w_bank(w1), .x_out(xo2), .side_out(so2), .sum_out(sout2));
  initial begin
    longint e1, e2;
    x = '0; si = '0; sin = '0; wb = '{default: '0}; w1 = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      x = code_t'($urandom); sin = acc_t'($urandom);
      si.valid = ($urandom_range(0, 4) != 0); si.tag = tag_t'($urandom_range(0, 2));
      for (int b = 0; b < 3; b++) wb[b] = code_t'($urandom);
      w1[0] = code_t'($urandom);
      e1 = si.valid ? wrap(longint'(sin) + sx3(x) * sx3(wb[si.tag]), ACC_W) : longint'(sin);
      e2 = si.valid ? wrap(longint'(sin) + longint'(x) * sx3(w1[0]), ACC_W) : longint'(sin);
      @(negedge clk);
      check(longint'(sout) == e1, $sformatf("signed sum %0d exp %0d", sout, e1));
      check(longint'(sout2) == e2, $sformatf("unsigned-x sum %0d exp %0d", sout2, e2));
      check(xo == x && so == si && so2 == si, "forwarding");
    end
    finish_tb();
  end
endmodule
