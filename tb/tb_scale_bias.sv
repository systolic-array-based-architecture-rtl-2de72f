// tb_scale_bias: self-checking test of scale_bias.
//
// Random accumulator values, scales and biases, including values that
// saturate; the registered result must equal sat16((acc*scale+bias)>>>8).
module tb_scale_bias;
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
  acc_t acc; side_t si, so; logic signed [15:0] sc; logic signed [31:0] bi; pm_t y;
  scale_bias dut (.clk, .rst_n, .acc, .side_in(si), .scale(sc), .bias(bi), .y, .side_out(so));
  initial begin
    longint v;
    acc = '0; si = '0; sc = '0; bi = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      acc = acc_t'($urandom); sc = 16'($urandom); bi = 32'($urandom) >>> $urandom_range(0, 24);
      si.valid = 1'(i); si.tag = tag_t'(i);
      v = (longint'(acc) * longint'(sc) + longint'(bi)) >>> SB_SHIFT;
      if (v > 32767) v = 32767;
      if (v < -32768) v = -32768;
      @(negedge clk);
      check(longint'(y) == v && so == si, $sformatf("y %0d exp %0d", y, v));
    end
    finish_tb();
  end
endmodule
