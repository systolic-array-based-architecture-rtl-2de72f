// tb_exp_unit: self-checking test of exp_unit.
//
// Random scores and scales through the three-stage exponential; each result
// is compared with the integer model of the base-2 conversion, the split into
// integer and fraction, the linear fraction term and the final shift, and
// with the floating-point value 256*exp(acc*scale/2^10) within the error of the
// linear approximation.
module tb_exp_unit;
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
  acc_t acc; side_t si, so; logic signed [15:0] sc; logic [EXP_W-1:0] e;
  exp_unit dut (.clk, .rst_n, .acc, .side_in(si), .scale(sc), .e, .side_out(so));
  function automatic longint model(longint a, longint s);
    longint v1 = wrap(a * s, 32), t2, ip, f, mant, sh;
    t2 = (v1 * 1477) >>> 10;
    ip = t2 >>> 10;
    f  = t2 & 1023;
    mant = (f >> 1) | 512;
    if (ip > 40) return 65535;
    if (ip < -40) return 0;
    sh = ip + 1 + 8 - 10;
    if (sh >= 0) return ((mant << sh) >= 65536) ? 65535 : (mant << sh);
    return mant >> (-sh);
  endfunction
  longint exp_q [$];
  side_t  side_q [$];
  initial begin
    int n = 0;
    acc = '0; si = '0; sc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      acc = acc_t'(int'($urandom_range(0, 4000)) - 3000);
      sc  = 16'($urandom_range(10, 300));
      si  = '{valid: 1'b1, tag: tag_t'(i)};
      exp_q.push_back(model(acc, sc));
      side_q.push_back(si);
      if (i >= 3) begin
        automatic longint m = exp_q.pop_front();
        automatic side_t s = side_q.pop_front();
        check(longint'(e) == m && so == s, $sformatf("e %0d exp %0d", e, m));
        n++;
      end
    end
    // accuracy of the approximation against the real exponential
    begin
      real xr, ref_v, got;
      automatic int bad = 0;
      for (int a = -100; a <= 30; a++) begin
        xr = real'(a) * 100.0 / 1024.0;
        ref_v = $exp(xr) * 256.0;
        got = real'(model(a, 100));
        checks++;
        if (ref_v > 4.0 && (got < ref_v * 0.85 || got > ref_v * 1.15)) begin
          failures++; bad++;
          if (bad < 5) $display("approximation off at %0d: %f vs %f", a, got, ref_v);
        end
      end
    end
    finish_tb();
  end
endmodule
