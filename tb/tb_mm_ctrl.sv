// tb_mm_ctrl: self-checking test of mm_ctrl.
//
// The controller of one attention array with NT = 4: weight vectors are
// offered at random, the latch must happen only when the loader is full and
// allowed, then exactly NT input tokens are popped, then the drain time
// passes before the next latch. A loader refill runs during streaming.
module tb_mm_ctrl;
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
  localparam int NT = 4, DR = 6;
  logic w_avail, loader_full, x_avail, allow, w_pop, latch_en, x_pop, busy;
  logic [7:0] latched;
  mm_ctrl #(.NT(NT), .DRAIN(DR)) dut (.clk, .rst_n, .w_avail, .loader_full, .x_avail, .allow,
    .w_pop, .latch_en, .x_pop, .busy, .latched);
  int fill = 0, xs = 0, last_latch = -100, cyc = 0, nl = 0;
  initial begin
    w_avail = 0; loader_full = 0; x_avail = 0; allow = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      w_avail = ($urandom_range(0, 2) != 0);
      x_avail = ($urandom_range(0, 3) != 0);
      allow   = ($urandom_range(0, 3) != 0);
      loader_full = (fill == NT);
      #1;
      check(!latch_en || (loader_full && allow && !busy), "latch only when full, allowed and idle");
      check(!(w_pop && !w_avail), "no weight pop without data");
      check(!(x_pop && !x_avail), "no token pop without data");
      check(!(w_pop && fill == NT && !latch_en), "no weight pop into a full loader");
      if (latch_en) begin
        check(nl == 0 || xs == NT, "previous matrix streamed exactly NT tokens");
        check(nl == 0 || cyc - last_latch >= NT + DR, "drain respected");
        last_latch = cyc; xs = 0; nl++;
        fill = int'(w_pop);
      end else if (w_pop) fill++;
      if (x_pop) xs++;
      check(int'(latched) == (nl & 255) || latch_en, "latch counter");
    end
    check(nl > 20, $sformatf("enough matrices latched (%0d)", nl));
    finish_tb();
  end
endmodule
