// tb_input_buffer: self-checking test of input_buffer.
//
// Three inputs of 5 tokens are written with random gaps while the pass gate
// opens at random. Each input must be replayed once per head (3 passes), each
// pass one token per cycle in order with the head tag, the reuse flag must be
// low only on the first pass of an input, and a third input must wait while
// both banks are busy.
module tb_input_buffer;
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
  localparam int TW = 12, NT = 5, NH = 3, NIN = 4;
  logic [TW-1:0] in_tok, out_tok; logic in_valid, in_ready, pass_ok, pass_start, reuse;
  side_t out_side;
  input_buffer #(.TOK_W(TW), .NT(NT), .NH(NH)) dut (.clk, .rst_n, .in_tok, .in_valid, .in_ready,
    .pass_ok, .pass_start, .out_tok, .out_side, .reuse);
  logic [TW-1:0] data [NIN][NT];
  int passes = 0, tokn = 0, held = 0, n_reuse = 0, n_starts = 0;
  initial begin
    in_valid = 0; in_tok = '0;
    for (int n = 0; n < NIN; n++) for (int t = 0; t < NT; t++) data[n][t] = TW'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NIN; n++) for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      in_tok = data[n][t]; in_valid = 1;
      while (!in_ready) begin held++; @(negedge clk); end
      @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
  end
  initial begin
    pass_ok = 0;
    wait (rst_n);
    while (passes < NIN * NH) begin
      @(negedge clk);
      if (out_side.valid) begin
        automatic int n = passes / NH, h = passes % NH;
        check(out_tok == data[n][tokn] && int'(out_side.tag) == h, $sformatf("input %0d head %0d token %0d", n, h, tokn));
        tokn++;
        if (tokn == NT) begin tokn = 0; passes++; end
      end
      pass_ok = ($urandom_range(0, 5) == 0);
      #1;
      if (pass_start) begin
        check(reuse == (n_starts % NH != 0), $sformatf("reuse flag at pass %0d", n_starts));
        n_starts++;
        if (reuse) n_reuse++;
      end
    end
    check(held > 0, "writer waited for a free bank");
    check(n_reuse == NIN * (NH - 1), $sformatf("reuse count %0d", n_reuse));
    finish_tb();
  end
endmodule
