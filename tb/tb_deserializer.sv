// tb_deserializer: self-checking test of deserializer.
//
// Tokens of 72 bits are sent as two 64-bit words (low word first) with random
// gaps, while the consumer stalls at random; every token must come out whole
// and in order, and the link must be held off while a token waits.
module tb_deserializer;
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
  localparam int TW = 72, NTK = 200;
  logic [BUS_W-1:0] in_data; logic in_valid, in_ready, tok_valid, tok_ready;
  logic [TW-1:0] tok;
  deserializer #(.TOK_W(TW)) dut (.clk, .rst_n, .in_data, .in_valid, .in_ready, .tok, .tok_valid, .tok_ready);
  logic [TW-1:0] sent [NTK];
  int got = 0, held = 0;
  initial begin
    in_valid = 0; in_data = '0;
    for (int k = 0; k < NTK; k++) sent[k] = {$urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NTK; k++) begin
      automatic logic [127:0] w = 128'(sent[k]);
      for (int j = 0; j < 2; j++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_data = w[j*64 +: 64]; in_valid = 1;
        while (!in_ready) begin held++; @(negedge clk); end
        @(posedge clk);
      end
    end
    @(negedge clk); in_valid = 0;
  end
  initial begin
    tok_ready = 0;
    wait (rst_n);
    while (got < NTK) begin
      @(negedge clk);
      tok_ready = ($urandom_range(0, 2) != 0);
      if (tok_valid && tok_ready) begin
        check(tok == sent[got], $sformatf("token %0d", got));
        got++;
      end
    end
    check(held > 0, "backpressure reached the link");
    finish_tb();
  end
endmodule
