// tb_serializer: self-checking test of serializer.
//
// Tokens of 150 bits are offered at random times and the link stalls at
// random; the words received must be the token's 64-bit slices, low first,
// three per token, in order.
module tb_serializer;
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
  localparam int TW = 150, NTK = 200;
  logic [TW-1:0] tok; logic tok_valid, tok_ready, out_valid, out_ready;
  logic [BUS_W-1:0] out_data;
  serializer #(.TOK_W(TW)) dut (.clk, .rst_n, .tok, .tok_valid, .tok_ready, .out_data, .out_valid, .out_ready);
  logic [TW-1:0] sent [NTK];
  int got = 0;
  initial begin
    tok_valid = 0; tok = '0;
    for (int k = 0; k < NTK; k++) sent[k] = {$urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NTK; k++) begin
      @(negedge clk);
      while ($urandom_range(0, 2) == 0) begin tok_valid = 0; @(negedge clk); end
      tok = sent[k]; tok_valid = 1;
      while (!tok_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk); tok_valid = 0;
  end
  initial begin
    out_ready = 0;
    wait (rst_n);
    while (got < NTK) begin
      automatic logic [191:0] w = '0;
      for (int j = 0; j < 3; j++) begin
        forever begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 2) != 0);
          if (out_valid && out_ready) break;
        end
        w[j*64 +: 64] = out_data;
        @(posedge clk);
      end
      check(w[TW-1:0] == sent[got], $sformatf("token %0d", got));
      got++;
    end
    finish_tb();
  end
endmodule
