// tb_weight_loader: self-checking test of weight_loader.
//
// Both chain orientations are filled with random vectors at random times;
// the loader must report full after exactly as many vectors as the array has
// columns (or rows), and the latched matrix must place the k-th vector in
// column (row) k. A vector pushed in the latch cycle must start the next fill,
// and a latched matrix must stay put while the chain refills.
module tb_weight_loader;
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
  localparam int R = 3, C = 5;
  logic vc, vr, enc, enr, fc, fr;
  code_t inc [R], inr [C];
  code_t wc [1][R][C], wr [1][R][C];
  weight_loader #(.ROWS(R), .COLS(C), .ALONG_COLS(1'b1)) u_c (.clk, .rst_n, .in_valid(vc), .in_vec(inc), .en(enc), .w_out(wc), .full(fc));
  weight_loader #(.ROWS(R), .COLS(C), .ALONG_COLS(1'b0)) u_r (.clk, .rst_n, .in_valid(vr), .in_vec(inr), .en(enr), .w_out(wr), .full(fr));
  code_t mc [R][C], mr [R][C], nxt_c [R];
  initial begin
    vc = 0; vr = 0; enc = 0; enr = 0; inc = '{default: '0}; inr = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 20; rep++) begin
      // column chain: C vectors of R codes
      for (int k = 0; k < C; k++) begin
        @(negedge clk);
        check(!fc, "column chain full too early");
        while ($urandom_range(0, 2) == 0) begin vc = 0; @(negedge clk); end
        for (int r = 0; r < R; r++) begin inc[r] = code_t'($urandom); mc[r][k] = inc[r]; end
        vc = (rep == 0 || k > 0);   // after the first round the first vector went in with the latch
        if (!vc) for (int r = 0; r < R; r++) mc[r][k] = nxt_c[r];
        @(posedge clk);
      end
      @(negedge clk); vc = 0;
      check(fc, "column chain full");
      // latch while pushing the first vector of the next fill
      for (int r = 0; r < R; r++) begin inc[r] = code_t'($urandom); nxt_c[r] = inc[r]; end
      vc = 1; enc = 1;
      @(negedge clk); vc = 0; enc = 0;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
        check(wc[0][r][c] == mc[r][c], $sformatf("column chain r%0d c%0d", r, c));
      check(!fc, "not full after latch");
    end
    // row chain: R vectors of C codes, plain fill and latch
    for (int rep = 0; rep < 20; rep++) begin
      for (int k = 0; k < R; k++) begin
        @(negedge clk);
        for (int c = 0; c < C; c++) begin inr[c] = code_t'($urandom); mr[k][c] = inr[c]; end
        vr = 1;
        @(posedge clk);
      end
      @(negedge clk); vr = 0;
      check(fr, "row chain full");
      enr = 1;
      @(negedge clk); enr = 0;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
        check(wr[0][r][c] == mr[r][c], $sformatf("row chain r%0d c%0d", r, c));
    end
    finish_tb();
  end
endmodule
