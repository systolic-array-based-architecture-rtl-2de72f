// tb_lane_fifo: self-checking test of lane_fifo.
//
// Per-lane FIFOs in both read modes. Each lane is written at its own times
// (skewed, with bubbles). In parallel mode one pop reads all lanes in the
// same cycle; in systolic mode lane i is read one cycle after lane i-1. Data
// and tags must come out in write order with the right read timing, and the
// availability flag must follow the chosen lane.
module tb_lane_fifo;
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
  localparam int L = 4, D = 8;
  code_t din [L], dp [L], ds [L]; side_t si [L], sp [L], ss [L];
  logic pop_p, pop_s, av_p, av_s;
  logic [$clog2(D+1)-1:0] cl_p, cf_p, cl_s, cf_s;
  lane_fifo #(.LANES(L), .DEPTH(D), .SYSTOLIC(1'b0), .LAST_LANE(L-1)) u_p (.clk, .rst_n, .din, .side_in(si),
    .pop_start(pop_p), .dout(dp), .side_out(sp), .avail(av_p), .cnt_last(cl_p), .cnt_first(cf_p));
  lane_fifo #(.LANES(L), .DEPTH(D), .SYSTOLIC(1'b1), .LAST_LANE(0)) u_s (.clk, .rst_n, .din, .side_in(si),
    .pop_start(pop_s), .dout(ds), .side_out(ss), .avail(av_s), .cnt_last(cl_s), .cnt_first(cf_s));
  code_t wq [L][$];
  bit wt [256];
  int wr_n [L], rdp [L], rds [L], pops_p = 0, pops_s = 0;
  initial begin
    din = '{default: '0}; si = '{default: '0}; pop_p = 0; pop_s = 0;
    for (int i = 0; i < L; i++) begin wr_n[i] = 0; rdp[i] = 0; rds[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 600; cyc++) begin
      @(negedge clk);
      // outputs of the previous cycle's reads
      for (int i = 0; i < L; i++) begin
        if (sp[i].valid) begin
          check(dp[i] == wq[i][rdp[i]] && sp[i].tag == tag_t'(rdp[i]), $sformatf("parallel lane %0d item %0d", i, rdp[i]));
          rdp[i]++;
        end
        if (ss[i].valid) begin
          check(ds[i] == wq[i][rds[i]] && ss[i].tag == tag_t'(rds[i]), $sformatf("systolic lane %0d item %0d", i, rds[i]));
          check(i == 0 || rds[i] < rds[i-1], "systolic order across lanes");
          rds[i]++;
        end
      end
      // skewed writes: lane i writes token k at cycle 2k+i; whether token k
      // is written is decided at lane 0 (pauses and a fill limit)
      if (cyc % 2 == 0 && cyc / 2 < 256)
        wt[cyc / 2] = ((cyc / 12) % 3 != 2) && (wr_n[0] - rdp[0] < D - 3) && (wr_n[0] - rds[0] < D - 3);
      for (int i = 0; i < L; i++) begin
        automatic int k = (cyc - i) / 2;
        automatic bit on = ((cyc - i) >= 0) && ((cyc - i) % 2 == 0) && (k < 256) && wt[(k < 256) ? k : 0];
        si[i] = '{valid: on, tag: tag_t'(wr_n[i])};
        din[i] = code_t'($urandom);
        if (on) begin wq[i].push_back(din[i]); wr_n[i]++; end
      end
      // reads: parallel pop when the last lane has data; systolic pop when lane 0 has data
      // and the later lanes will have it by the time the read reaches them
      pop_p = av_p && ($urandom_range(0, 2) != 0);
      pop_s = av_s && ($urandom_range(0, 2) != 0);
      if (pop_p) pops_p++;
      if (pop_s) pops_s++;
    end
    check(rds[L-1] > 40 && rdp[0] > 40, "enough data moved");
    finish_tb();
  end
endmodule
