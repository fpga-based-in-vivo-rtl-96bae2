// tb_scan_gen: self-checking test of the scan generator with fast forward.
// 32-column image. Pass A: rows 2..9 with three background segments (one
// inside a row, one across rows, one that runs to the end of the pass). Pass
// B: rows 0..3 with an empty table, a plain raster scan. Every issued index is
// compared, in order, with a sequence built here; the number of fast forwards
// and the cycle count (first index valid 3 cycles after start, then one index per
// cycle with no cycle spent on skipped pixels, done one cycle after the last
// index) are checked.
`timescale 1ns/1ps
module tb_scan_gen;
  import decalcion_pkg::*;
  localparam int C = 32, FFD = 16;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0; idx_t row_start = 0, row_end = 0;
  logic [3:0] ff_base = 0; logic [4:0] ff_count = 0;
  logic idx_valid; idx_t row, col; logic ff_jump, busy, done;
  logic tab_we = 0; logic [3:0] tab_addr = 0; ff_entry_t tab_wdata = '0;

  scan_gen #(.FF_DEPTH(FFD), .COLS(C)) dut (.*);

  int exp_r [$], exp_c [$];
  int n_seen, jumps, first_at, last_at, done_at, cyc;
  bit order_err;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ff_jump) jumps++;
    if (idx_valid) begin
      if (n_seen == 0) first_at = cyc;
      last_at = cyc;
      if (n_seen >= exp_r.size() || exp_r[n_seen] != int'(row) || exp_c[n_seen] != int'(col)) order_err = 1;
      n_seen++;
    end
    if (done) done_at = cyc;
  end

  task automatic put(int a, int tr, int tc, int fr, int fc);
    @(negedge clk); tab_we = 1; tab_addr = 4'(a);
    tab_wdata = '{idx_t'(tr), idx_t'(tc), idx_t'(fr), idx_t'(fc)};
    @(negedge clk); tab_we = 0;
  endtask

  task automatic run(int rs, int re, int base, int cnt, int nseg, int tr[3], int tc[3], int fr[3], int fc[3]);
    automatic int r = rs, c = 0, s = 0, start_at;
    exp_r.delete(); exp_c.delete();
    forever begin
      if (s < nseg && r == tr[s] && c == tc[s]) begin
        if (fr[s]*C + fc[s] <= r*C + c) break;
        r = fr[s]; c = fc[s]; s++;
      end
      exp_r.push_back(r); exp_c.push_back(c);
      if (r == re && c == C - 1) break;
      if (c == C - 1) begin c = 0; r++; end else c++;
    end
    n_seen = 0; jumps = 0; order_err = 0; done_at = 0;
    @(negedge clk);
    row_start = idx_t'(rs); row_end = idx_t'(re); ff_base = 4'(base); ff_count = 5'(cnt); start = 1;
    start_at = cyc + 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++; if (order_err || n_seen != exp_r.size()) begin failures++; $display("sequence wrong: %0d of %0d", n_seen, exp_r.size()); end
    checks++; if (jumps != nseg) begin failures++; $display("jumps %0d expected %0d", jumps, nseg); end
    checks++; if (first_at - start_at != 3) begin failures++; $display("first index %0d cycles after start", first_at - start_at); end
    checks++; if (last_at - first_at + 1 != exp_r.size()) begin failures++; $display("issue not one per cycle"); end
    $display("pass rows %0d..%0d: %0d indices, %0d fast forwards", rs, re, n_seen, jumps);
  endtask

  initial begin
    int tr[3], tc[3], fr[3], fc[3];
    repeat (3) @(negedge clk); rst_n = 1;
    tr = '{2, 4, 8};  tc = '{5, 30, 7};  fr = '{2, 6, 0};  fc = '{20, 3, 0};
    put(3, tr[0], tc[0], fr[0], fc[0]);
    put(4, tr[1], tc[1], fr[1], fc[1]);
    put(5, tr[2], tc[2], fr[2], fc[2]);
    run(2, 9, 3, 3, 3, tr, tc, fr, fc);
    run(0, 3, 0, 0, 0, tr, tc, fr, fc);
    checks++; if (n_seen != 4*C) begin failures++; $display("plain scan length %0d", n_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
