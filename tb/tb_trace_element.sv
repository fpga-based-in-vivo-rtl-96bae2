// tb_trace_element: self-checking test of one tracing element (K = 8,
// N_C = 25). Loads 8 slots through the contour chain (shift + commit per
// local address), two of them invalid, one with an all-ones mask; streams
// every pixel of a 104 x 104 random image through the element in compute mode;
// captures every slot in store mode and compares with traces computed here
// from Eq. (1)-(2). The all-ones slot sits on a bright patch so that its
// 16-bit trace saturates. Also checks that the chain registers pass the
// pixel stream on one cycle later.
`timescale 1ns/1ps
module tb_trace_element;
  import decalcion_pkg::*;
  localparam int K = 8, W = 104;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  trace_mode_e mode = TM_IDLE;
  logic shift = 0, commit = 0, clear = 0, capture = 0;
  logic [2:0] cap_slot = 0;
  logic pv_in = 0; idx_t r_in = 0, c_in = 0; pix_t v_in = 0;
  logic pv_out; idx_t r_out, c_out; pix_t v_out;
  load_word_t q_in = '0, q_out; trace_t f_in = 16'h1234, f_out;

  trace_element #(.K(K)) dut (.*);

  int img [W][W];
  int cr [K], cc [K], cv [K];
  bit cm [K][NC][NC];
  int expt [K];
  int pass_err = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < W; r++) for (int c = 0; c < W; c++) img[r][c] = $urandom_range(0, 255);
    // slot layout: 4 columns x 2 rows of windows, no overlap (pitch 26 > 25)
    for (int k = 0; k < K; k++) begin
      cr[k] = 12 + (k / 4) * 30 + $urandom_range(0, 3);
      cc[k] = 12 + (k % 4) * 26;
      cv[k] = (k != 2 && k != 5);
      for (int a = 0; a < NC; a++) for (int b = 0; b < NC; b++) cm[k][a][b] = (k == 7) ? 1 : $urandom_range(0, 1);
    end
    for (int a = 0; a < NC; a++) for (int b = 0; b < NC; b++) img[cr[7]-12+a][cc[7]-12+b] = 250;
    for (int k = 0; k < K; k++) begin
      expt[k] = 0;
      if (cv[k])
        for (int a = 0; a < NC; a++) for (int b = 0; b < NC; b++)
          if (cm[k][a][b]) expt[k] += img[cr[k]-12+a][cc[k]-12+b];
      if (expt[k] > 65535) expt[k] = 65535;
    end
    repeat (3) @(negedge clk); rst_n = 1;
    // ---------- load ----------
    @(negedge clk); mode = TM_LOAD; clear = 1;
    @(negedge clk); clear = 0;
    for (int k = 0; k < K; k++) for (int a = 0; a < NC; a++) begin
      load_word_t w;
      w.valid = cv[k][0]; w.r = idx_t'(cr[k]); w.c = idx_t'(cc[k]);
      for (int b = 0; b < NC; b++) w.row[b] = cm[k][a][b];
      q_in = w; shift = 1; commit = 0;
      @(negedge clk);
      shift = 0; commit = 1;
      @(negedge clk);
      commit = 0;
    end
    // ---------- compute ----------
    mode = TM_COMPUTE;
    for (int r = 0; r < W; r++) for (int c = 0; c < W; c++) begin
      pv_in = 1; r_in = idx_t'(r); c_in = idx_t'(c); v_in = pix_t'(img[r][c]);
      @(negedge clk);
      if (!(pv_out && r_out == idx_t'(r) && c_out == idx_t'(c) && v_out == pix_t'(img[r][c]))) pass_err++;
    end
    pv_in = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (pass_err != 0) begin failures++; $display("chain registers wrong %0d times", pass_err); end
    // ---------- store ----------
    mode = TM_STORE;
    for (int k = 0; k < K; k++) begin
      cap_slot = 3'(k); capture = 1;
      @(negedge clk); capture = 0;
      checks++;
      if (int'(f_out) != expt[k]) begin failures++; $display("slot %0d: got %0d expected %0d", k, f_out, expt[k]); end
    end
    shift = 1; @(negedge clk); shift = 0;
    checks++;
    if (f_out != 16'h1234) begin failures++; $display("trace chain shift wrong"); end
    checks++;
    if (expt[7] != 65535) begin failures++; $display("saturation case not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
