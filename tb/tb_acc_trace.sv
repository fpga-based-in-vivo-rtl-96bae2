// tb_acc_trace: self-checking test of the ACC-Trace accelerator (acc_trace
// with its two trace_ctrl half chains, scan generators, TEs) fed by an
// image_buffer.
// A reduced configuration (J = 8, K = 4, 128 x 128 image, 2 passes per half
// chain, 64 contour ids) gets random non-overlapping contours with random
// masks (some slots invalid), a random image, and fast-forward tables with
// ordinary segments and one end-of-pass segment. The expected trace of every
// contour is computed here by walking the same scan order with the same skips
// and summing mask-gated pixels (Eq. 1, 2). Also checked: the number of fast
// forwards, that one half chain loads while the other computes (double
// buffering), and the total cycle count against the per-pass load / scan /
// drain / store budget.
`timescale 1ns/1ps
module tb_acc_trace;
  import decalcion_pkg::*;

  localparam int J = 8, K = 4, JT = J/2, NP = 2, NID = NP*2*JT*K, FFD = 16;
  localparam int R = 128, C = 128;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  logic start = 0;
  logic host_we = 0; host_region_e host_sel = HR_CFG; logic [15:0] host_addr = 0; logic [63:0] host_wdata = 0;
  logic [1:0] img_rd; idx_t img_row [2]; idx_t img_col [2]; pix_t img_pix [2];
  logic [1:0] tr_we; logic [$clog2(NID)-1:0] tr_addr [2]; trace_t tr_data [2];
  trace_mode_e mode [2]; logic [1:0] ff_jump, ld_active;
  logic busy, done;
  logic wr_en = 0; idx_t wr_row = 0, wr_col = 0; pix_t wr_pix = 0;

  acc_trace #(.J(J), .K(K), .MAX_PASSES(NP), .NID(NID), .FF_DEPTH(FFD), .COLS(C)) dut (
    .clk, .rst_n, .start, .n_pass(2'(NP)), .busy, .done,
    .host_we, .host_sel, .host_addr, .host_wdata,
    .img_rd, .img_row, .img_col, .img_pix, .tr_we, .tr_addr, .tr_data, .mode, .ff_jump, .ld_active);

  image_buffer #(.ROWS(R), .COLS(C), .NPORTS(2)) u_img (
    .clk, .wr_en, .wr_row, .wr_col, .wr_pix, .r_off(10'sd0), .c_off(10'sd0),
    .rd_en(img_rd), .rd_row(img_row), .rd_col(img_col), .rd_pix(img_pix));

  // reference data
  int img [R][C];
  int cr [NID], cc [NID], cv [NID];
  bit cm [NID][NC][NC];
  int tgt_r [2][NP][3], tgt_c [2][NP][3], fw_r [2][NP][3], fw_c [2][NP][3], nseg [2][NP];
  int exp_tr [NID];
  int got_tr [NID];
  bit got_w [NID];
  int exp_jumps, jumps, overlap_cycles, cycles;
  int scanned [2][NP];

  task automatic hw(host_region_e s, int a, longint d);
    @(negedge clk); host_we = 1; host_sel = s; host_addr = 16'(a); host_wdata = 64'(d);
    @(negedge clk); host_we = 0;
  endtask

  function automatic int id_of(int p, int h, int t, int k);
    return ((p*2 + h)*JT + t)*K + k;
  endfunction

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int h = 0; h < 2; h++) begin
      if (tr_we[h]) begin got_tr[tr_addr[h]] = int'(tr_data[h]); got_w[tr_addr[h]] = 1; end
      if (ff_jump[h]) jumps++;
    end
    if ((ld_active[0] && mode[1] == TM_COMPUTE) || (ld_active[1] && mode[0] == TM_COMPUTE)) overlap_cycles++;
  end

  initial begin
    int t0, budget_max, budget[2];
    // ---------- image ----------
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) img[r][c] = $urandom_range(0, 255);
    // ---------- contours ----------
    for (int p = 0; p < NP; p++) for (int h = 0; h < 2; h++) for (int t = 0; t < JT; t++)
      for (int k = 0; k < K; k++) begin
        automatic int id = id_of(p, h, t, k);
        cr[id] = p*64 + $urandom_range(0, 63);
        cc[id] = 12 + k*30 + $urandom_range(0, 5);
        cv[id] = ($urandom_range(0, 7) != 0);
        for (int a = 0; a < NC; a++) for (int b = 0; b < NC; b++) cm[id][a][b] = $urandom_range(0, 1);
      end
    // ---------- fast-forward segments ----------
    for (int h = 0; h < 2; h++) for (int p = 0; p < NP; p++) begin
      automatic int r0 = p*64;
      nseg[h][p] = 2;
      tgt_r[h][p][0] = r0 + 5 + h;  tgt_c[h][p][0] = 10; fw_r[h][p][0] = r0 + 7 + h; fw_c[h][p][0] = 50;
      tgt_r[h][p][1] = r0 + 20;     tgt_c[h][p][1] = 100 + p; fw_r[h][p][1] = r0 + 20; fw_c[h][p][1] = 120;
      if (h == 1 && p == 1) begin
        nseg[h][p] = 3;
        tgt_r[h][p][2] = r0 + 60; tgt_c[h][p][2] = 3; fw_r[h][p][2] = 0; fw_c[h][p][2] = 0;
      end
    end
    // ---------- reference ----------
    exp_jumps = 0;
    for (int i = 0; i < NID; i++) exp_tr[i] = 0;
    for (int h = 0; h < 2; h++) for (int p = 0; p < NP; p++) begin
      automatic int r = p*64, c = 0, s = 0;
      automatic bit fin = 0;
      scanned[h][p] = 0;
      while (!fin) begin
        if (s < nseg[h][p] && r == tgt_r[h][p][s] && c == tgt_c[h][p][s]) begin
          exp_jumps++;
          if (fw_r[h][p][s]*C + fw_c[h][p][s] <= r*C + c) begin fin = 1; break; end
          r = fw_r[h][p][s]; c = fw_c[h][p][s]; s++;
        end
        scanned[h][p]++;
        for (int t = 0; t < JT; t++) for (int k = 0; k < K; k++) begin
          automatic int id = id_of(p, h, t, k);
          automatic int dr = r - cr[id] + NC/2, dc = c - cc[id] + NC/2;
          if (cv[id] && dr >= 0 && dr < NC && dc >= 0 && dc < NC && cm[id][dr][dc]) begin
            exp_tr[id] += img[r][c];
            if (exp_tr[id] > 65535) exp_tr[id] = 65535;
          end
        end
        if (r == p*64 + 63 && c == C - 1) fin = 1;
        else if (c == C - 1) begin c = 0; r++; end
        else c++;
      end
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---------- load the design ----------
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      @(negedge clk); wr_en = 1; wr_row = idx_t'(r); wr_col = idx_t'(c); wr_pix = pix_t'(img[r][c]);
    end
    @(negedge clk); wr_en = 0;
    for (int id = 0; id < NID; id++) begin
      hw(HR_CCENTER, id, {cv[id][0], 9'(cr[id]), 9'(cc[id])});
      for (int a = 0; a < NC; a++) begin
        logic [NC-1:0] row;
        for (int b = 0; b < NC; b++) row[b] = cm[id][a][b];
        hw(HR_CMASK, id*NC + a, longint'(row));
      end
    end
    for (int h = 0; h < 2; h++) for (int p = 0; p < NP; p++) begin
      pass_desc_t d;
      d.row_start = idx_t'(p*64); d.row_end = idx_t'(p*64 + 63);
      d.ff_base = 10'(p*4); d.ff_count = 11'(nseg[h][p]);
      hw(HR_PASS, p*2 + h, longint'(d));
      for (int s = 0; s < nseg[h][p]; s++) begin
        ff_entry_t e;
        e.tr = idx_t'(tgt_r[h][p][s]); e.tc = idx_t'(tgt_c[h][p][s]);
        e.fr = idx_t'(fw_r[h][p][s]);  e.fc = idx_t'(fw_c[h][p][s]);
        hw(HR_FF, (h << 11) | (p*4 + s), longint'(e));
      end
    end
    // ---------- run ----------
    jumps = 0; overlap_cycles = 0;
    @(negedge clk); start = 1; t0 = $time;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    repeat (3) @(negedge clk);

    for (int id = 0; id < NID; id++) begin
      checks++;
      if (!got_w[id] || got_tr[id] != exp_tr[id]) begin
        failures++;
        if (failures < 10) $display("trace id %0d: got %0d (written %0d) expected %0d", id, got_tr[id], got_w[id], exp_tr[id]);
      end
    end
    checks++;
    if (jumps != exp_jumps) begin failures++; $display("fast forwards %0d expected %0d", jumps, exp_jumps); end
    checks++;
    if (overlap_cycles == 0) begin failures++; $display("no load/compute overlap between the half chains"); end
    // cycle budget per half chain: load + scan + drain + store + control
    for (int h = 0; h < 2; h++) begin
      budget[h] = 0;
      for (int p = 0; p < NP; p++) budget[h] += K*NC*JT + 3 + 2 + scanned[h][p] + 1 + JT + 4 + K*JT + 1 + 4;
    end
    budget_max = budget[0] + budget[1];
    checks++;
    if (cycles > budget_max || cycles < (budget[0] > budget[1] ? budget[0] : budget[1]) - 8) begin
      failures++; $display("cycles %0d outside [%0d, %0d]", cycles, budget[0], budget_max);
    end
    $display("acc_trace: %0d cycles (chain budgets %0d / %0d), %0d fast forwards, %0d overlap cycles",
             cycles, budget[0], budget[1], jumps, overlap_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
