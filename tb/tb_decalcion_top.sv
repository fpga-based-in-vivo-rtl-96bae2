// tb_decalcion_top: end-to-end test of the whole pipeline at its default size
// (J = 32 tracing elements in two half chains, K = 8, 512 x 512 frames, 1024
// contour ids, decoders with 1024 inputs).
// Workload: the tile-based contours of the paper: 32 x 32 tiles of 16 x 16
// pixels, each a 25 x 25 window whose central 16 x 16 is set, allocated to
// the tracing elements as in Fig. 6(c) (even tile rows: TE = tile column; odd
// tile rows: TE = tile column - 8 mod 32; slot = tile row within the pass),
// four passes of 8 tile rows (region segmentation). Pixels of a pass that hold
// no tile of a half chain are background for that half chain and are skipped
// by its fast-forward table, built here by run-length coding of the
// background in scan order.
// Four frames are sent through the sensor bus (9 ns pixel clock against a 2 ns
// core clock); the raw stream is looped back as the enhanced stream.
// Frame 1: ANN, motion vector (0, 0), ordinal output. Frame 2: ANN, motion
// vector (3, -2), categorical output. Frame 3: CNN on the 32 x 32 trace image,
// motion vector (-1, 2). Frame 4: SNN, 8 time steps, V_t = 1.0. For each
// frame all 1024 traces are read back and compared with tile sums computed
// here, and the decoded bin with a fixed-point model of the selected decoder.
// Mechanisms counted (each must occur): load of
// one half chain during compute of the other, fast forwards (their number
// must equal the table entries), passes of each half chain, both ANN output
// encodings, all three decoders, a non-zero motion vector that shifts edge tiles partly outside
// the frame (their traces must then count those pixels as 0), and a
// frame that ends during processing (an extra end-of-frame pulse is injected)
// which must be counted as an overrun. Latency from end of frame to decoded
// position is reported and checked against the sum of the stage budgets and
// for ANN frames against the sub-millisecond figure of the paper (300000
// cycles at 300 MHz).
`timescale 1ns/100ps
module tb_decalcion_top;
  import decalcion_pkg::*;
  localparam int R = 512, C = 512, NIDS = 1024, HID = 32;
  localparam int WD = NIDS*HID + HID*HID + HID*24;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic sen_pclk = 0; logic [7:0] sen_data = 0; logic sen_hsync = 0, sen_vsync = 0;
  logic raw_valid; logic [8:0] raw_row, raw_col; logic [7:0] raw_pix; logic raw_frame_end;
  logic extra_end = 0;
  logic signed [9:0] mv_r = 0, mv_c = 0;
  logic host_we = 0; logic [2:0] host_sel = 0; logic [19:0] host_addr = 0; logic [63:0] host_wdata = 0;
  logic [9:0] trace_rd_addr = 0; logic [15:0] trace_rd_data;
  logic dec_valid; logic [4:0] dec_bin; logic [11:0] dec_code; logic [31:0] latency_cycles;
  logic [15:0] frames_done, frame_overruns; logic busy;
  trace_mode_e tmode [2]; logic [1:0] tjump, tload;
  trace_mode_e tmode_d [2] = '{TM_IDLE, TM_IDLE};

  decalcion_top dut (
    .clk, .rst_n, .sen_pclk, .sen_data, .sen_hsync, .sen_vsync,
    .raw_valid, .raw_row, .raw_col, .raw_pix, .raw_frame_end,
    .enh_valid(raw_valid), .enh_row(raw_row), .enh_col(raw_col), .enh_pix(raw_pix),
    .enh_frame_end(raw_frame_end | extra_end), .mv_r_off(mv_r), .mv_c_off(mv_c),
    .host_we, .host_sel, .host_addr, .host_wdata, .trace_rd_addr, .trace_rd_data,
    .dec_valid, .dec_bin, .dec_code, .latency_cycles, .frames_done, .frame_overruns, .busy,
    .trace_mode(tmode), .trace_ff_jump(tjump), .trace_loading(tload));

  byte unsigned img [R][C];
  int w [WD];
  int b [88];
  localparam int NHC = 6*30*30, FWC = 24*NHC;
  int cwf [FWC];
  int cst [84];
  localparam longint VT = 64'd1 << 22;
  int ff_entries, jumps, overlap, passes0, passes1, outside_reads;
  bit sched_seen_ord, sched_seen_cat;

  // ---------------- mechanism monitors ----------------
  always @(posedge clk) if (rst_n) begin
    if (tjump[0]) jumps++;
    if (tjump[1]) jumps++;
    if ((tload[0] && tmode[1] == TM_COMPUTE) || (tload[1] && tmode[0] == TM_COMPUTE)) overlap++;
    // a pass ends when a half chain leaves Store
    if (tmode_d[0] == TM_STORE && tmode[0] != TM_STORE) passes0++;
    if (tmode_d[1] == TM_STORE && tmode[1] != TM_STORE) passes1++;
    tmode_d <= tmode;
  end

  initial begin
    #40000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic hw(int s, int a, longint d);
    @(negedge clk); host_we = 1; host_sel = 3'(s); host_addr = 20'(a); host_wdata = 64'(d);
    @(negedge clk); host_we = 0;
  endtask

  // Fig. 6(c) allocation: tile (tr, tc) -> contour id
  function automatic int tile_te(int tr, int tc);
    return ((tr % 8) % 2 == 0) ? tc : (tc + 24) % 32;
  endfunction
  function automatic int tile_id(int tr, int tc);
    int p = tr / 8, k = tr % 8, j = tile_te(tr, tc);
    return ((p*2 + j/16)*16 + j%16)*8 + k;
  endfunction

  function automatic int johnson(logic [11:0] c);
    int n = 0;
    for (int i = 11; i >= 0; i--) if (c[i] == c[11] && n == 11 - i) n++;
    if (c[11]) return n;
    if (n == 12) return 0;
    return 12 + n;
  endfunction

  task automatic ann_model(int x[NIDS], bit o, output int ebin);
    longint a0 [HID], a1 [HID], acc, best;
    logic [11:0] ecode;
    int p = 0;
    for (int j = 0; j < HID; j++) begin
      acc = b[j];
      for (int i = 0; i < NIDS; i++) acc += longint'(x[i]) * w[p++];
      acc = 64'(signed'(32'(acc)));
      a0[j] = acc < 0 ? 0 : ((acc >>> 6) > 65535 ? 65535 : (acc >>> 6));
    end
    for (int j = 0; j < HID; j++) begin
      acc = b[HID + j];
      for (int i = 0; i < HID; i++) acc += a0[i] * w[p++];
      acc = 64'(signed'(32'(acc)));
      a1[j] = acc < 0 ? 0 : ((acc >>> 6) > 65535 ? 65535 : (acc >>> 6));
    end
    ecode = '0; ebin = 0; best = 0;
    for (int j = 0; j < (o ? 12 : 24); j++) begin
      acc = b[2*HID + j];
      for (int i = 0; i < HID; i++) acc += a1[i] * w[p++];
      acc = 64'(signed'(32'(acc)));
      if (o) ecode[11 - j] = (acc >= (64'sd1 <<< 21));
      else if (j == 0 || acc > best) begin best = acc; ebin = j; end
    end
    if (o) ebin = johnson(ecode);
  endtask

  // CNN and SNN models on the 32 x 32 trace image (pixel (i, j) = trace i*32 + j)
  function automatic int cnn_model(int x[NIDS]);
    int bi = 0;
    longint acc, best = 0;
    longint h [NHC];
    for (int f = 0; f < 6; f++) for (int i = 0; i < 30; i++) for (int j = 0; j < 30; j++) begin
      acc = cst[54 + f];
      for (int a = 0; a < 3; a++) for (int bb = 0; bb < 3; bb++) acc += longint'(x[(i+a)*32 + j + bb]) * cst[f*9 + a*3 + bb];
      acc = 64'(signed'(32'(acc)));
      h[f*900 + i*30 + j] = acc < 0 ? 0 : ((acc >>> 6) > 65535 ? 65535 : (acc >>> 6));
    end
    for (int o = 0; o < 24; o++) begin
      acc = cst[60 + o];
      for (int k = 0; k < NHC; k++) acc += h[k] * cwf[o*NHC + k];
      acc = 64'(signed'(32'(acc)));
      if (o == 0 || acc > best) begin best = acc; bi = o; end
    end
    return bi;
  endfunction

  function automatic int snn_model(int x[NIDS], int steps);
    int bi = 0, cnt [24];
    longint acc, pot, vo [24];
    longint hv [NHC], vh [NHC];
    bit sp [NHC];
    for (int f = 0; f < 6; f++) for (int i = 0; i < 30; i++) for (int j = 0; j < 30; j++) begin
      acc = cst[54 + f];
      for (int a = 0; a < 3; a++) for (int bb = 0; bb < 3; bb++) acc += longint'(x[(i+a)*32 + j + bb]) * cst[f*9 + a*3 + bb];
      hv[f*900 + i*30 + j] = 64'(signed'(32'(acc))); vh[f*900 + i*30 + j] = 0;
    end
    for (int o = 0; o < 24; o++) begin vo[o] = 0; cnt[o] = 0; end
    for (int t = 0; t < steps; t++) begin
      for (int k = 0; k < NHC; k++) begin
        pot = vh[k] + hv[k]; sp[k] = (pot >= VT); vh[k] = sp[k] ? pot - VT : pot;
      end
      for (int o = 0; o < 24; o++) begin
        acc = cst[60 + o];
        for (int k = 0; k < NHC; k++) if (sp[k]) acc += longint'(cwf[o*NHC + k]) <<< 16;
        pot = vo[o] + acc;
        if (pot >= VT) begin cnt[o]++; vo[o] = pot - VT; end else vo[o] = pot;
      end
    end
    for (int o = 1; o < 24; o++) if (cnt[o] > cnt[bi]) bi = o;
    return bi;
  endfunction

  task automatic send_frame();
    #100 sen_vsync = 1;
    #50;
    for (int r = 0; r < R; r++) begin
      sen_hsync = 1;
      for (int c = 0; c < C; c++) begin
        sen_data = img[r][c];
        #4.5 sen_pclk = 1;
        #4.5 sen_pclk = 0;
      end
      #2 sen_hsync = 0;
      #20;
    end
    sen_vsync = 0;
  endtask

  task automatic frame(int mvr, int mvc, bit o, int fno, int dsel);
    int x [NIDS];
    int ebin, lat_budget, got_bin, lat;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) img[r][c] = byte'($urandom_range(0, 255));
    mv_r = 10'(mvr); mv_c = 10'(mvc);
    hw(HR_CFG, CFG_DEC_ORD, o);
    hw(HR_CFG, CFG_DEC_SEL, dsel);
    // expected tile sums under the motion vector
    for (int tr = 0; tr < 32; tr++) for (int tc = 0; tc < 32; tc++) begin
      int s = 0;
      for (int a = 0; a < 16; a++) for (int bb = 0; bb < 16; bb++) begin
        int rr = tr*16 + a + mvr, cc = tc*16 + bb + mvc;
        if (rr >= 0 && rr < R && cc >= 0 && cc < C) s += img[rr][cc];
        else if (a == 0 && bb == 0 || a == 15 && bb == 15) outside_reads++;
      end
      x[tile_id(tr, tc)] = s;
    end
    if (dsel == 0) ann_model(x, o, ebin);
    else if (dsel == 1) ebin = cnn_model(x);
    else ebin = snn_model(x, 8);
    fork
      send_frame();
      begin
        @(posedge raw_frame_end);
        repeat (5000) @(posedge clk);
        if (fno == 1) begin @(negedge clk); extra_end = 1; @(negedge clk); extra_end = 0; end
      end
    join
    @(posedge dec_valid);
    got_bin = int'(dec_bin); lat = int'(latency_cycles);
    @(negedge clk);
    for (int i = 0; i < NIDS; i++) begin
      trace_rd_addr = 10'(i);
      @(negedge clk);
      checks++;
      if (int'(trace_rd_data) != x[i]) begin
        failures++;
        if (failures < 10) $display("frame %0d trace %0d: got %0d expected %0d", fno, i, trace_rd_data, x[i]);
      end
    end
    checks++;
    if (got_bin != ebin) begin failures++; $display("frame %0d: bin %0d expected %0d", fno, got_bin, ebin); end
    // budget: 4 passes x (load + scan + drain + store) per half chain, plus one load, plus the ANN
    lat_budget = 4 * (8*25*16 + 3 + 65536 + 16 + 4 + 8*16 + 12) + 8*25*16 + NIDS*HID + HID*HID + HID*24 + 4*HID + 200;
    if (dsel == 1) lat_budget = lat_budget - (NIDS*HID + HID*HID + HID*24 + 4*HID) + 6*900*11 + 24*(NHC + 2);
    if (dsel == 2) lat_budget = lat_budget - (NIDS*HID + HID*HID + HID*24 + 4*HID) + 6*900*11 + 8*((NHC + 1) + 24*(NHC + 2));
    checks++;
    if (lat > lat_budget) begin failures++; $display("latency %0d above budget %0d", lat, lat_budget); end
    // the paper's headline: under 1 ms from frame to decoded position at 300 MHz
    if (dsel == 0) checks++;
    if (dsel == 0 && lat >= 300000) begin failures++; $display("latency %0d cycles is not below 1 ms at 300 MHz", lat); end
    $display("frame %0d (%s, %s, mv %0d,%0d): bin %0d, latency %0d cycles = %0d us at 300 MHz",
             fno, dsel == 0 ? "ANN" : dsel == 1 ? "CNN" : "SNN 8 steps", o ? "ordinal" : "categorical",
             mvr, mvc, got_bin, lat, lat / 300);
  endtask

  initial begin
    repeat (5) @(negedge clk); rst_n = 1;
    // ---------- contours (tile based, Fig. 6) ----------
    for (int tr = 0; tr < 32; tr++) for (int tc = 0; tc < 32; tc++) begin
      automatic int id = tile_id(tr, tc);
      hw(HR_CCENTER, id, {1'b1, 9'(tr*16 + 8), 9'(tc*16 + 8)});
    end
    for (int id = 0; id < NIDS; id++) for (int a = 0; a < NC; a++)
      hw(HR_CMASK, id*NC + a, (a >= 4 && a < 20) ? 64'h000F_FFF0 : 64'h0);
    // ---------- pass descriptors and fast-forward tables ----------
    ff_entries = 0;
    for (int h = 0; h < 2; h++) begin
      automatic int n = 0;
      for (int p = 0; p < 4; p++) begin
        automatic int base = n;
        int pos, endpos, bg_start;
        bit in_bg;
        pass_desc_t d;
        pos = p*128*C; endpos = (p*128 + 127)*C + C - 1;
        in_bg = 0; bg_start = 0;
        for (int q = pos; q <= endpos; q++) begin
          automatic int r = q / C, c = q % C, tr = r / 16, tc = c / 16;
          automatic bit fg = (tile_te(tr, tc) / 16 == h);
          if (!fg && !in_bg) begin in_bg = 1; bg_start = q; end
          if (fg && in_bg) begin
            in_bg = 0;
            hw(HR_FF, (h << 11) | n, {9'(bg_start / C), 9'(bg_start % C), 9'(r), 9'(c)});
            n++;
          end
        end
        if (in_bg) begin
          hw(HR_FF, (h << 11) | n, {9'(bg_start / C), 9'(bg_start % C), 9'd0, 9'd0});
          n++;
        end
        d.row_start = 9'(p*128); d.row_end = 9'(p*128 + 127); d.ff_base = 10'(base); d.ff_count = 11'(n - base);
        hw(HR_PASS, p*2 + h, longint'(d));
      end
      ff_entries += n;
    end
    // ---------- decoder ----------
    for (int i = 0; i < WD; i++) begin w[i] = $urandom_range(0, 6) - 3; hw(HR_W, i, w[i]); end
    for (int i = 0; i < 88; i++) begin b[i] = int'($urandom_range(0, 32'h0100_0000)) - 32'h0080_0000; hw(HR_B, i, b[i]); end
    for (int i = 0; i < 84; i++) begin
      cst[i] = (i < 54) ? int'($urandom_range(0, 6)) - 3 : int'($urandom_range(0, 32'h0040_0000)) - 32'h0020_0000;
      hw(HR_CW, (1 << 19) | i, cst[i]);
    end
    for (int i = 0; i < FWC; i++) begin cwf[i] = int'($urandom_range(0, 6)) - 3; hw(HR_CW, i, cwf[i]); end
    hw(HR_CFG, CFG_DEC_NP, 32);
    hw(HR_CFG, CFG_SNN_TS, 8);
    hw(HR_CFG, CFG_SNN_VT, VT);
    hw(HR_CFG, CFG_NPASS, 4);
    hw(HR_CFG, CFG_DEC_NIN, NIDS);
    hw(HR_CFG, CFG_ENABLE, 1);
    $display("configuration loaded at %0t, %0d fast-forward entries", $time, ff_entries);
    jumps = 0;
    frame(0, 0, 1, 1, 0);
    frame(3, -2, 0, 2, 0);
    frame(-1, 2, 0, 3, 1);
    frame(0, 0, 0, 4, 2);
    checks++; if (frames_done != 4) begin failures++; $display("frames_done %0d", frames_done); end
    checks++; if (jumps != 4*ff_entries) begin failures++; $display("fast forwards %0d expected %0d", jumps, 4*ff_entries); end
    checks++; if (overlap == 0) begin failures++; $display("double buffering never overlapped load and compute"); end
    checks++; if (passes0 != 16 || passes1 != 16) begin failures++; $display("passes %0d / %0d", passes0, passes1); end
    checks++; if (outside_reads == 0) begin failures++; $display("no tile read outside the frame"); end
    checks++; if (frame_overruns != 1) begin failures++; $display("overruns %0d expected 1", frame_overruns); end
    $display("mechanisms: %0d fast forwards, %0d overlap cycles, passes %0d/%0d, %0d tile corners shifted outside the frame, %0d overruns",
             jumps, overlap, passes0, passes1, outside_reads, frame_overruns);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
