// tb_ann_decoder: self-checking test of the ANN decoder.
// Random weights, biases and traces; a fixed-point model written here
// (ReLU, >> 6 with saturation, 0.5 threshold, Johnson reading of the 12-bit
// ordinal code, argmax for 24 categorical outputs) gives the expected code
// and bin. Runs the two input sizes of Table 5 that bracket the data sets
// (256 inputs = 16 x 16, 729 inputs = 27 x 27), each with ordinal and
// categorical outputs, several frames each, and checks the cycle count:
// at least one cycle per multiply-accumulate and no more than the paper's
// cycle counts (Table 5: 9,840 / 10,196 for 256 inputs and 24,981 / 25,337
// for 729 inputs, ordinal / categorical).
`timescale 1ns/1ps
module tb_ann_decoder;
  import decalcion_pkg::*;
  localparam int MAX_IN = 1024, HID = 32, NO = 12, NCAT = 24;
  localparam int WD = MAX_IN*HID + HID*HID + HID*NCAT;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0; logic [10:0] n_in = 0; logic ord = 1;
  logic busy, done; logic [4:0] bin; logic [11:0] code;
  logic [9:0] x_addr; trace_t x_data;
  logic w_we = 0; logic [15:0] w_addr = 0; logic signed [7:0] w_wdata = 0;
  logic b_we = 0; logic [6:0] b_addr = 0; logic signed [31:0] b_wdata = 0;

  ann_decoder dut (.*);

  int x [MAX_IN];
  int w [WD];
  int b [88];
  always_ff @(posedge clk) x_data <= trace_t'(x[x_addr]);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int johnson(logic [11:0] c);
    int n = 0;
    for (int i = 11; i >= 0; i--) if (c[i] == c[11] && n == 11 - i) n++;
    if (c[11]) return n;
    if (n == 12) return 0;
    return 12 + n;
  endfunction

  task automatic model(int nin, bit o, output logic [11:0] ecode, output int ebin);
    longint a0 [HID], a1 [HID], acc, best;
    int p = 0, nout;
    for (int j = 0; j < HID; j++) begin
      acc = b[j];
      for (int i = 0; i < nin; i++) acc += longint'(x[i]) * w[p++];
      acc = 64'(signed'(32'(acc)));
      a0[j] = acc < 0 ? 0 : ((acc >>> 6) > 65535 ? 65535 : (acc >>> 6));
    end
    for (int j = 0; j < HID; j++) begin
      acc = b[HID + j];
      for (int i = 0; i < HID; i++) acc += a0[i] * w[p++];
      acc = 64'(signed'(32'(acc)));
      a1[j] = acc < 0 ? 0 : ((acc >>> 6) > 65535 ? 65535 : (acc >>> 6));
    end
    nout = o ? NO : NCAT;
    ecode = '0; ebin = 0; best = 0;
    for (int j = 0; j < nout; j++) begin
      acc = b[2*HID + j];
      for (int i = 0; i < HID; i++) acc += a1[i] * w[p++];
      acc = 64'(signed'(32'(acc)));
      if (o) ecode[11 - j] = (acc >= (64'sd1 <<< 21));
      else if (j == 0 || acc > best) begin best = acc; ebin = j; end
    end
    if (o) ebin = johnson(ecode);
  endtask

  initial begin
    int sizes [2] = '{256, 729};
    int limit_ord [2] = '{9840, 24981};
    int limit_cat [2] = '{10196, 25337};
    int bins_seen [24];
    repeat (3) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 2; s++) for (int mo = 0; mo < 2; mo++) for (int fr = 0; fr < 3; fr++) begin
      automatic int nin = sizes[s];
      automatic int nw = nin*HID + HID*HID + HID*((mo == 0) ? NO : NCAT);
      automatic int cyc = 0, macs, ebin;
      automatic logic [11:0] ecode;
      for (int i = 0; i < nin; i++) x[i] = $urandom_range(0, 65535);
      for (int i = 0; i < nw; i++) w[i] = $urandom_range(0, 40) - 20;
      for (int i = 0; i < 88; i++) b[i] = int'($urandom_range(0, 32'h0080_0000)) - 32'h0040_0000;
      for (int i = 0; i < nw; i++) begin
        @(negedge clk); w_we = 1; w_addr = 16'(i); w_wdata = 8'(w[i]);
      end
      @(negedge clk); w_we = 0;
      for (int i = 0; i < 88; i++) begin
        @(negedge clk); b_we = 1; b_addr = 7'(i); b_wdata = b[i];
      end
      @(negedge clk); b_we = 0;
      model(nin, mo == 0, ecode, ebin);
      n_in = 11'(nin); ord = (mo == 0);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      macs = nin*HID + HID*HID + HID*((mo == 0) ? NO : NCAT);
      checks++;
      if (int'(bin) != ebin) begin failures++; $display("n_in %0d ord %0d: bin %0d expected %0d", nin, mo == 0, bin, ebin); end
      bins_seen[ebin]++;
      if (mo == 0) begin
        checks++;
        if (code != ecode) begin failures++; $display("code %b expected %b", code, ecode); end
      end
      checks++;
      if (cyc < macs || cyc > ((mo == 0) ? limit_ord[s] : limit_cat[s])) begin
        failures++; $display("cycles %0d outside [%0d, paper %0d]", cyc, macs, (mo == 0) ? limit_ord[s] : limit_cat[s]);
      end
      if (fr == 0) $display("n_in %0d %s: %0d cycles (%0d MACs, paper %0d)", nin, (mo == 0) ? "ordinal" : "categorical",
                            cyc, macs, (mo == 0) ? limit_ord[s] : limit_cat[s]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
