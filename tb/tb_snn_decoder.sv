// tb_snn_decoder: self-checking test of the spiking decoder at its default
// size (MAX_NP = 32). Random traces and CNN parameters are written; the
// threshold V_t is 1.0 (2^22 in accumulator units). The decoder runs for
// N_P = 16 with T_S = 8 (the size of the paper's SNN cycle count), 16 and 32
// steps, and for N_P = 27 with T_S = 8, and the bin is compared with a model
// of the integrate-and-fire network (hidden current = 3x3 conv + bias,
// subtract-V_t reset, output current = bias + sum of weights of spiking
// hidden neurons, spike counts, arg-max). The cycle count is checked against
// the schedule 6*M*M*11 + T_S*((6*M*M + 1) + 24*(6*M*M + 2)) + 2 and printed
// next to the paper's 278.9k cycles (16 x 16 input, 8 steps).
`timescale 1ns/1ps
module tb_snn_decoder;
  import decalcion_pkg::*;
  localparam int NF = 6, NO = 24, MAXNP = 32, MAXM = MAXNP - 2, FWD = NO*NF*MAXM*MAXM;
  localparam longint VT = 64'd1 << 22;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0; logic [5:0] np = 16, ts = 8;
  logic busy, done; logic [4:0] bin;
  logic [9:0] x_addr; trace_t x_data;
  logic w_we = 0; logic [$clog2(FWD)-1:0] w_addr = 0; logic signed [7:0] w_wdata = 0;
  logic s_we = 0; logic [6:0] s_addr = 0; logic signed [31:0] s_wdata = 0;

  snn_decoder dut (.clk, .rst_n, .start, .np, .ts, .vt(32'(VT)), .busy, .done, .bin, .x_addr, .x_data,
                   .w_we, .w_addr, .w_wdata, .s_we, .s_addr, .s_wdata);

  trace_t xm [1024];
  always_ff @(posedge clk) x_data <= xm[x_addr];

  int wf [FWD];
  int stab [NF*10 + NO];
  int spread;

  initial begin
    #40000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int model(int p, int steps);
    int m = p - 2, nh = NF*m*m, bi = 0, cnt [NO];
    longint acc, pot;
    longint hv [NF*MAXM*MAXM], vh [NF*MAXM*MAXM], vo [NO];
    bit sp [NF*MAXM*MAXM];
    for (int f = 0; f < NF; f++) for (int i = 0; i < m; i++) for (int j = 0; j < m; j++) begin
      acc = stab[NF*9 + f];
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
        acc += longint'(xm[(i+a)*p + j + b]) * stab[f*9 + a*3 + b];
      hv[f*m*m + i*m + j] = 64'(signed'(32'(acc)));
      vh[f*m*m + i*m + j] = 0;
    end
    for (int o = 0; o < NO; o++) begin vo[o] = 0; cnt[o] = 0; end
    for (int t = 0; t < steps; t++) begin
      for (int k = 0; k < nh; k++) begin
        pot = vh[k] + hv[k];
        sp[k] = (pot >= VT);
        vh[k] = sp[k] ? pot - VT : pot;
      end
      for (int o = 0; o < NO; o++) begin
        acc = stab[NF*10 + o];
        for (int k = 0; k < nh; k++) if (sp[k]) acc += longint'(wf[o*nh + k]) <<< 16;
        pot = vo[o] + acc;
        if (pot >= VT) begin cnt[o]++; vo[o] = pot - VT; end else vo[o] = pot;
      end
    end
    for (int o = 1; o < NO; o++) if (cnt[o] > cnt[bi]) bi = o;
    spread = cnt[bi];
    return bi;
  endfunction

  initial begin
    int sizes [4] = '{16, 16, 16, 27};
    int steps [4] = '{8, 16, 32, 8};
    repeat (4) @(negedge clk); rst_n = 1;
    for (int k = 0; k < NF*10 + NO; k++) begin
      stab[k] = (k < NF*9) ? int'($urandom_range(0, 6)) - 3 : int'($urandom_range(0, 32'h0040_0000)) - 32'h0020_0000;
      @(negedge clk); s_we = 1; s_addr = 7'(k); s_wdata = stab[k];
    end
    @(negedge clk); s_we = 0;
    for (int k = 0; k < FWD; k++) begin
      wf[k] = int'($urandom_range(0, 6)) - 3;
      @(negedge clk); w_we = 1; w_addr = ($clog2(FWD))'(k); w_wdata = 8'(wf[k]);
    end
    @(negedge clk); w_we = 0;
    foreach (sizes[s]) begin
      for (int fr = 0; fr < 2; fr++) begin
        automatic int m = sizes[s] - 2, nh = NF*m*m, exp_bin, cyc = 0, exp_cyc;
        for (int k = 0; k < 1024; k++) xm[k] = trace_t'($urandom_range(0, 65535));
        exp_bin = model(sizes[s], steps[s]);
        exp_cyc = nh*11 + steps[s]*((nh + 1) + NO*(nh + 2)) + 2;
        @(negedge clk); np = 6'(sizes[s]); ts = 6'(steps[s]); start = 1;
        @(negedge clk); start = 0; cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks++;
        if (int'(bin) != exp_bin) begin failures++; $display("N_P %0d T_S %0d: bin %0d expected %0d", sizes[s], steps[s], bin, exp_bin); end
        checks++;
        if (cyc != exp_cyc) begin failures++; $display("N_P %0d T_S %0d: %0d cycles, schedule %0d", sizes[s], steps[s], cyc, exp_cyc); end
        if (fr == 0) $display("N_P %0d T_S %0d: bin %0d (%0d spikes), %0d cycles", sizes[s], steps[s], bin, spread, cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
