// tb_cnn_decoder: self-checking test of the CNN decoder at its default size
// (MAX_NP = 32). Random traces, filters, biases and fully connected weights
// are written, the decoder runs for N_P = 16 (the Hipp6 size), 27 (Hipp15)
// and 32 (the 32 x 32 tile image), three inferences each, and the bin is
// compared with a fixed-point model of the same network (3x3 valid
// convolution, ReLU, shift, saturation, fully connected layer, arg-max).
// The cycle count from start to done is checked against the schedule
// 6*M*M*11 + 24*(6*M*M + 2) + 2 (M = N_P - 2) and printed next to the
// paper's CNN kernel figures (65,936 cycles for Hipp6, 240,089 for Hipp15).
`timescale 1ns/1ps
module tb_cnn_decoder;
  import decalcion_pkg::*;
  localparam int NF = 6, NO = 24, MAXNP = 32, MAXM = MAXNP - 2, FWD = NO*NF*MAXM*MAXM;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0; logic [5:0] np = 16;
  logic busy, done; logic [4:0] bin;
  logic [9:0] x_addr; trace_t x_data;
  logic w_we = 0; logic [$clog2(FWD)-1:0] w_addr = 0; logic signed [7:0] w_wdata = 0;
  logic s_we = 0; logic [6:0] s_addr = 0; logic signed [31:0] s_wdata = 0;

  cnn_decoder dut (.clk, .rst_n, .start, .np, .busy, .done, .bin, .x_addr, .x_data,
                   .w_we, .w_addr, .w_wdata, .s_we, .s_addr, .s_wdata);

  trace_t xm [1024];
  always_ff @(posedge clk) x_data <= xm[x_addr];

  int wf [FWD];
  int stab [NF*10 + NO];

  initial begin
    #20000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int model(int p);
    int m = p - 2, nh = NF*m*m, bi = 0;
    longint acc, best = 0;
    longint h [NF*MAXM*MAXM];
    for (int f = 0; f < NF; f++) for (int i = 0; i < m; i++) for (int j = 0; j < m; j++) begin
      acc = stab[NF*9 + f];
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
        acc += longint'(xm[(i+a)*p + j + b]) * stab[f*9 + a*3 + b];
      acc = 64'(signed'(32'(acc)));
      h[f*m*m + i*m + j] = acc < 0 ? 0 : ((acc >>> 6) > 65535 ? 65535 : (acc >>> 6));
    end
    for (int o = 0; o < NO; o++) begin
      acc = stab[NF*10 + o];
      for (int k = 0; k < nh; k++) acc += h[k] * wf[o*nh + k];
      acc = 64'(signed'(32'(acc)));
      if (o == 0 || acc > best) begin best = acc; bi = o; end
    end
    return bi;
  endfunction

  initial begin
    int sizes [3] = '{16, 27, 32};
    int paper [3] = '{65936, 240089, -1};
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
      for (int fr = 0; fr < 3; fr++) begin
        automatic int m = sizes[s] - 2, exp_bin, cyc = 0, exp_cyc;
        for (int k = 0; k < 1024; k++) xm[k] = trace_t'($urandom_range(0, 65535));
        exp_bin = model(sizes[s]);
        exp_cyc = NF*m*m*11 + NO*(NF*m*m + 2) + 2;
        @(negedge clk); np = 6'(sizes[s]); start = 1;
        @(negedge clk); start = 0; cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks++;
        if (int'(bin) != exp_bin) begin failures++; $display("N_P %0d frame %0d: bin %0d expected %0d", sizes[s], fr, bin, exp_bin); end
        checks++;
        if (cyc != exp_cyc) begin failures++; $display("N_P %0d: %0d cycles, schedule %0d", sizes[s], cyc, exp_cyc); end
        if (fr == 0) $display("N_P %0d: bin %0d, %0d cycles (paper's HLS kernel: %0d, -1 = not reported)", sizes[s], bin, cyc, paper[s]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
