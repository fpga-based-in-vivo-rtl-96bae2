// cnn_decoder: ACC-Decode with the CNN position decoder (paper, Sec. 4.3,
// Fig. 8).
//
// Network: the traces of N_P x N_P cells form an image (pixel (i, j) is trace
// id i*N_P + j). Six 3x3 filters are applied without padding, giving
// 6 x (N_P-2) x (N_P-2) features; one fully connected layer maps them to 24
// output nodes, one per position bin; the bin is the index of the largest
// output (lowest index on ties).
// Datapath: one multiply-accumulate per cycle, as in ann_decoder. Convolution:
// for every filter f, row i, column j, the accumulator starts at the filter's
// bias and takes the 9 taps (a, b) in raster order; the feature is
// sat16(ReLU(acc) >> WFRAC) and goes to a local feature memory at
// f*M*M + i*M + j (M = N_P - 2). Fully connected: for every output o the
// accumulator starts at its bias and takes all features in that order; the
// fully connected weights are stored in the order they are used
// (o*6*M*M + feature), so their address is a plain counter.
// Number formats as in ann_decoder: traces and features unsigned 16-bit,
// weights signed 8-bit with WFRAC fraction bits, biases and the accumulator
// signed 32-bit (wrapping; weights must keep the sums in range).
// Parameters: the small table (s_we/s_addr/s_wdata, 32-bit entries) holds
// the conv weights at f*9 + a*3 + b (low W_W bits), the conv biases at
// 6*9 + f and the output biases at 6*10 + o; the fully connected weights are
// written through w_we/w_addr/w_wdata.
// Timing: start -> done after 6*M*M*(9 + 2) + 24*(6*M*M + 2) + 2 cycles
// (41,210 for N_P = 16; the paper's HLS kernel takes 65,936 for Hipp6).
// Inputs are read through x_addr with the data on x_data one cycle later.
// The filter count, filter size, valid convolution, 24 outputs and arg-max
// follow the paper; the ReLU after the convolution (the figure draws an
// activation but does not name it), the number formats, the memory layouts
// and the schedule are this design's choices.
module cnn_decoder
  import decalcion_pkg::*;
#(
  parameter int MAX_NP = 32,
  parameter int NF     = 6,
  parameter int N_OUT  = N_BINS,
  parameter int W_W    = 8,
  parameter int WFRAC  = 6,
  parameter int MAX_IN = MAX_CONTOURS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [5:0]  np,          // N_P, 3 .. MAX_NP
  output logic        busy,
  output logic        done,
  output logic [BIN_W-1:0] bin,
  // input read port (trace buffer)
  output logic [$clog2(MAX_IN)-1:0] x_addr,
  input  trace_t      x_data,
  // host writes
  input  logic        w_we,
  input  logic [$clog2(N_OUT*NF*(MAX_NP-2)*(MAX_NP-2))-1:0] w_addr,
  input  logic signed [W_W-1:0] w_wdata,
  input  logic        s_we,
  input  logic [6:0]  s_addr,
  input  logic signed [31:0] s_wdata
);
  localparam int MAXM  = MAX_NP - 2;
  localparam int NHMAX = NF * MAXM * MAXM;
  localparam int FWD   = N_OUT * NHMAX;
  localparam int FWAW  = $clog2(FWD);
  localparam int NAW   = $clog2(NHMAX);
  localparam int NST   = NF*10 + N_OUT;
  localparam int IW    = $clog2(MAX_IN);

  typedef enum logic [2:0] {D_IDLE, D_CONV, D_CWAIT, D_CFIN, D_FC, D_FWAIT, D_FFIN, D_DONE} dstate_e;
  dstate_e st;

  logic signed [W_W-1:0] wf [FWD];
  logic signed [31:0]    stab [NST];
  trace_t                fmem [NHMAX];

  always_ff @(posedge clk) begin
    if (w_we) wf[w_addr] <= w_wdata;
    if (s_we && 32'(s_addr) < NST) stab[s_addr] <= s_wdata;
  end

  logic [5:0]  m;              // N_P - 2
  logic [5:0]  np_r;
  logic [2:0]  f;
  logic [5:0]  i, j;
  logic [1:0]  a, b;
  logic [NAW:0] fidx, n, nh;
  logic [4:0]  o;
  logic [FWAW-1:0] wptr;
  logic signed [31:0] acc, best;
  logic [4:0]  best_i;
  logic        mac_v, mac_conv;
  logic signed [W_W-1:0] wc_q, wf_q;
  trace_t      f_q;

  // conv tap address and weight
  assign x_addr = IW'((32'(i) + 32'(a)) * 32'(np_r) + 32'(j) + 32'(b));
  always_ff @(posedge clk) begin
    wc_q <= stab[32'(f)*9 + 32'(a)*3 + 32'(b)][W_W-1:0];
    wf_q <= wf[wptr];
    f_q  <= fmem[NAW'(n)];
  end

  trace_t x_in;
  logic signed [W_W-1:0] w_in;
  logic signed [W_W+17:0] prod;
  assign x_in = mac_conv ? x_data : f_q;
  assign w_in = mac_conv ? wc_q : wf_q;
  assign prod = $signed({1'b0, x_in}) * w_in;

  trace_t hact;
  always_comb begin
    logic signed [31:0] sh;
    sh = acc >>> WFRAC;
    if (acc[31])              hact = '0;
    else if (sh > 32'sd65535) hact = '1;
    else                      hact = sh[15:0];
  end

  // next convolution node
  logic last_j, last_i, last_f;
  logic [2:0] f_next;
  assign last_j = (j == m - 1'b1);
  assign last_i = (i == m - 1'b1);
  assign last_f = (32'(f) == NF - 1);
  assign f_next = (last_j && last_i) ? f + 1'b1 : f;

  always_ff @(posedge clk) begin
    if (st == D_CFIN) fmem[NAW'(fidx)] <= hact;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; m <= '0; np_r <= '0; f <= '0; i <= '0; j <= '0; a <= '0; b <= '0;
      fidx <= '0; n <= '0; nh <= '0; o <= '0; wptr <= '0; acc <= '0; best <= '0; best_i <= '0;
      mac_v <= 1'b0; mac_conv <= 1'b0; bin <= '0; done <= 1'b0;
    end else begin
      done     <= 1'b0;
      mac_v    <= (st == D_CONV) || (st == D_FC);
      mac_conv <= (st == D_CONV);
      if (mac_v) acc <= acc + 32'(prod);
      case (st)
        D_IDLE: if (start) begin
          np_r <= np; m <= np - 6'd2;
          nh <= (NAW+1)'(NF * 32'(np - 6'd2) * 32'(np - 6'd2));
          f <= '0; i <= '0; j <= '0; a <= '0; b <= '0; fidx <= '0;
          acc <= stab[NF*9]; st <= D_CONV;
        end
        D_CONV: begin
          if (a == 2'd2 && b == 2'd2) st <= D_CWAIT;
          else if (b == 2'd2) begin b <= '0; a <= a + 1'b1; end
          else b <= b + 1'b1;
        end
        D_CWAIT: st <= D_CFIN;
        D_CFIN: begin
          fidx <= fidx + 1'b1;
          a <= '0; b <= '0;
          st <= D_CONV;
          acc <= stab[NF*9 + 32'(f_next)];
          if (!last_j) j <= j + 1'b1;
          else begin
            j <= '0;
            if (!last_i) i <= i + 1'b1;
            else begin
              i <= '0;
              if (!last_f) f <= f + 1'b1;
              else begin
                f <= '0; n <= '0; o <= '0; wptr <= '0;
                acc <= stab[NF*10]; st <= D_FC;
              end
            end
          end
        end
        D_FC: begin
          wptr <= wptr + 1'b1;
          if (n == nh - 1'b1) st <= D_FWAIT;
          else n <= n + 1'b1;
        end
        D_FWAIT: st <= D_FFIN;
        D_FFIN: begin
          if (o == 0 || acc > best) begin best <= acc; best_i <= o; end
          n <= '0;
          if (32'(o) == N_OUT - 1) st <= D_DONE;
          else begin
            o <= o + 1'b1; acc <= stab[NF*10 + 32'(o) + 1]; st <= D_FC;
          end
        end
        D_DONE: begin
          st <= D_IDLE; done <= 1'b1; bin <= BIN_W'(best_i);
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  assign busy = (st != D_IDLE);

endmodule
