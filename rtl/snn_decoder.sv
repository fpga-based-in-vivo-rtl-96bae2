// snn_decoder: ACC-Decode with the rate-coded spiking position decoder
// (paper, Sec. 4.3, Fig. 8), the SNN converted from the CNN of cnn_decoder.
//
// Network: the same 6 x (N_P-2)^2 hidden nodes and 24 output nodes as the
// CNN, with the CNN's parameters, but every node is an integrate-and-fire
// neuron with threshold V_t. At each of T_S time steps a hidden neuron adds
// its input value (the 3x3 convolution of the trace image plus bias, computed
// once per inference) to its potential; when the potential reaches V_t it
// spikes and V_t is subtracted. An output neuron adds its bias plus the
// weight of every hidden neuron that spiked in that step, and spikes and
// subtracts V_t in the same way. The bin is the output with the most spikes
// over the T_S steps (lowest index on ties).
// Datapath: the convolution runs first with one multiply-accumulate per cycle
// (9 taps + 2 cycles per hidden node) and stores each value in a local
// memory, clearing the hidden potential. Then each step is: a hidden pass,
// one neuron per cycle through a two-stage read-modify-write of value,
// potential and spike bit; and an output pass, one (output, hidden) pair per
// cycle, where a spike adds the weight and no multiplier is used. Weights are
// read in the same order as in cnn_decoder, so the weight address is a
// counter restarted at every step.
// Number formats: values, potentials and V_t in units of 2^-(16+WFRAC), as
// the CNN accumulator; a spike weighs 1.0, so it adds weight << 16. Hidden
// and output potentials are 40-bit signed so that a step cannot overflow.
// Parameters are written as in cnn_decoder (same table layout, s_* and w_*).
// Timing: start -> done after 6*M*M*11 + T_S*((6*M*M + 1) + 24*(6*M*M + 2))
// + 2 cycles, M = N_P - 2 (248,530 for N_P = 16, T_S = 8; the paper reports
// 278.9k for its SNN kernel at that size).
// The IAF rule, the subtraction of V_t, one threshold for both layers, spike
// counting over T_S steps and the arg-max follow the paper; the reuse of the
// CNN's conv value as the hidden input current, zero initial potentials, the
// number formats and the schedule are this design's choices.
module snn_decoder
  import decalcion_pkg::*;
#(
  parameter int MAX_NP = 32,
  parameter int NF     = 6,
  parameter int N_OUT  = N_BINS,
  parameter int W_W    = 8,
  parameter int MAX_IN = MAX_CONTOURS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [5:0]  np,          // N_P, 3 .. MAX_NP
  input  logic [5:0]  ts,          // time steps T_S, 1 .. 63
  input  logic signed [31:0] vt,   // threshold V_t (> 0)
  output logic        busy,
  output logic        done,
  output logic [BIN_W-1:0] bin,
  output logic [$clog2(MAX_IN)-1:0] x_addr,
  input  trace_t      x_data,
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
  localparam int VW    = 40;

  typedef enum logic [3:0] {S_IDLE, S_CONV, S_CWAIT, S_CFIN, S_HID, S_HWAIT, S_OUT, S_OWAIT, S_OFIN, S_DONE} sstate_e;
  sstate_e st;

  logic signed [W_W-1:0] wf [FWD];
  logic signed [31:0]    stab [NST];
  logic signed [31:0]    hval [NHMAX];
  logic signed [VW-1:0]  vh   [NHMAX];
  logic                  sp   [NHMAX];
  logic signed [VW-1:0]  vo   [N_OUT];
  logic [5:0]            cnt  [N_OUT];

  always_ff @(posedge clk) begin
    if (w_we) wf[w_addr] <= w_wdata;
    if (s_we && 32'(s_addr) < NST) stab[s_addr] <= s_wdata;
  end

  logic [5:0]  m, np_r, ts_r, t;
  logic [2:0]  f;
  logic [5:0]  i, j;
  logic [1:0]  a, b;
  logic [NAW:0] fidx, n, nh;
  logic [4:0]  o;
  logic [FWAW-1:0] wptr;
  logic signed [31:0] acc;
  logic signed [VW-1:0] oacc;
  logic        mac_v, spk_v;
  logic signed [W_W-1:0] wc_q, wf_q;
  logic        sp_q;
  // hidden pass pipeline
  logic        h_v;
  logic [NAW-1:0] h_n;
  logic signed [31:0]   hv_q;
  logic signed [VW-1:0] vh_q;

  assign x_addr = IW'((32'(i) + 32'(a)) * 32'(np_r) + 32'(j) + 32'(b));
  always_ff @(posedge clk) begin
    wc_q <= stab[32'(f)*9 + 32'(a)*3 + 32'(b)][W_W-1:0];
    wf_q <= wf[wptr];
    sp_q <= sp[NAW'(n)];
    hv_q <= hval[NAW'(n)];
    vh_q <= vh[NAW'(n)];
  end

  logic signed [W_W+17:0] prod;
  assign prod = $signed({1'b0, x_data}) * wc_q;

  // hidden neuron update (stage 2 of the hidden pass)
  logic signed [VW-1:0] hpot, vt_x;
  logic                 hspk;
  assign vt_x = VW'(vt);
  assign hpot = vh_q + VW'(hv_q);
  assign hspk = (hpot >= vt_x);

  // conv value store, potential clear, hidden update
  always_ff @(posedge clk) begin
    if (st == S_CFIN) begin
      hval[NAW'(fidx)] <= acc;
      vh[NAW'(fidx)]   <= '0;
    end
    if (h_v) begin
      vh[h_n] <= hspk ? hpot - vt_x : hpot;
      sp[h_n] <= hspk;
    end
  end

  logic last_j, last_i, last_f;
  logic [2:0] f_next;
  assign last_j = (j == m - 1'b1);
  assign last_i = (i == m - 1'b1);
  assign last_f = (32'(f) == NF - 1);
  assign f_next = (last_j && last_i) ? f + 1'b1 : f;

  // output potential after the step's input
  logic signed [VW-1:0] opot;
  assign opot = vo[o] + oacc;

  // arg-max of spike counts
  logic [4:0] amax;
  always_comb begin
    amax = '0;
    for (int q = 1; q < N_OUT; q++) if (cnt[q] > cnt[amax]) amax = 5'(q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; m <= '0; np_r <= '0; ts_r <= '0; t <= '0; f <= '0; i <= '0; j <= '0;
      a <= '0; b <= '0; fidx <= '0; n <= '0; nh <= '0; o <= '0; wptr <= '0; acc <= '0;
      oacc <= '0; mac_v <= 1'b0; spk_v <= 1'b0; h_v <= 1'b0; h_n <= '0; bin <= '0; done <= 1'b0;
      for (int q = 0; q < N_OUT; q++) begin vo[q] <= '0; cnt[q] <= '0; end
    end else begin
      done  <= 1'b0;
      mac_v <= (st == S_CONV);
      spk_v <= (st == S_OUT);
      h_v   <= (st == S_HID);
      h_n   <= NAW'(n);
      if (mac_v) acc <= acc + 32'(prod);
      if (spk_v && sp_q) oacc <= oacc + (VW'(wf_q) <<< 16);
      case (st)
        S_IDLE: if (start) begin
          np_r <= np; m <= np - 6'd2; ts_r <= ts; t <= '0;
          nh <= (NAW+1)'(NF * 32'(np - 6'd2) * 32'(np - 6'd2));
          f <= '0; i <= '0; j <= '0; a <= '0; b <= '0; fidx <= '0;
          for (int q = 0; q < N_OUT; q++) begin vo[q] <= '0; cnt[q] <= '0; end
          acc <= stab[NF*9]; st <= S_CONV;
        end
        S_CONV: begin
          if (a == 2'd2 && b == 2'd2) st <= S_CWAIT;
          else if (b == 2'd2) begin b <= '0; a <= a + 1'b1; end
          else b <= b + 1'b1;
        end
        S_CWAIT: st <= S_CFIN;
        S_CFIN: begin
          fidx <= fidx + 1'b1;
          a <= '0; b <= '0;
          st <= S_CONV;
          acc <= stab[NF*9 + 32'(f_next)];
          if (!last_j) j <= j + 1'b1;
          else begin
            j <= '0;
            if (!last_i) i <= i + 1'b1;
            else begin
              i <= '0;
              if (!last_f) f <= f + 1'b1;
              else begin f <= '0; n <= '0; st <= S_HID; end
            end
          end
        end
        // ---- one time step: hidden pass ----
        S_HID: begin
          if (n == nh - 1'b1) st <= S_HWAIT;
          else n <= n + 1'b1;
        end
        S_HWAIT: begin            // last hidden write lands
          n <= '0; o <= '0; wptr <= '0;
          oacc <= VW'(stab[NF*10]);
          st <= S_OUT;
        end
        // ---- output pass ----
        S_OUT: begin
          wptr <= wptr + 1'b1;
          if (n == nh - 1'b1) st <= S_OWAIT;
          else n <= n + 1'b1;
        end
        S_OWAIT: st <= S_OFIN;
        S_OFIN: begin
          if (opot >= vt_x) begin vo[o] <= opot - vt_x; cnt[o] <= cnt[o] + 1'b1; end
          else vo[o] <= opot;
          n <= '0;
          if (32'(o) == N_OUT - 1) begin
            if (t == ts_r - 1'b1) st <= S_DONE;
            else begin t <= t + 1'b1; st <= S_HID; end
          end else begin
            o <= o + 1'b1; oacc <= VW'(stab[NF*10 + 32'(o) + 1]); st <= S_OUT;
          end
        end
        S_DONE: begin
          st <= S_IDLE; done <= 1'b1; bin <= BIN_W'(amax);
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

endmodule
