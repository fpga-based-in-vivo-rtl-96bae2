// ann_decoder: ACC-Decode with the two-hidden-layer ANN position decoder
// (paper, Sec. 4.3-4.4).
//
// Network: n_in traces -> 32 ReLU nodes -> 32 ReLU nodes -> output layer.
// Ordinal output (ord = 1): 12 nodes, each thresholded at 0.5 into a 12-bit
// code, node 0 leftmost; the bin is read from the run of equal bits at the
// left (12-bit Johnson code, 24 states): MSB 1 -> bin = number of leading 1s
// (1..12); MSB 0 -> bin = 12 + number of leading 0s (13..23), all zeros ->
// bin 0. Categorical output (ord = 0): 24 nodes, the bin is the index of the
// largest (lowest index on ties).
// Datapath: one multiply-accumulate per cycle. For every node the
// accumulator starts at the node's bias and takes one input x weight per
// cycle; the weights are read from a local memory in the order they are used
// (layer 1 node 0 inputs 0..n_in-1, node 1, ..., then layer 2, then the output
// layer), so the weight address is a plain counter. Inputs of layer 1 come
// from the trace buffer (x_addr / x_data, registered read), later layers from
// two local activation banks.
// Number formats: inputs and activations are unsigned 16-bit fractions of
// 2^16; weights signed 8-bit with WFRAC = 6 fraction bits; biases and the
// accumulator signed 32-bit in units of 2^-(16+WFRAC). Hidden activation =
// saturate(ReLU(acc) >> WFRAC). Threshold 0.5 = 2^(15+WFRAC).
// Timing: start -> done after sum over nodes of (inputs + 2) cycles + 2,
// e.g. 9754 cycles for 256 inputs with ordinal output (paper: 9840).
// The layer sizes, the encodings and the 0.5 threshold follow the paper; the
// number formats, the ReLU, the Johnson reading of the ordinal code and the
// schedule are this design's choices.
module ann_decoder
  import decalcion_pkg::*;
#(
  parameter int MAX_IN = MAX_CONTOURS,
  parameter int HID    = 32,
  parameter int N_ORD  = 12,
  parameter int N_CAT  = N_BINS,
  parameter int W_W    = 8,
  parameter int WFRAC  = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [$clog2(MAX_IN):0] n_in,
  input  logic        ord,
  output logic        busy,
  output logic        done,
  output logic [BIN_W-1:0] bin,
  output logic [N_ORD-1:0] code,
  // input read port (trace buffer)
  output logic [$clog2(MAX_IN)-1:0] x_addr,
  input  trace_t      x_data,
  // host writes
  input  logic        w_we,
  input  logic [$clog2(MAX_IN*HID + HID*HID + HID*N_CAT)-1:0] w_addr,
  input  logic signed [W_W-1:0] w_wdata,
  input  logic        b_we,
  input  logic [$clog2(2*HID + N_CAT)-1:0] b_addr,
  input  logic signed [31:0] b_wdata
);
  localparam int WDEPTH = MAX_IN*HID + HID*HID + HID*N_CAT;
  localparam int WAW    = $clog2(WDEPTH);
  localparam int BDEPTH = 2*HID + N_CAT;
  localparam int IW     = $clog2(MAX_IN);
  localparam int HW     = $clog2(HID);
  localparam logic signed [31:0] THRESH = 32'sd1 <<< (15 + WFRAC);

  typedef enum logic [2:0] {A_IDLE, A_MAC, A_WAIT, A_FIN, A_DONE} astate_e;
  astate_e st;

  logic signed [W_W-1:0] wmem [WDEPTH];
  logic signed [31:0]    bmem [BDEPTH];
  trace_t act0 [HID];
  trace_t act1 [HID];

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr] <= w_wdata;
    if (b_we) bmem[b_addr] <= b_wdata;
  end

  logic [1:0]     layer;
  logic [IW:0]    i_cnt;     // input being issued
  logic [IW:0]    n_cur;     // inputs of this layer
  logic [4:0]     o_cnt;     // node of this layer
  logic [4:0]     o_last;
  logic [WAW-1:0] wptr;
  logic signed [31:0] acc;
  logic           mac_v;
  logic signed [W_W-1:0] w_q;
  trace_t         a_q;
  logic signed [31:0] best;
  logic [4:0]     best_i;
  logic [N_ORD-1:0] code_r;

  // registered reads
  always_ff @(posedge clk) begin
    w_q <= wmem[wptr];
    a_q <= (layer == 2'd1) ? act0[HW'(i_cnt)] : act1[HW'(i_cnt)];
  end
  assign x_addr = IW'(i_cnt);

  trace_t x_in;
  assign x_in = (layer == 2'd0) ? x_data : a_q;

  logic signed [W_W+17:0] prod;
  assign prod = $signed({1'b0, x_in}) * w_q;

  logic [$clog2(BDEPTH)-1:0] bsel;
  always_comb begin
    case (layer)
      2'd0:    bsel = ($clog2(BDEPTH))'(o_cnt);
      2'd1:    bsel = ($clog2(BDEPTH))'(HID + 32'(o_cnt));
      default: bsel = ($clog2(BDEPTH))'(2*HID + 32'(o_cnt));
    endcase
  end

  // hidden activation
  trace_t hact;
  always_comb begin
    logic signed [31:0] sh;
    sh = acc >>> WFRAC;
    if (acc[31])                 hact = '0;
    else if (sh > 32'sd65535)    hact = '1;
    else                         hact = sh[15:0];
  end

  // Johnson-code reading of the ordinal output
  function automatic logic [BIN_W-1:0] ord_bin(logic [N_ORD-1:0] c);
    int n;
    n = 0;
    for (int b = N_ORD - 1; b >= 0; b--) begin
      if (c[b] == c[N_ORD-1] && n == (N_ORD - 1 - b)) n++;
    end
    if (c[N_ORD-1]) return BIN_W'(n);
    if (n == N_ORD) return '0;
    return BIN_W'(N_ORD + n);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; layer <= '0; i_cnt <= '0; n_cur <= '0; o_cnt <= '0; o_last <= '0;
      wptr <= '0; acc <= '0; mac_v <= 1'b0; best <= '0; best_i <= '0; code_r <= '0;
      bin <= '0; code <= '0; done <= 1'b0;
    end else begin
      done  <= 1'b0;
      mac_v <= (st == A_MAC);
      if (mac_v) acc <= acc + 32'(prod);
      case (st)
        A_IDLE: if (start) begin
          layer <= 2'd0; o_cnt <= '0; o_last <= 5'(HID - 1); n_cur <= n_in;
          i_cnt <= '0; wptr <= '0; acc <= bmem[0]; st <= A_MAC;
          best <= '0; best_i <= '0; code_r <= '0;
        end
        A_MAC: begin
          wptr <= wptr + 1'b1;
          if (i_cnt == n_cur - 1'b1) st <= A_WAIT;
          else i_cnt <= i_cnt + 1'b1;
        end
        A_WAIT: st <= A_FIN;          // last product accumulates
        A_FIN: begin
          // result of node o_cnt of layer `layer`
          if (layer == 2'd0)      act0[HW'(o_cnt)] <= hact;
          else if (layer == 2'd1) act1[HW'(o_cnt)] <= hact;
          else if (ord)           code_r[N_ORD - 1 - 32'(o_cnt)] <= (acc >= THRESH);
          else if (o_cnt == 0 || acc > best) begin best <= acc; best_i <= o_cnt; end
          i_cnt <= '0;
          st    <= A_MAC;
          if (o_cnt == o_last) begin
            o_cnt <= '0;
            if (layer == 2'd2) st <= A_DONE;
            else begin
              layer  <= layer + 1'b1;
              n_cur  <= (IW+1)'(HID);
              o_last <= (layer == 2'd1) ? (ord ? 5'(N_ORD - 1) : 5'(N_CAT - 1)) : 5'(HID - 1);
              acc    <= bmem[(layer == 2'd0) ? HID : 2*HID];
            end
          end else begin
            o_cnt <= o_cnt + 1'b1;
            acc   <= bmem[bsel + 1'b1];
          end
        end
        A_DONE: begin
          st   <= A_IDLE;
          done <= 1'b1;
          code <= code_r;
          bin  <= ord ? ord_bin(code_r) : best_i;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  assign busy = (st != A_IDLE);

endmodule
