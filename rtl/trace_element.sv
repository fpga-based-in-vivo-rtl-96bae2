// trace_element: one tracing element (TE) of the ACC-Trace systolic chain.
//
// A TE holds K contours. For each slot k it keeps the contour centre (R_k, C_k)
// in registers, a 16-bit trace accumulator f_k, and the N_C x N_C binary mask
// Q_k in a local memory with a single read port (K*N_C rows of N_C bits). The
// index/pixel chain (r, c, v), the contour chain and the trace chain each pass
// through one register per TE, so a whole chain of TEs sees every pixel, one
// TE per cycle later than the previous one (paper, Fig. 4).
//
// Modes (paper: Load, Compute, Store):
//  * TM_LOAD: every `shift` moves the load word (valid, R, C, one mask row)
//    one TE on; `commit` writes the word now held by this TE into the next
//    local address (row counter inside the TE), and the centre into slot
//    k = address / N_C. `clear` resets the local address counter and the
//    accumulators.
//  * TM_COMPUTE: for the pixel in this TE's r/c/v registers, the comparators
//    compute dr = r - R_k + N_C/2, dc = c - C_k + N_C/2 for all slots (Eq. 2);
//    the slot whose window holds (dr, dc) addresses mask row k*N_C + dr. The
//    row is read in the next cycle, bit dc gates the pixel, and the pixel is
//    added to f_k one cycle after that (Eq. 1). Latency 2 cycles.
//    Slots in one TE must not have overlapping windows (the offline allocation
//    guarantees it); if they do, the lowest slot wins.
//  * TM_STORE: `capture` copies f_k (k = cap_slot) into the trace chain
//    register; `shift` moves the trace chain one TE on.
// The mask layout, the commit/capture pulses, the 2-cycle pipeline and the
// saturation of f_k at 0xFFFF are this design's choices.
module trace_element
  import decalcion_pkg::*;
#(
  parameter int K  = K_SLOT,
  parameter int NC_P = NC
) (
  input  logic          clk,
  input  logic          rst_n,
  input  trace_mode_e   mode,
  input  logic          shift,       // load / store: advance the chains
  input  logic          commit,      // load: write the held word locally
  input  logic          clear,       // clear accumulators and load counter
  input  logic          capture,     // store: f_chain <= f[cap_slot]
  input  logic [$clog2(K)-1:0] cap_slot,
  // compute chain
  input  logic          pv_in,
  input  idx_t          r_in,
  input  idx_t          c_in,
  input  pix_t          v_in,
  output logic          pv_out,
  output idx_t          r_out,
  output idx_t          c_out,
  output pix_t          v_out,
  // contour (load) chain
  input  load_word_t    q_in,
  output load_word_t    q_out,
  // trace (store) chain
  input  trace_t        f_in,
  output trace_t        f_out
);
  localparam int HALF = NC_P / 2;
  localparam int DEPTH = K * NC_P;
  localparam int AW = $clog2(DEPTH);
  localparam int KW = $clog2(K);
  localparam int DW = $clog2(NC_P);

  // chain registers (r_i, c_i, v_i, contour value, f_i of Fig. 4)
  logic       pv_q;
  idx_t       r_q, c_q;
  pix_t       v_q;
  load_word_t lw_q;
  trace_t     fch_q;

  // local register files and mask memory
  idx_t            rr   [K];
  idx_t            cc   [K];
  logic [K-1:0]    sval;
  trace_t          facc [K];
  logic [NC_P-1:0] qmem [DEPTH];

  // load counters
  logic [KW-1:0] ld_k;
  logic [DW-1:0] ld_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pv_q <= 1'b0; r_q <= '0; c_q <= '0; v_q <= '0;
    end else if (mode == TM_COMPUTE) begin
      pv_q <= pv_in; r_q <= r_in; c_q <= c_in; v_q <= v_in;
    end else begin
      pv_q <= 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lw_q <= '0;
    else if (mode == TM_LOAD && shift) lw_q <= q_in;
  end

  // ---------------- load: commit into local storage ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_k <= '0; ld_row <= '0; sval <= '0;
      for (int k = 0; k < K; k++) begin rr[k] <= '0; cc[k] <= '0; end
    end else if (clear) begin
      ld_k <= '0; ld_row <= '0;
    end else if (mode == TM_LOAD && commit) begin
      rr[ld_k]   <= lw_q.r;
      cc[ld_k]   <= lw_q.c;
      sval[ld_k] <= lw_q.valid;
      if (ld_row == DW'(NC_P - 1)) begin
        ld_row <= '0;
        ld_k   <= ld_k + 1'b1;
      end else begin
        ld_row <= ld_row + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (mode == TM_LOAD && commit && !clear)
      qmem[AW'(ld_k) * AW'(NC_P) + AW'(ld_row)] <= lw_q.row;
  end

  // ---------------- compute: Comp / Addr ----------------
  logic          hit;
  logic [KW-1:0] hit_k;
  logic [DW-1:0] hit_dr, hit_dc;

  always_comb begin
    hit = 1'b0; hit_k = '0; hit_dr = '0; hit_dc = '0;
    for (int k = K - 1; k >= 0; k--) begin
      logic signed [IDX_W+1:0] dr, dc;
      dr = $signed({2'b00, r_q}) - $signed({2'b00, rr[k]}) + (IDX_W+2)'(HALF);
      dc = $signed({2'b00, c_q}) - $signed({2'b00, cc[k]}) + (IDX_W+2)'(HALF);
      if (sval[k] && dr >= 0 && dr < $signed((IDX_W+2)'(NC_P)) && dc >= 0 && dc < $signed((IDX_W+2)'(NC_P))) begin
        hit = 1'b1; hit_k = KW'(k); hit_dr = DW'(dr); hit_dc = DW'(dc);
      end
    end
  end

  // stage 1: mask row read (single read port)
  logic            s1_hit;
  logic [KW-1:0]   s1_k;
  logic [DW-1:0]   s1_dc;
  pix_t            s1_v;
  logic [NC_P-1:0] s1_row;

  always_ff @(posedge clk) begin
    s1_row <= qmem[AW'(hit_k) * AW'(NC_P) + AW'(hit_dr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_hit <= 1'b0; s1_k <= '0; s1_dc <= '0; s1_v <= '0;
    end else begin
      s1_hit <= (mode == TM_COMPUTE) && pv_q && hit;
      s1_k   <= hit_k;
      s1_dc  <= hit_dc;
      s1_v   <= v_q;
    end
  end

  // stage 2: '&' and Acc
  logic mask_bit;
  assign mask_bit = s1_row[s1_dc];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < K; k++) facc[k] <= '0;
    end else if (clear) begin
      for (int k = 0; k < K; k++) facc[k] <= '0;
    end else if (s1_hit && mask_bit) begin
      logic [TRACE_W:0] sum;
      sum = {1'b0, facc[s1_k]} + {{(TRACE_W-PIX_W+1){1'b0}}, s1_v};
      facc[s1_k] <= sum[TRACE_W] ? '1 : sum[TRACE_W-1:0];
    end
  end

  // ---------------- store: trace chain ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fch_q <= '0;
    else if (mode == TM_STORE && capture) fch_q <= facc[cap_slot];
    else if (mode == TM_STORE && shift)   fch_q <= f_in;
  end

  assign pv_out = pv_q;
  assign r_out  = r_q;
  assign c_out  = c_q;
  assign v_out  = v_q;
  assign q_out  = lw_q;
  assign f_out  = fch_q;

endmodule
