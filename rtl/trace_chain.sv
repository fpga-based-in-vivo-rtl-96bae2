// trace_chain: a 1-D systolic chain of JT tracing elements (paper, Fig. 4).
//
// The index/pixel chain, the contour (load) chain and the trace (store) chain
// of TE t feed TE t+1. Control signals (mode, shift, commit, clear, capture)
// are common to all TEs. A pixel entering at cycle n is seen by TE t at cycle
// n+t+1; its contribution is in TE t's accumulator two cycles later, so the
// chain needs JT+3 cycles to drain after the last pixel.
// Load: the word for TE JT-1 is shifted in first; after JT shifts every TE
// holds its own word and `commit` stores it. Store: after `capture` the chain
// end shows TE JT-1's trace, and each `shift` brings the next lower TE's.
// In the double-buffered configuration a chain has J/2 = 16 TEs.
module trace_chain
  import decalcion_pkg::*;
#(
  parameter int JT = J_TE / 2,
  parameter int K  = K_SLOT
) (
  input  logic          clk,
  input  logic          rst_n,
  input  trace_mode_e   mode,
  input  logic          shift,
  input  logic          commit,
  input  logic          clear,
  input  logic          capture,
  input  logic [$clog2(K)-1:0] cap_slot,
  input  logic          pv_in,
  input  idx_t          r_in,
  input  idx_t          c_in,
  input  pix_t          v_in,
  input  load_word_t    q_in,
  output trace_t        f_out
);
  logic       pv [JT+1];
  idx_t       r  [JT+1];
  idx_t       c  [JT+1];
  pix_t       v  [JT+1];
  load_word_t q  [JT+1];
  trace_t     f  [JT+1];

  assign pv[0] = pv_in;
  assign r[0]  = r_in;
  assign c[0]  = c_in;
  assign v[0]  = v_in;
  assign q[0]  = q_in;
  assign f[0]  = '0;

  for (genvar t = 0; t < JT; t++) begin : g_te
    trace_element #(.K(K)) u_te (
      .clk, .rst_n, .mode, .shift, .commit, .clear, .capture, .cap_slot,
      .pv_in (pv[t]),   .r_in (r[t]),   .c_in (c[t]),   .v_in (v[t]),
      .pv_out(pv[t+1]), .r_out(r[t+1]), .c_out(c[t+1]), .v_out(v[t+1]),
      .q_in  (q[t]),    .q_out(q[t+1]),
      .f_in  (f[t]),    .f_out(f[t+1])
    );
  end

  assign f_out = f[JT];

endmodule
