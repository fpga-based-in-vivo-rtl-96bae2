// trace_ctrl: one half of the double-buffered ACC-Trace accelerator: a chain
// of JT tracing elements, its scan generator and the controller that runs the
// chain through Load, Compute and Store once per pass (paper, Sec. 3.1, 3.4).
//
// Per pass p (0 .. n_pass-1):
//  * Load: request the shared load path (ld_req / ld_gnt), clear the chain,
//    then for each of the K*N_C local addresses read JT words from the
//    contour store (TE JT-1 first) and shift them in; a commit after every
//    JT shifts stores them. K*N_C*JT + 3 cycles. The load path is released
//    when the last word is in, so the other half chain can load while this
//    one computes (Fig. 7(c)).
//  * Compute: scan_gen issues the pass's region with fast forward; the image
//    buffer returns each pixel one cycle later and it enters the chain with
//    its indices. After the last pixel, JT+4 cycles drain the chain.
//  * Store: for each slot k, capture then JT-1 shifts stream the traces out
//    of the chain end into the trace buffer (K*JT + 1 cycles).
// Contour id of slot k of TE t: ((p*2 + CHAIN)*JT + t)*K + k; the contour
// store and the trace buffer are addressed by it. `done` pulses after the
// last pass. The id layout, the handshake and the cycle counts are this
// design's choices; the three modes and their order follow the paper.
module trace_ctrl
  import decalcion_pkg::*;
#(
  parameter int JT         = J_TE / 2,
  parameter int K          = K_SLOT,
  parameter int CHAIN      = 0,
  parameter int MAX_PASSES = 4,
  parameter int NID        = MAX_CONTOURS,
  parameter int FF_DEPTH   = 1024,
  parameter int COLS       = IMG_COLS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [$clog2(MAX_PASSES):0] n_pass,
  output logic        busy,
  output logic        done,
  // pass descriptor of the current pass
  output logic [$clog2(MAX_PASSES)-1:0] pass_idx,
  input  pass_desc_t  desc,
  // shared load path to the contour store
  output logic        ld_req,
  input  logic        ld_gnt,
  output logic        cs_rd,
  output logic [$clog2(NID)-1:0] cs_id,
  output logic [$clog2(NC)-1:0]  cs_row,
  input  load_word_t  cs_word,
  // image buffer read port
  output logic        img_rd,
  output idx_t        img_row,
  output idx_t        img_col,
  input  pix_t        img_pix,
  // trace buffer write port
  output logic        tr_we,
  output logic [$clog2(NID)-1:0] tr_addr,
  output trace_t      tr_data,
  // fast-forward table write port
  input  logic        ff_we,
  input  logic [$clog2(FF_DEPTH)-1:0] ff_addr,
  input  ff_entry_t   ff_wdata,
  // activity, for measurement
  output trace_mode_e mode_o,
  output logic        ff_jump
);
  localparam int KW  = $clog2(K);
  localparam int TW  = $clog2(JT);
  localparam int IW  = $clog2(NID);
  localparam int RW  = $clog2(NC);
  localparam int PW  = $clog2(MAX_PASSES);
  localparam int DRAIN = JT + 4;

  typedef enum logic [3:0] {
    C_IDLE, C_REQ, C_CLEAR, C_LOAD, C_LFLUSH, C_SCAN_GO, C_SCAN, C_DRAIN, C_STORE, C_NEXT
  } cstate_e;
  cstate_e st;

  trace_mode_e mode;
  logic shift, commit, clear, capture;
  logic [KW-1:0] cap_slot;

  logic [PW-1:0] pass;
  logic [KW-1:0] k_cnt;
  logic [RW-1:0] row_cnt;
  logic [TW-1:0] s_cnt;      // position in the group of JT
  logic [$clog2(DRAIN+1)-1:0] drain_cnt;
  logic          rd_d;        // load read issued last cycle
  logic [TW:0]   sh_in_grp;   // shifts done in the current group
  logic          last_rd;

  // scan generator
  logic scan_start, sc_valid, sc_done;
  idx_t sc_row, sc_col;

  scan_gen #(.FF_DEPTH(FF_DEPTH), .COLS(COLS)) u_scan (
    .clk, .rst_n, .start(scan_start),
    .row_start(desc.row_start), .row_end(desc.row_end),
    .ff_base(desc.ff_base[$clog2(FF_DEPTH)-1:0]), .ff_count(desc.ff_count[$clog2(FF_DEPTH):0]),
    .idx_valid(sc_valid), .row(sc_row), .col(sc_col), .ff_jump, .busy(), .done(sc_done),
    .tab_we(ff_we), .tab_addr(ff_addr), .tab_wdata(ff_wdata)
  );

  // pixel arrives one cycle after the read
  logic px_valid;
  idx_t px_row, px_col;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin px_valid <= 1'b0; px_row <= '0; px_col <= '0; end
    else begin px_valid <= sc_valid; px_row <= sc_row; px_col <= sc_col; end
  end
  assign img_rd  = sc_valid;
  assign img_row = sc_row;
  assign img_col = sc_col;

  trace_t f_end;
  trace_chain #(.JT(JT), .K(K)) u_chain (
    .clk, .rst_n, .mode, .shift, .commit, .clear, .capture, .cap_slot,
    .pv_in(px_valid), .r_in(px_row), .c_in(px_col), .v_in(img_pix),
    .q_in(cs_word), .f_out(f_end)
  );

  // ---------------- load read sequencing ----------------
  // read address for (k_cnt, row_cnt, TE JT-1-s_cnt)
  logic [TW-1:0] ld_te;
  assign ld_te  = TW'(JT - 1) - s_cnt;
  assign cs_rd  = (st == C_LOAD);
  assign cs_row = row_cnt;
  assign cs_id  = IW'((((32'(pass) * 2 + CHAIN) * JT + 32'(ld_te)) * K) + 32'(k_cnt));
  assign last_rd = (k_cnt == KW'(K - 1)) && (row_cnt == RW'(NC - 1)) && (s_cnt == TW'(JT - 1));
  assign ld_req = (st == C_REQ) || (st == C_CLEAR) || (st == C_LOAD) || (st == C_LFLUSH);

  // ---------------- store sequencing ----------------
  logic [TW:0]   st_t;        // 0..JT-1 within slot
  logic [KW:0]   st_k;        // slot being captured (K = final flush)
  logic          st_wr;       // a value is visible at the chain end
  logic [TW-1:0] st_te_q;
  logic [KW-1:0] st_k_q;

  always_comb begin
    mode = TM_IDLE; shift = 1'b0; commit = 1'b0; clear = 1'b0; capture = 1'b0;
    cap_slot = st_k[KW-1:0];
    scan_start = 1'b0;
    case (st)
      C_CLEAR:  begin mode = TM_LOAD; clear = 1'b1; end
      C_LOAD, C_LFLUSH: begin
        mode   = TM_LOAD;
        shift  = rd_d;
        commit = (sh_in_grp == (TW+1)'(JT));
      end
      C_SCAN_GO: begin mode = TM_COMPUTE; scan_start = 1'b1; end
      C_SCAN, C_DRAIN: mode = TM_COMPUTE;
      C_STORE: begin
        mode    = TM_STORE;
        capture = (st_t == 0) && (st_k != (KW+1)'(K));
        shift   = (st_t != 0);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; pass <= '0; k_cnt <= '0; row_cnt <= '0; s_cnt <= '0; rd_d <= 1'b0;
      sh_in_grp <= '0; drain_cnt <= '0; st_t <= '0; st_k <= '0; st_wr <= 1'b0;
      st_te_q <= '0; st_k_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      rd_d <= cs_rd;
      // shift/commit bookkeeping during load
      if (st == C_LOAD || st == C_LFLUSH) begin
        if (commit) sh_in_grp <= (TW+1)'(shift);
        else if (shift) sh_in_grp <= sh_in_grp + 1'b1;
      end else begin
        sh_in_grp <= '0;
      end
      case (st)
        C_IDLE: if (start && n_pass != 0) begin pass <= '0; st <= C_REQ; end
        C_REQ:  if (ld_gnt) st <= C_CLEAR;
        C_CLEAR: begin k_cnt <= '0; row_cnt <= '0; s_cnt <= '0; st <= C_LOAD; end
        C_LOAD: begin
          if (last_rd) st <= C_LFLUSH;
          if (s_cnt == TW'(JT - 1)) begin
            s_cnt <= '0;
            if (row_cnt == RW'(NC - 1)) begin row_cnt <= '0; k_cnt <= k_cnt + 1'b1; end
            else row_cnt <= row_cnt + 1'b1;
          end else begin
            s_cnt <= s_cnt + 1'b1;
          end
        end
        // last word shifting in, then the last commit
        C_LFLUSH: if (commit && !shift) st <= C_SCAN_GO;
        C_SCAN_GO: st <= C_SCAN;
        C_SCAN: if (sc_done) begin drain_cnt <= '0; st <= C_DRAIN; end
        C_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == ($clog2(DRAIN+1))'(DRAIN - 1)) begin
            st <= C_STORE; st_t <= '0; st_k <= '0;
          end
        end
        C_STORE: begin
          if (st_t == (TW+1)'(JT - 1) || st_k == (KW+1)'(K)) begin
            st_t <= '0;
            if (st_k == (KW+1)'(K)) st <= C_NEXT;
            st_k <= st_k + 1'b1;
          end else begin
            st_t <= st_t + 1'b1;
          end
        end
        C_NEXT: begin
          if (32'(pass) + 1 < 32'(n_pass)) begin pass <= pass + 1'b1; st <= C_REQ; end
          else begin st <= C_IDLE; done <= 1'b1; end
        end
        default: st <= C_IDLE;
      endcase
      // value at the chain end after a capture (TE JT-1) or shift (lower TEs)
      st_wr <= (st == C_STORE) && (capture || shift);
      if (st == C_STORE && capture) begin st_te_q <= TW'(JT - 1); st_k_q <= st_k[KW-1:0]; end
      else if (st == C_STORE && shift) st_te_q <= st_te_q - 1'b1;
    end
  end

  assign tr_we   = st_wr;
  assign tr_addr = IW'((((32'(pass) * 2 + CHAIN) * JT + 32'(st_te_q)) * K) + 32'(st_k_q));
  assign tr_data = f_end;

  assign busy     = (st != C_IDLE);
  assign pass_idx = pass;
  assign mode_o   = mode;

endmodule
