// acc_trace: the ACC-Trace trace-extraction accelerator (paper, Sec. 3).
//
// J tracing elements are split into two half chains of J/2 (double buffering,
// Fig. 7(c)), each run by a trace_ctrl with its own scan generator and
// fast-forward table (Fig. 7(b)) and its own image-buffer read port. The
// contour store (centre + valid flag and N_C mask rows per contour id) has one
// read port, the shared load path: an arbiter gives it to one half chain for a
// whole load phase, so while one half computes the other loads. Each half
// runs n_pass passes; the descriptor of pass p of half h
// ({row_start, row_end, ff_base, ff_count}, region segmentation, Fig. 7(a))
// sits at index p*2+h. Traces go to the trace buffer through two write ports.
// `start` launches both halves; `done` pulses when both have finished.
// The host writes contours, descriptors and fast-forward tables through the
// host bus (regions HR_CMASK, HR_CCENTER, HR_PASS, HR_FF of decalcion_pkg)
// while the accelerator is idle. Arbitration (chain 0 first when both ask)
// and the memory layouts are this design's choices.
module acc_trace
  import decalcion_pkg::*;
#(
  parameter int J          = J_TE,
  parameter int K          = K_SLOT,
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
  // host bus
  input  logic        host_we,
  input  host_region_e host_sel,
  input  logic [15:0] host_addr,
  input  logic [63:0] host_wdata,
  // image buffer read ports (one per half chain)
  output logic [1:0]  img_rd,
  output idx_t        img_row [2],
  output idx_t        img_col [2],
  input  pix_t        img_pix [2],
  // trace buffer write ports
  output logic [1:0]  tr_we,
  output logic [$clog2(NID)-1:0] tr_addr [2],
  output trace_t      tr_data [2],
  // activity
  output trace_mode_e mode [2],
  output logic [1:0]  ff_jump,
  output logic [1:0]  ld_active
);
  localparam int IW = $clog2(NID);
  localparam int RW = $clog2(NC);
  localparam int PW = $clog2(MAX_PASSES);
  localparam int FW = $clog2(FF_DEPTH);

  // ---------------- contour store and descriptors ----------------
  typedef struct packed { logic valid; idx_t r; idx_t c; } center_t;
  center_t       ctr   [NID];
  logic [NC-1:0] cmask [NID * NC];
  pass_desc_t    pdesc [MAX_PASSES * 2];

  always_ff @(posedge clk) begin
    if (host_we && host_sel == HR_CMASK && 32'(host_addr) < NID * NC)
      cmask[host_addr[$clog2(NID*NC)-1:0]] <= host_wdata[NC-1:0];
    if (host_we && host_sel == HR_CCENTER && 32'(host_addr) < NID)
      ctr[host_addr[IW-1:0]] <= host_wdata[2*IDX_W:0];
    if (host_we && host_sel == HR_PASS && 32'(host_addr) < MAX_PASSES * 2)
      pdesc[host_addr[PW:0]] <= host_wdata[$bits(pass_desc_t)-1:0];
  end

  // ---------------- load-path arbiter ----------------
  logic [1:0] ld_req, ld_gnt;
  logic       owner, owned;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin owned <= 1'b0; owner <= 1'b0; end
    else if (owned) begin
      if (!ld_req[owner]) owned <= 1'b0;
    end else if (ld_req[0]) begin owned <= 1'b1; owner <= 1'b0; end
    else if (ld_req[1]) begin owned <= 1'b1; owner <= 1'b1; end
  end
  assign ld_gnt[0] = owned && (owner == 1'b0);
  assign ld_gnt[1] = owned && (owner == 1'b1);
  assign ld_active = ld_gnt;

  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n) !(ld_gnt[0] && ld_gnt[1]));

  // shared read port
  logic [1:0]       cs_rd;
  logic [IW-1:0]    cs_id  [2];
  logic [RW-1:0]    cs_row [2];
  load_word_t       cs_word;
  always_ff @(posedge clk) begin
    logic [IW-1:0] id;
    logic [RW-1:0] rw;
    id = owner ? cs_id[1] : cs_id[0];
    rw = owner ? cs_row[1] : cs_row[0];
    cs_word.valid <= ctr[id].valid;
    cs_word.r     <= ctr[id].r;
    cs_word.c     <= ctr[id].c;
    cs_word.row   <= cmask[32'(id) * NC + 32'(rw)];
  end

  // ---------------- the two half chains ----------------
  logic [1:0] h_done, h_busy, h_fin;
  for (genvar h = 0; h < 2; h++) begin : g_half
    logic [PW-1:0] pidx;
    logic ff_we;
    assign ff_we = host_we && host_sel == HR_FF && host_addr[11] == 1'(h);
    trace_ctrl #(.JT(J/2), .K(K), .CHAIN(h), .MAX_PASSES(MAX_PASSES), .NID(NID),
                 .FF_DEPTH(FF_DEPTH), .COLS(COLS)) u_ctrl (
      .clk, .rst_n, .start, .n_pass, .busy(h_busy[h]), .done(h_done[h]),
      .pass_idx(pidx), .desc(pdesc[2*pidx + h]),
      .ld_req(ld_req[h]), .ld_gnt(ld_gnt[h]),
      .cs_rd(cs_rd[h]), .cs_id(cs_id[h]), .cs_row(cs_row[h]), .cs_word,
      .img_rd(img_rd[h]), .img_row(img_row[h]), .img_col(img_col[h]), .img_pix(img_pix[h]),
      .tr_we(tr_we[h]), .tr_addr(tr_addr[h]), .tr_data(tr_data[h]),
      .ff_we, .ff_addr(host_addr[FW-1:0]), .ff_wdata(host_wdata[$bits(ff_entry_t)-1:0]),
      .mode_o(mode[h]), .ff_jump(ff_jump[h])
    );
  end

  // reads only by the owner of the load path
  a_rd_owner0: assert property (@(posedge clk) disable iff (!rst_n) cs_rd[0] |-> ld_gnt[0]);
  a_rd_owner1: assert property (@(posedge clk) disable iff (!rst_n) cs_rd[1] |-> ld_gnt[1]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) h_fin <= '0;
    else if (start) h_fin <= '0;
    else h_fin <= h_fin | h_done;
  end
  assign done = (h_fin | h_done) == 2'b11 && (h_fin != 2'b11);
  assign busy = |h_busy;

endmodule
