// decalcion_top: real-time calcium image processing and decoding pipeline for
// closed-loop feedback (paper, Fig. 2 and Fig. 3).
//
// Data path: sensor_rx turns the miniscope sensor bus into a pixel stream
// (raw_* ports). Motion correction and enhancement are outside this design:
// their output comes back on the enh_* ports and is written to the
// image_buffer, and their motion vector (mv_r_off, mv_c_off) shifts every
// read of the buffer. When the enhanced frame ends (enh_frame_end) and
// decoding is enabled, the sequencer starts ACC-Trace (acc_trace), which
// writes one 16-bit trace per contour or tile into the trace_buffer; then it
// starts ACC-Decode, which reads the traces and gives the position bin on
// dec_bin with a one-cycle dec_valid. ACC-Decode is one of three decoders
// chosen by CFG_DEC_SEL: ann_decoder (default), cnn_decoder or snn_decoder;
// the CNN and SNN share one parameter region (HR_CW) and read the traces as
// an N_P x N_P image (CFG_DEC_NP), the SNN with CFG_SNN_TS steps and
// threshold CFG_SNN_VT. latency_cycles is the
// number of core cycles from enh_frame_end to dec_valid (the "Latency" of
// Fig. 3). A frame that ends while the previous one is still being processed
// is not processed; frame_overruns counts such frames.
// Configuration comes from the embedded processor over a simple write bus
// (host_we/host_sel/host_addr/host_wdata, regions in decalcion_pkg); the host
// reads traces back through trace_rd_addr/trace_rd_data (one cycle latency).
// trace_mode / trace_ff_jump / trace_loading show, per half chain, the
// tracer mode, a one-cycle pulse per fast forward and the cycles it holds the
// load path, for monitoring.
// The bus, the sequencing rule and the overrun counter are this design's
// choices; the order of stages follows the paper.
module decalcion_top
  import decalcion_pkg::*;
#(
  parameter int J          = J_TE,
  parameter int K          = K_SLOT,
  parameter int ROWS       = IMG_ROWS,
  parameter int COLS       = IMG_COLS,
  parameter int MAX_PASSES = 4,
  parameter int NID        = MAX_CONTOURS,
  parameter int FF_DEPTH   = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  // sensor bus
  input  logic        sen_pclk,
  input  logic [7:0]  sen_data,
  input  logic        sen_hsync,
  input  logic        sen_vsync,
  // raw pixel stream to motion correction / enhancement
  output logic        raw_valid,
  output logic [8:0]  raw_row,
  output logic [8:0]  raw_col,
  output logic [7:0]  raw_pix,
  output logic        raw_frame_end,
  // enhanced pixel stream and motion vector back
  input  logic        enh_valid,
  input  logic [8:0]  enh_row,
  input  logic [8:0]  enh_col,
  input  logic [7:0]  enh_pix,
  input  logic        enh_frame_end,
  input  logic signed [9:0] mv_r_off,
  input  logic signed [9:0] mv_c_off,
  // host bus
  input  logic        host_we,
  input  logic [2:0]  host_sel,
  input  logic [19:0] host_addr,
  input  logic [63:0] host_wdata,
  input  logic [$clog2(NID)-1:0] trace_rd_addr,
  output logic [15:0] trace_rd_data,
  // results
  output logic        dec_valid,
  output logic [4:0]  dec_bin,
  output logic [11:0] dec_code,
  output logic [31:0] latency_cycles,
  output logic [15:0] frames_done,
  output logic [15:0] frame_overruns,
  output logic        busy,
  // tracer status, per half chain: mode, fast forward taken, load path held
  output trace_mode_e trace_mode [2],
  output logic [1:0]  trace_ff_jump,
  output logic [1:0]  trace_loading
);
  localparam int IW = $clog2(NID);

  // ---------------- configuration registers ----------------
  logic [$clog2(MAX_PASSES):0] cfg_npass;
  logic        cfg_enable;
  logic [IW:0] cfg_nin;
  logic        cfg_ord;
  logic [1:0]  cfg_sel;
  logic [5:0]  cfg_np, cfg_ts;
  logic signed [31:0] cfg_vt;
  host_region_e hsel;
  assign hsel = host_region_e'(host_sel);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_npass <= '0; cfg_enable <= 1'b0; cfg_nin <= '0; cfg_ord <= 1'b1;
      cfg_sel <= '0; cfg_np <= 6'd16; cfg_ts <= 6'd8; cfg_vt <= 32'sd4194304;
    end else if (host_we && hsel == HR_CFG) begin
      case (host_addr[15:0])
        CFG_NPASS:   cfg_npass  <= host_wdata[$clog2(MAX_PASSES):0];
        CFG_ENABLE:  cfg_enable <= host_wdata[0];
        CFG_DEC_NIN: cfg_nin    <= host_wdata[IW:0];
        CFG_DEC_ORD: cfg_ord    <= host_wdata[0];
        CFG_DEC_SEL: cfg_sel    <= host_wdata[1:0];
        CFG_DEC_NP:  cfg_np     <= host_wdata[5:0];
        CFG_SNN_TS:  cfg_ts     <= host_wdata[5:0];
        CFG_SNN_VT:  cfg_vt     <= host_wdata[31:0];
        default: ;
      endcase
    end
  end

  // ---------------- sensor capture ----------------
  sensor_rx #(.ROWS(ROWS), .COLS(COLS)) u_rx (
    .clk, .rst_n, .sen_pclk, .sen_data, .sen_hsync, .sen_vsync,
    .pix_valid(raw_valid), .pix_row(raw_row), .pix_col(raw_col), .pix_val(raw_pix),
    .frame_end(raw_frame_end)
  );

  // ---------------- image buffer ----------------
  logic [1:0] img_rd;
  idx_t       img_row [2];
  idx_t       img_col [2];
  pix_t       img_pix [2];

  image_buffer #(.ROWS(ROWS), .COLS(COLS), .NPORTS(2)) u_img (
    .clk, .wr_en(enh_valid), .wr_row(enh_row), .wr_col(enh_col), .wr_pix(enh_pix),
    .r_off(mv_r_off), .c_off(mv_c_off),
    .rd_en(img_rd), .rd_row(img_row), .rd_col(img_col), .rd_pix(img_pix)
  );

  // ---------------- ACC-Trace ----------------
  logic          tr_start, tr_done, tr_busy;
  logic [1:0]    tr_we;
  logic [IW-1:0] tr_addr [2];
  trace_t        tr_data [2];
  trace_mode_e   tr_mode [2];
  logic [1:0]    ff_jump, ld_active;

  acc_trace #(.J(J), .K(K), .MAX_PASSES(MAX_PASSES), .NID(NID), .FF_DEPTH(FF_DEPTH), .COLS(COLS)) u_trace (
    .clk, .rst_n, .start(tr_start), .n_pass(cfg_npass), .busy(tr_busy), .done(tr_done),
    .host_we, .host_sel(hsel), .host_addr(host_addr[15:0]), .host_wdata,
    .img_rd, .img_row, .img_col, .img_pix,
    .tr_we, .tr_addr, .tr_data, .mode(tr_mode), .ff_jump, .ld_active
  );
  assign trace_mode    = tr_mode;
  assign trace_ff_jump = ff_jump;
  assign trace_loading = ld_active;

  // ---------------- trace buffer ----------------
  logic [IW-1:0] x_addr;
  trace_t        x_data;
  trace_buffer #(.DEPTH(NID)) u_tbuf (
    .clk, .we(tr_we), .waddr(tr_addr), .wdata(tr_data),
    .raddr_a(x_addr), .rdata_a(x_data), .raddr_b(trace_rd_addr), .rdata_b(trace_rd_data)
  );

  // ---------------- ACC-Decode: ANN, CNN or SNN (CFG_DEC_SEL) ----------------
  logic dec_start, dec_done, dec_busy;
  logic [4:0]  bin, ann_bin, cnn_bin, snn_bin;
  logic [11:0] code;
  logic [IW-1:0] ann_x, cnn_x, snn_x;
  logic ann_done, cnn_done, snn_done, ann_busy, cnn_busy, snn_busy;
  logic cw_we, cs_we;
  assign cw_we = host_we && hsel == HR_CW && !host_addr[19];
  assign cs_we = host_we && hsel == HR_CW &&  host_addr[19];

  ann_decoder #(.MAX_IN(NID)) u_dec (
    .clk, .rst_n, .start(dec_start && cfg_sel == 2'd0), .n_in(cfg_nin), .ord(cfg_ord),
    .busy(ann_busy), .done(ann_done), .bin(ann_bin), .code(code),
    .x_addr(ann_x), .x_data,
    .w_we(host_we && hsel == HR_W), .w_addr(host_addr[15:0]), .w_wdata(host_wdata[7:0]),
    .b_we(host_we && hsel == HR_B), .b_addr(host_addr[6:0]), .b_wdata(host_wdata[31:0])
  );
  cnn_decoder #(.MAX_IN(NID)) u_cnn (
    .clk, .rst_n, .start(dec_start && cfg_sel == 2'd1), .np(cfg_np),
    .busy(cnn_busy), .done(cnn_done), .bin(cnn_bin), .x_addr(cnn_x), .x_data,
    .w_we(cw_we), .w_addr(host_addr[16:0]), .w_wdata(host_wdata[7:0]),
    .s_we(cs_we), .s_addr(host_addr[6:0]), .s_wdata(host_wdata[31:0])
  );
  snn_decoder #(.MAX_IN(NID)) u_snn (
    .clk, .rst_n, .start(dec_start && cfg_sel == 2'd2), .np(cfg_np), .ts(cfg_ts), .vt(cfg_vt),
    .busy(snn_busy), .done(snn_done), .bin(snn_bin), .x_addr(snn_x), .x_data,
    .w_we(cw_we), .w_addr(host_addr[16:0]), .w_wdata(host_wdata[7:0]),
    .s_we(cs_we), .s_addr(host_addr[6:0]), .s_wdata(host_wdata[31:0])
  );
  assign x_addr   = (cfg_sel == 2'd1) ? cnn_x : (cfg_sel == 2'd2) ? snn_x : ann_x;
  assign bin      = (cfg_sel == 2'd1) ? cnn_bin : (cfg_sel == 2'd2) ? snn_bin : ann_bin;
  assign dec_done = ann_done | cnn_done | snn_done;
  assign dec_busy = ann_busy | cnn_busy | snn_busy;

  // ---------------- frame sequencer ----------------
  typedef enum logic [1:0] {F_IDLE, F_TRACE, F_DECODE} fstate_e;
  fstate_e fst;
  logic [31:0] lat_cnt;

  assign tr_start  = (fst == F_IDLE) && enh_frame_end && cfg_enable;
  assign dec_start = (fst == F_TRACE) && tr_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst <= F_IDLE; lat_cnt <= '0; latency_cycles <= '0; frames_done <= '0;
      frame_overruns <= '0; dec_valid <= 1'b0; dec_bin <= '0; dec_code <= '0;
    end else begin
      dec_valid <= 1'b0;
      lat_cnt   <= lat_cnt + 1'b1;
      if (enh_frame_end && fst != F_IDLE) frame_overruns <= frame_overruns + 1'b1;
      case (fst)
        F_IDLE:   if (tr_start) begin fst <= F_TRACE; lat_cnt <= 32'd1; end
        F_TRACE:  if (tr_done) fst <= F_DECODE;
        F_DECODE: if (dec_done) begin
          fst            <= F_IDLE;
          dec_valid      <= 1'b1;
          dec_bin        <= bin;
          dec_code       <= (cfg_sel == 2'd0 && cfg_ord) ? code : '0;
          latency_cycles <= lat_cnt;
          frames_done    <= frames_done + 1'b1;
        end
        default: fst <= F_IDLE;
      endcase
    end
  end

  assign busy = (fst != F_IDLE) || tr_busy || dec_busy;

endmodule
