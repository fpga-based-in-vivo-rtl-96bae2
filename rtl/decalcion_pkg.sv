// decalcion_pkg: constants and types shared by the real-time calcium image
// pipeline. Image geometry (512 x 512, 8-bit pixels, 9-bit indices), the 16-bit
// trace width, the N_C = 25 contour window, the tracing-element count J = 32
// and slots per element K = 8 follow the paper. The host-bus regions, the
// contour-store word layout and the table-entry formats are this design's own.
package decalcion_pkg;

  localparam int IMG_ROWS = 512;
  localparam int IMG_COLS = 512;
  localparam int PIX_W    = 8;
  localparam int IDX_W    = 9;
  localparam int TRACE_W  = 16;
  localparam int NC       = 25;   // contour window edge (pixels)
  localparam int NT       = 16;   // tile edge (pixels)
  localparam int J_TE     = 32;   // tracing elements in total (two half chains)
  localparam int K_SLOT   = 8;    // contours per tracing element
  localparam int MAX_CONTOURS = 1024;
  localparam int N_BINS   = 24;   // position bins on the linear track
  localparam int BIN_W    = 5;

  typedef logic [IDX_W-1:0]   idx_t;
  typedef logic [PIX_W-1:0]   pix_t;
  typedef logic [TRACE_W-1:0] trace_t;

  // Operating mode of the tracer chain (paper: Load, Compute, Store).
  typedef enum logic [1:0] {
    TM_IDLE    = 2'd0,
    TM_LOAD    = 2'd1,
    TM_COMPUTE = 2'd2,
    TM_STORE   = 2'd3
  } trace_mode_e;

  // Word travelling on the contour chain during Load: slot valid flag, centre
  // (R, C) on the index chain and one N_C-bit mask row on the contour chain.
  typedef struct packed {
    logic          valid;
    idx_t          r;
    idx_t          c;
    logic [NC-1:0] row;
  } load_word_t;

  // Fast-forward table entry: first background pixel of a segment (target)
  // and first pixel after it (forward).
  typedef struct packed {
    idx_t tr;
    idx_t tc;
    idx_t fr;
    idx_t fc;
  } ff_entry_t;

  // Per-pass descriptor of one half chain (region segmentation + fast forward).
  typedef struct packed {
    idx_t       row_start;
    idx_t       row_end;
    logic [9:0] ff_base;
    logic [10:0] ff_count;
  } pass_desc_t;

  // Host (ARM) write bus regions.
  typedef enum logic [2:0] {
    HR_CFG     = 3'd0,  // configuration registers
    HR_CMASK   = 3'd1,  // contour mask rows:   addr = id*NC + row, wdata[NC-1:0]
    HR_CCENTER = 3'd2,  // contour centres:     addr = id, wdata = {valid, R, C}
    HR_PASS    = 3'd3,  // pass descriptors:    addr = pass*2 + chain
    HR_FF      = 3'd4,  // fast-forward tables: addr[11] = chain, addr[9:0] = entry
    HR_W       = 3'd5,  // decoder weights
    HR_B       = 3'd6,  // decoder biases
    HR_CW      = 3'd7   // CNN/SNN parameters: addr[19] = 0: fully connected weight
                        // addr[16:0]; addr[19] = 1: small table entry addr[6:0]
  } host_region_e;

  // Configuration register addresses (region HR_CFG).
  localparam logic [15:0] CFG_NPASS   = 16'd0;  // passes per half chain
  localparam logic [15:0] CFG_ENABLE  = 16'd1;  // bit0: start on every frame end
  localparam logic [15:0] CFG_DEC_NIN = 16'd2;  // decoder inputs
  localparam logic [15:0] CFG_DEC_ORD = 16'd3;  // 1: ordinal output, 0: categorical
  localparam logic [15:0] CFG_DEC_SEL = 16'd4;  // decoder: 0 ANN, 1 CNN, 2 SNN
  localparam logic [15:0] CFG_DEC_NP  = 16'd5;  // CNN/SNN input image side N_P
  localparam logic [15:0] CFG_SNN_TS  = 16'd6;  // SNN time steps T_S
  localparam logic [15:0] CFG_SNN_VT  = 16'd7;  // SNN threshold V_t

endpackage
