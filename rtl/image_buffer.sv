// image_buffer: on-chip frame buffer between the pixel stream and the tracer
// chains, with the motion-vector address generator of Fig. 7(b).
//
// One write port takes the (motion-corrected, enhanced) pixel stream at its
// (row, column). NPORTS read ports serve the tracer chains: each read of
// scanned index (r, c) returns the pixel at (r + r_off, c + c_off), or 0 when
// that lies outside the frame. Reads are registered: rd_pix is valid the cycle
// after rd_en. One frame (ROWS x COLS bytes) is held; the next frame's pixels
// overwrite it as they arrive, so trace extraction must finish within the
// sensor's vertical blanking. Two read ports (one per half chain), the single
// bank and the clipping rule are this design's choices; the paper only shows
// "Motion Vector (r_off, c_off) -> Addr Gen -> Image Buffer".
module image_buffer
  import decalcion_pkg::*;
#(
  parameter int ROWS   = IMG_ROWS,
  parameter int COLS   = IMG_COLS,
  parameter int NPORTS = 2
) (
  input  logic        clk,
  input  logic        wr_en,
  input  idx_t        wr_row,
  input  idx_t        wr_col,
  input  pix_t        wr_pix,
  input  logic signed [IDX_W:0] r_off,
  input  logic signed [IDX_W:0] c_off,
  input  logic [NPORTS-1:0] rd_en,
  input  idx_t        rd_row [NPORTS],
  input  idx_t        rd_col [NPORTS],
  output pix_t        rd_pix [NPORTS]
);
  localparam int AW = $clog2(ROWS * COLS);

  pix_t mem [ROWS * COLS];

  function automatic logic [AW-1:0] addr_of(idx_t r, idx_t c);
    return AW'(32'(r) * COLS + 32'(c));
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_row) < ROWS) && (32'(wr_col) < COLS))
      mem[addr_of(wr_row, wr_col)] <= wr_pix;
  end

  for (genvar p = 0; p < NPORTS; p++) begin : g_rd
    logic signed [IDX_W+1:0] er, ec;
    logic in_frame;
    logic in_frame_q;
    pix_t data_q;
    assign er = $signed({2'b00, rd_row[p]}) + (IDX_W+2)'(r_off);
    assign ec = $signed({2'b00, rd_col[p]}) + (IDX_W+2)'(c_off);
    assign in_frame = (er >= 0) && (er < $signed((IDX_W+2)'(ROWS))) && (ec >= 0) && (ec < $signed((IDX_W+2)'(COLS)));
    always_ff @(posedge clk) begin
      if (rd_en[p]) begin
        data_q   <= mem[addr_of(idx_t'(er), idx_t'(ec))];
        in_frame_q <= in_frame;
      end
    end
    assign rd_pix[p] = in_frame_q ? data_q : '0;
  end

endmodule
