// sensor_rx: capture of the miniscope sensor's parallel pixel bus.
//
// The sensor drives a pixel clock (66.67 MHz in the paper's setup), 8 data
// pins, a line-valid HSYNC and a frame-valid VSYNC. The core runs faster
// (300 MHz), so all inputs pass through two-flop synchronisers and a pixel is
// taken on each rising edge of the synchronised pixel clock while HSYNC and
// VSYNC are high. Column counts pixels within a line, row counts lines within
// a frame; frame_end pulses for one cycle when VSYNC falls.
// Output: one (row, column, pixel) strobe per sensor pixel, 3-4 core cycles
// after the pixel clock edge. Pixels beyond IMG_ROWS x IMG_COLS are dropped.
// The pin list follows the paper; the polarities, the synchronisers and the
// sampling rule are this design's choices (data must be stable around the
// pixel clock's rising edge for at least two core cycles).
module sensor_rx
  import decalcion_pkg::*;
#(
  parameter int ROWS = IMG_ROWS,
  parameter int COLS = IMG_COLS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sen_pclk,
  input  pix_t sen_data,
  input  logic sen_hsync,
  input  logic sen_vsync,
  output logic pix_valid,
  output idx_t pix_row,
  output idx_t pix_col,
  output pix_t pix_val,
  output logic frame_end
);
  typedef struct packed { logic pclk; logic hs; logic vs; pix_t d; } bus_t;
  bus_t s1, s2, s3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin s1 <= '0; s2 <= '0; s3 <= '0; end
    else begin
      s1 <= '{sen_pclk, sen_hsync, sen_vsync, sen_data};
      s2 <= s1;
      s3 <= s2;
    end
  end

  logic pclk_rise;
  assign pclk_rise = s2.pclk && !s3.pclk;

  logic [IDX_W:0] col_cnt, row_cnt;
  logic line_act;   // a pixel of the current line has been taken

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_cnt <= '0; row_cnt <= '0; line_act <= 1'b0;
      pix_valid <= 1'b0; pix_row <= '0; pix_col <= '0; pix_val <= '0; frame_end <= 1'b0;
    end else begin
      pix_valid <= 1'b0;
      frame_end <= 1'b0;
      if (!s2.vs) begin
        if (s3.vs) frame_end <= 1'b1;
        col_cnt <= '0; row_cnt <= '0; line_act <= 1'b0;
      end else if (!s2.hs) begin
        if (line_act) row_cnt <= row_cnt + 1'b1;
        col_cnt  <= '0;
        line_act <= 1'b0;
      end else if (pclk_rise) begin
        line_act <= 1'b1;
        col_cnt  <= col_cnt + 1'b1;
        if (32'(col_cnt) < COLS && 32'(row_cnt) < ROWS) begin
          pix_valid <= 1'b1;
          pix_row   <= idx_t'(row_cnt);
          pix_col   <= idx_t'(col_cnt);
          pix_val   <= s2.d;
        end
      end
    end
  end

endmodule
