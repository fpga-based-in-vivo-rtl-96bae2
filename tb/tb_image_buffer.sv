// tb_image_buffer: self-checking test of the frame buffer and its
// motion-vector address generator. A 64 x 64 random frame is written; then
// both read ports read random indices under several motion vectors (zero,
// positive, negative, large enough to leave the frame). Each read must
// return, one cycle later, the pixel at the shifted index or 0 outside.
`timescale 1ns/1ps
module tb_image_buffer;
  import decalcion_pkg::*;
  localparam int R = 64, C = 64;

  logic clk = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0; idx_t wr_row = 0, wr_col = 0; pix_t wr_pix = 0;
  logic signed [9:0] r_off = 0, c_off = 0;
  logic [1:0] rd_en = 0; idx_t rd_row [2]; idx_t rd_col [2]; pix_t rd_pix [2];

  image_buffer #(.ROWS(R), .COLS(C), .NPORTS(2)) dut (.*);

  int img [R][C];
  int outside;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int offs [5][2] = '{'{0, 0}, '{3, -5}, '{-7, 2}, '{20, 30}, '{-40, -1}};
    rd_row = '{default: '0}; rd_col = '{default: '0};
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      img[r][c] = $urandom_range(1, 255);
      @(negedge clk); wr_en = 1; wr_row = idx_t'(r); wr_col = idx_t'(c); wr_pix = pix_t'(img[r][c]);
    end
    @(negedge clk); wr_en = 0;
    outside = 0;
    for (int o = 0; o < 5; o++) begin
      r_off = 10'(offs[o][0]); c_off = 10'(offs[o][1]);
      for (int n = 0; n < 200; n++) begin
        int er [2], ec [2], ex [2];
        for (int p = 0; p < 2; p++) begin
          rd_row[p] = idx_t'($urandom_range(0, R - 1)); rd_col[p] = idx_t'($urandom_range(0, C - 1));
          er[p] = int'(rd_row[p]) + offs[o][0]; ec[p] = int'(rd_col[p]) + offs[o][1];
          ex[p] = (er[p] >= 0 && er[p] < R && ec[p] >= 0 && ec[p] < C) ? img[er[p]][ec[p]] : 0;
          if (ex[p] == 0) outside++;
        end
        rd_en = 2'b11;
        @(negedge clk); rd_en = 0;
        for (int p = 0; p < 2; p++) begin
          checks++;
          if (int'(rd_pix[p]) != ex[p]) begin
            failures++;
            if (failures < 8) $display("port %0d (%0d,%0d) off (%0d,%0d): got %0d expected %0d",
                                       p, rd_row[p], rd_col[p], offs[o][0], offs[o][1], rd_pix[p], ex[p]);
          end
        end
      end
    end
    checks++; if (outside == 0) begin failures++; $display("no read left the frame"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
