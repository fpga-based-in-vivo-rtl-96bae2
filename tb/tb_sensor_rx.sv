// tb_sensor_rx: self-checking test of the sensor bus capture. A sensor model
// here drives a 9 ns pixel clock (data changes on its falling edge), HSYNC for
// 20 pixels per line with blanking between lines, VSYNC around 18 lines, for
// two frames; the capture is set to 16 x 16, so the last columns and rows are
// dropped. Every captured (row, column, pixel) is compared with what was
// driven, and one frame_end per frame is expected.
`timescale 1ns/100ps
module tb_sensor_rx;
  import decalcion_pkg::*;
  localparam int R = 16, C = 16, LW = 20, NL = 18;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic sen_pclk = 0; pix_t sen_data = 0; logic sen_hsync = 0, sen_vsync = 0;
  logic pix_valid; idx_t pix_row, pix_col; pix_t pix_val; logic frame_end;

  sensor_rx #(.ROWS(R), .COLS(C)) dut (.*);

  int img [2][NL][LW];
  int got, frames, frame_now;
  bit seen [R][C];

  initial begin
    #200000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (pix_valid) begin
      checks++; got++;
      if (int'(pix_row) >= R || int'(pix_col) >= C || int'(pix_val) != img[frame_now][pix_row][pix_col] || seen[pix_row][pix_col]) begin
        failures++;
        if (failures < 8) $display("pixel (%0d,%0d)=%0d unexpected", pix_row, pix_col, pix_val);
      end
      seen[pix_row][pix_col] = 1;
    end
    if (frame_end) begin frames++; frame_now = 1; for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) seen[r][c] = 0; end
  end

  initial begin
    for (int f = 0; f < 2; f++) for (int l = 0; l < NL; l++) for (int p = 0; p < LW; p++) img[f][l][p] = $urandom_range(0, 255);
    #10 rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      #20 sen_vsync = 1;
      #40;
      for (int l = 0; l < NL; l++) begin
        sen_hsync = 1;
        for (int p = 0; p < LW; p++) begin
          sen_data = pix_t'(img[f][l][p]);
          #4.5 sen_pclk = 1;
          #4.5 sen_pclk = 0;
        end
        #2 sen_hsync = 0;
        #30;
      end
      sen_vsync = 0;
      #60;
    end
    #40;
    checks++; if (got != 2*R*C) begin failures++; $display("captured %0d pixels, expected %0d", got, 2*R*C); end
    checks++; if (frames != 2) begin failures++; $display("frame_end %0d times", frames); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
