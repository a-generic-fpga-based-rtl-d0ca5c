// vsp01m01_model: behavioural model of the UV CCD camera's digital output, for
// simulation only (not synthesizable).
//
// It stands for the CCD timing generator/ADC board and produces the pixel clock, the
// frame-valid and line-valid signals and one data sample per pixel clock. A frame is
// started with send_frame(cols, rows, hblank, vblank): fv rises, then each line is lv
// high for cols clocks followed by hblank clocks low; vblank clocks pass after fv rises
// and after the last line. Signals change on the falling pixel-clock edge, so they are
// stable at the rising edge where the capture logic samples them. The value of pixel
// (x, y) of frame f is pixel_value(x, y, f).
`timescale 1ns/1ps
module vsp01m01_model #(
  parameter real PCLK_NS = 40.0   // pixel clock period (25 MHz)
) (
  output logic       pclk,
  output logic       fv,
  output logic       lv,
  output logic [9:0] data
);
  function automatic logic [9:0] pixel_value(input int x, input int y, input int f);
    return 10'((x * 11 + y * 7 + f * 29 + 5) & 10'h3ff);
  endfunction

  int frames_sent = 0;

  initial begin
    pclk = 1'b0;
    fv   = 1'b0;
    lv   = 1'b0;
    data = '0;
  end
  always #(PCLK_NS / 2.0) pclk = ~pclk;

  task automatic send_frame(input int cols, rows, hblank, vblank);
    @(negedge pclk) fv = 1'b1;
    repeat (vblank) @(negedge pclk);
    for (int y = 0; y < rows; y++) begin
      for (int x = 0; x < cols; x++) begin
        @(negedge pclk);
        lv   = 1'b1;
        data = pixel_value(x, y, frames_sent);
      end
      @(negedge pclk) lv = 1'b0;
      data = '0;
      repeat (hblank) @(negedge pclk);
    end
    repeat (vblank) @(negedge pclk);
    fv = 1'b0;
    frames_sent++;
    repeat (vblank) @(negedge pclk);
  endtask
endmodule
