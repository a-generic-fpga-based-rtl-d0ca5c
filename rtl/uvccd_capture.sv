// uvccd_capture: pixel capture from the UV CCD camera's timing generator.
//
// The CCD board's timing generator and ADC (VSP01M01) deliver the image as digital
// samples with three synchronisation signals: frame-valid, line-valid and a pixel clock.
// This block runs on that pixel clock. It samples fv, lv and the pixel data on each rising
// edge, takes every sample with fv and lv both high as a pixel, and works out the pixel's
// column (count of pixels since lv rose) and row (count of lines since fv rose).
//
// To mark the last pixel of a line and of a frame, each pixel is held back by one beat:
// it is sent when the next pixel arrives (then eol tells whether lv fell in between) or
// when fv falls (then it is the last pixel of the frame, with eol and eof). So the stream
// lags the sensor by one pixel, and the frame's last pixel leaves in the cycle after fv
// falls. sof marks pixel (0,0). Counters saturate at the coordinate width. lv must rise
// at least one pixel clock after fv: a pixel sampled on the fv rising edge is not taken.
//
// The paper states only that the board captures each pixel's digital value and decodes
// its position from frame-valid, line-valid and pixel clock; the one-beat hold, the
// active-high polarity of fv and lv and the 10-bit sample width (the paper's pixel
// depth) are this design's choices.
module uvccd_capture
  import img_pkg::*;
(
  input  logic      pclk,     // pixel clock from the timing generator
  input  logic      rst_n,    // asynchronous reset, released synchronously to pclk
  input  logic      enable,   // capture enable (quasi-static)
  input  logic      fv,       // frame valid
  input  logic      lv,       // line valid
  input  pix_data_t data,     // pixel sample
  output logic      pix_valid,
  output pix_t      pix,
  output logic      frame_done // one pclk pulse with the last pixel of a frame
);

  logic   fv_q, lv_q;
  coord_t x_cnt, y_cnt;
  logic   in_frame;     // frame accepted (enable was high when fv rose)
  logic   line_seen;    // a pixel was taken in the current line
  logic   hold_v;       // a pixel is held back
  logic   hold_eol;     // lv fell after the held pixel
  pix_t   hold;

  logic take;
  assign take = in_frame && fv && lv;

  always_ff @(posedge pclk or negedge rst_n) begin
    if (!rst_n) begin
      fv_q       <= 1'b0;
      lv_q       <= 1'b0;
      x_cnt      <= '0;
      y_cnt      <= '0;
      in_frame   <= 1'b0;
      line_seen  <= 1'b0;
      hold_v     <= 1'b0;
      hold_eol   <= 1'b0;
      hold       <= '0;
      pix_valid  <= 1'b0;
      pix        <= '0;
      frame_done <= 1'b0;
    end else begin
      fv_q       <= fv;
      lv_q       <= lv;
      pix_valid  <= 1'b0;
      frame_done <= 1'b0;

      // frame start
      if (fv && !fv_q) begin
        in_frame  <= enable;
        y_cnt     <= '0;
        x_cnt     <= '0;
        line_seen <= 1'b0;
      end

      // line end: next line gets the next row number
      if (in_frame && !lv && lv_q && line_seen) begin
        hold_eol  <= 1'b1;
        x_cnt     <= '0;
        line_seen <= 1'b0;
        if (y_cnt != '1) y_cnt <= y_cnt + 1'b1;
      end

      if (take) begin
        // release the held pixel
        if (hold_v) begin
          pix_valid   <= 1'b1;
          pix         <= hold;
          pix.eol     <= hold_eol;
        end
        hold_v    <= 1'b1;
        hold_eol  <= 1'b0;
        hold.data <= data;
        hold.x    <= x_cnt;
        hold.y    <= y_cnt;
        hold.sof  <= (x_cnt == '0) && (y_cnt == '0);
        hold.eol  <= 1'b0;
        hold.eof  <= 1'b0;
        line_seen <= 1'b1;
        if (x_cnt != '1) x_cnt <= x_cnt + 1'b1;
      end

      // frame end: the held pixel is the last of the frame
      if (in_frame && !fv && fv_q) begin
        in_frame <= 1'b0;
        if (hold_v) begin
          pix_valid  <= 1'b1;
          pix        <= hold;
          pix.eol    <= 1'b1;
          pix.eof    <= 1'b1;
          frame_done <= 1'b1;
          hold_v     <= 1'b0;
        end
      end
    end
  end

endmodule
