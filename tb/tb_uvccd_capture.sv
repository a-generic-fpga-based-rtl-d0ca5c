// tb_uvccd_capture: self-checking testbench of the UV CCD capture.
//
// A behavioural model of the camera sends frames of several sizes and blanking
// intervals; the testbench checks every captured pixel's value, column, row and the
// sof/eol/eof flags against the model's formula, counts pixels and frames, and checks
// that a frame beginning while capture is disabled is ignored. It also checks the
// one-pixel lag of the stream: the last pixel of a frame leaves two pixel clocks after
// the fv fall is sampled.
`timescale 1ns/1ps
module tb_uvccd_capture;
  import img_pkg::*;

  logic      pclk, fv, lv, rst_n = 1'b0, enable = 1'b1;
  logic [9:0] data;
  logic      pix_valid, frame_done;
  pix_t      pix;

  vsp01m01_model #(.PCLK_NS(40.0)) cam (.pclk, .fv, .lv, .data);
  uvccd_capture dut (.pclk, .rst_n, .enable, .fv, .lv, .data, .pix_valid, .pix, .frame_done);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (400_000) @(posedge pclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cols, rows, ex, ey, ef, npix, nframes;
  longint pcyc = 0, fv_fall_cyc, eof_cyc;
  always @(posedge pclk) pcyc <= pcyc + 1;
  logic fv_d = 1'b0;
  always @(posedge pclk) begin
    fv_d <= fv;
    if (fv_d && !fv) fv_fall_cyc = pcyc;  // cycle where the fall is first sampled
  end

  always @(posedge pclk) if (rst_n && pix_valid) begin
    npix++;
    check(pix.x == coord_t'(ex) && pix.y == coord_t'(ey), "coordinates");
    check(pix.data == cam.pixel_value(ex, ey, ef), "value");
    check(pix.sof == (ex == 0 && ey == 0), "sof");
    check(pix.eol == (ex == cols - 1), "eol");
    check(pix.eof == (ex == cols - 1 && ey == rows - 1), "eof");
    check(frame_done == pix.eof, "frame_done with eof");
    if (pix.eof) eof_cyc = pcyc;
    if (ex == cols - 1) begin
      ex = 0;
      if (ey == rows - 1) begin ey = 0; nframes++; end else ey++;
    end else ex++;
  end

  task automatic frame(input int c, r, hb, vb, input bit expect_capture);
    int n0, f0;
    cols = c; rows = r; ex = 0; ey = 0; ef = cam.frames_sent;
    n0 = npix; f0 = nframes;
    cam.send_frame(c, r, hb, vb);
    repeat (4) @(posedge pclk);
    if (expect_capture) begin
      check(npix - n0 == c * r, $sformatf("pixel count %0d", npix - n0));
      check(nframes - f0 == 1, "frame count");
      check(eof_cyc - fv_fall_cyc == 1, "last pixel one clock after fv fall sampled");
    end else begin
      check(npix == n0, "disabled frame ignored");
    end
  endtask

  initial begin
    @(posedge pclk); @(posedge pclk);
    rst_n = 1'b1;
    repeat (3) @(posedge pclk);
    frame(16, 6, 4, 3, 1'b1);
    frame(1360, 4, 2, 2, 1'b1);   // full CCD line width
    frame(5, 3, 1, 1, 1'b1);      // minimum blanking
    enable = 1'b0;
    frame(8, 2, 2, 2, 1'b0);
    enable = 1'b1;
    frame(1, 1, 3, 2, 1'b1);      // single pixel
    frame(7, 9, 5, 4, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
