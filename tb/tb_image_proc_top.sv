// tb_image_proc_top: end-to-end testbench of the image-acquisition top level, with every
// parameter at its default.
//
// A behavioural Star1000 model hangs on the Star1000 pins, a behavioural CCD camera model
// drives the CCD inputs, and a memory model takes the word writes with a random ready.
// Every write is decoded back to (x, y) from its address and compared with the value the
// active sensor model gives for that pixel. The sequence is:
//   1. a full 1024 x 1024 Star1000 frame at the 0.1024 ms row period, each row
//      integrating for 1024 row periods (busy time checked against 2 x 1024 row periods:
//      104.8576 ms of resets followed by 104.8576 ms of readout);
//   2. switch to the CCD and take a full 1360 x 1024 CCD frame;
//   3. switch back and read a Star1000 window while the memory stalls, so that the
//      frame writer overflows and drops pixels; then clear the status;
//   4. continuous Star1000 windows ended by a stop command;
//   5. a CCD frame sent while the Star1000 is selected, which must be ignored.
// Each mechanism (full frame, window, Cal, sensor switch, overflow, stop, CCD frame,
// sensor supply switching) is counted and must have happened at least once.
`timescale 1ns/1ps
module tb_image_proc_top;
  import img_pkg::*;

  localparam int ADDR_W = 25, LINE_LOG2 = 11;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  sensor_e           sensor_sel = SENSOR_STAR1000;
  logic              sensor_pwr = 1'b0;
  logic [1:0]        sensor_en;
  star_cfg_t         star_cfg = '0;
  logic              star_start = 1'b0, star_stop = 1'b0, star_busy;
  logic [ADDR_W-1:0] frame_base = 25'h080_0000;
  logic              clear_status = 1'b0;
  logic              frame_done, wr_overflow, cdc_overflow;
  logic [15:0]       frame_count, drop_count;
  logic [9:0]        s1k_addr, s1k_d;
  logic              s1k_ld_y_n, s1k_ld_x_n, s1k_s, s1k_r, s1k_reset, s1k_cal;
  logic              s1k_clk_x, s1k_clk_adc;
  logic              ccd_pclk, ccd_fv, ccd_lv;
  pix_data_t         ccd_data;
  logic              mem_valid, mem_ready = 1'b1;
  logic [ADDR_W-1:0] mem_addr;
  logic [15:0]       mem_data;

  image_proc_top dut (.*);

  star1000_model #(.DATA_LAT(3)) sensor (
    .addr(s1k_addr), .ld_y_n(s1k_ld_y_n), .ld_x_n(s1k_ld_x_n), .s(s1k_s), .r(s1k_r),
    .row_reset(s1k_reset), .cal(s1k_cal), .clk_x(s1k_clk_x), .clk_adc(s1k_clk_adc),
    .d(s1k_d));
  vsp01m01_model #(.PCLK_NS(40.0)) cam (.pclk(ccd_pclk), .fv(ccd_fv), .lv(ccd_lv),
                                        .data(ccd_data));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // watchdog: 60 M cycles = 0.6 s of simulated time
  initial begin
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanisms seen
  int n_full_star = 0, n_window = 0, n_switch = 0, n_overflow = 0, n_stop = 0;
  int n_ccd_frame = 0, n_ignored = 0, n_power = 0;

  // ------------------------------------------------------------ memory model / checker
  bit  src_ccd;            // which model predicts the data
  int  col0, row0, ncols, nrows, fbase;  // window and first frame index of the run
  int  writes = 0, ready_pct = 100;
  always @(negedge clk) mem_ready = ($urandom_range(99) < ready_pct);

  always @(posedge clk) if (rst_n && mem_valid && mem_ready) begin
    int off, x, y, f;
    logic [9:0] e;
    off = int'(mem_addr - frame_base);
    y   = off >> LINE_LOG2;
    x   = off & ((1 << LINE_LOG2) - 1);
    f   = fbase + writes / (ncols * nrows);
    check(x < ncols && y < nrows, "address inside the frame");
    if (src_ccd) e = cam.pixel_value(x, y, f);
    else         e = sensor.pixel_value(col0 + x, row0 + y, f);
    check(mem_data == 16'(e), "pixel data in memory");
    writes++;
  end

  int done_pulses = 0;
  always @(posedge clk) if (frame_done) done_pulses++;

  longint busy_cycles = 0;
  always @(posedge clk) if (star_busy) busy_cycles++;

  task automatic select(input sensor_e s);
    if (s != sensor_sel) n_switch++;
    @(negedge clk) sensor_sel = s;
    repeat (10) @(negedge clk);
    check(sensor_en == (s == SENSOR_UVCCD ? 2'b10 : 2'b01), "supply of the selected sensor");
    n_power++;
  endtask

  task automatic star_run(input int rs, cs, nr, nc, ir, rp, nf, input bit do_stop);
    star_cfg = '{row_start: 10'(rs), col_start: 10'(cs), num_rows: 11'(nr),
                 num_cols: 11'(nc), int_rows: 16'(ir), row_period: 16'(rp), nframes: 16'(nf),
                 row_step: 4'd1, col_step: 4'd1};
    src_ccd = 1'b0; col0 = cs; row0 = rs; ncols = nc; nrows = nr;
    fbase = sensor.reads[rs]; writes = 0; busy_cycles = 0;
    @(negedge clk) star_start = 1'b1;
    @(negedge clk) star_start = 1'b0;
    if (do_stop) begin
      repeat (nr * rp + 100) @(posedge clk);
      @(negedge clk) star_stop = 1'b1;
      @(negedge clk) star_stop = 1'b0;
      n_stop++;
    end
    wait (!star_busy);
    repeat (200) @(negedge clk);
  endtask

  initial begin
    int fc0, cal0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);
    sensor_pwr = 1'b1;
    select(SENSOR_STAR1000);

    // 1. full Star1000 frame at the paper's row period
    fc0 = int'(frame_count); cal0 = sensor.cal_count;
    ready_pct = 90;
    star_run(0, 0, 1024, 1024, 1024, 10240, 1, 1'b0);
    check(writes == 1024 * 1024, $sformatf("full frame writes %0d", writes));
    check(int'(frame_count) - fc0 == 1, "full frame counted");
    check(busy_cycles == longint'(1024 + 1024) * 10240, "frame timing: row period 0.1024 ms");
    check(sensor.cal_count - cal0 == 1, "one Cal per frame");
    check(!wr_overflow, "no overflow at full rate");
    if (writes == 1024 * 1024) n_full_star++;

    // 2. full CCD frame
    select(SENSOR_UVCCD);
    src_ccd = 1'b1; col0 = 0; row0 = 0; ncols = 1360; nrows = 1024;
    fbase = cam.frames_sent; writes = 0; fc0 = int'(frame_count);
    cam.send_frame(1360, 1024, 8, 4);
    repeat (200) @(negedge clk);
    check(writes == 1360 * 1024, $sformatf("CCD frame writes %0d", writes));
    check(int'(frame_count) - fc0 == 1, "CCD frame counted");
    check(!cdc_overflow, "no clock-crossing overflow");
    if (writes == 1360 * 1024) n_ccd_frame++;

    // 3. Star1000 window with the memory stalled: overflow
    select(SENSOR_STAR1000);
    ready_pct = 0;
    fork
      star_run(200, 300, 4, 100, 1, 2000, 1, 1'b0);
      begin
        repeat (6000) @(negedge clk);
        ready_pct = 100;     // memory resumes after two rows
      end
    join
    check(wr_overflow && drop_count > 0, "overflow with stalled memory");
    check(writes + int'(drop_count) == 4 * 100, "written plus dropped pixels");
    if (wr_overflow) n_overflow++;
    n_window++;
    @(negedge clk) clear_status = 1'b1;
    @(negedge clk) clear_status = 1'b0;
    check(!wr_overflow && drop_count == 0 && frame_count == 0, "status cleared");

    // 4. continuous windows ended by stop
    ready_pct = 80;
    star_run(500, 10, 6, 32, 3, 1500, 0, 1'b1);
    check(writes == 2 * 6 * 32, $sformatf("stopped run wrote two frames (%0d)", writes));
    check(frame_count == 2, "two frames after stop");
    n_window++;

    // 5. a CCD frame while the Star1000 is selected is ignored
    writes = 0;
    cam.send_frame(20, 3, 2, 2);
    repeat (100) @(negedge clk);
    check(writes == 0, "unselected CCD ignored");
    if (writes == 0) n_ignored++;

    sensor_pwr = 1'b0;
    @(negedge clk) check(sensor_en == 2'b00, "supplies off");

    check(n_full_star > 0, "mechanism: full Star1000 frame");
    check(n_window > 0, "mechanism: windowed readout");
    check(n_switch >= 2, "mechanism: sensor switch");
    check(n_overflow > 0, "mechanism: frame-writer overflow");
    check(n_stop > 0, "mechanism: stop");
    check(n_ccd_frame > 0, "mechanism: CCD frame");
    check(n_ignored > 0, "mechanism: unselected source ignored");
    check(n_power > 0, "mechanism: sensor supply switch");
    check(sensor.errors == 0, "Star1000 pin sequence");
    check(done_pulses >= 4, $sformatf("frame_done pulses %0d", done_pulses));
    $display("mechanisms: full_star=%0d window=%0d switch=%0d overflow=%0d stop=%0d ccd=%0d ignored=%0d power=%0d",
             n_full_star, n_window, n_switch, n_overflow, n_stop, n_ccd_frame, n_ignored, n_power);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
