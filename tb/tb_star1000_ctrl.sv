// tb_star1000_ctrl: self-checking testbench of the Star1000 sequencer.
//
// The sequencer drives a behavioural sensor model. Every pixel beat is compared with the
// value the model's formula gives for that column, row and frame, and with the expected
// coordinates and framing flags. The testbench also checks the row period and frame
// period in clock cycles, the integration time the model measured between a row's Reset
// and its S pulse, one Cal pulse per frame on the first window row, and the number of
// Clk_X and S/R pulses. Runs: a small window with a configured row period, a full
// 1024-column row width with the paper's 0.1024 ms row period, a window too wide for the
// configured row period (the row period stretches), a sub-sampled window, and a stop command during continuous
// operation.
`timescale 1ns/1ps
module tb_star1000_ctrl;
  import img_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;  // 100 MHz

  star_cfg_t  cfg;
  logic       start = 1'b0, stop = 1'b0, busy, frame_done;
  logic [9:0] addr, d;
  logic       ld_y_n, ld_x_n, s, r, row_reset, cal, clk_x, clk_adc;
  logic       pix_valid;
  pix_t       pix;

  star1000_ctrl dut (.*);
  star1000_model #(.DATA_LAT(3)) sensor (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pixel checker
  int     exp_x, exp_y, exp_f, npix, nframes_seen, base_frame;
  int     row_step_i = 1, col_step_i = 1;
  longint cyc = 0, sof_cyc, last_sof_cyc, row_start_cyc, last_row_cyc;
  longint frame_per_cyc, row_per_cyc;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && pix_valid) begin
    npix++;
    check(pix.x == coord_t'(exp_x) && pix.y == coord_t'(exp_y), "pixel coordinates");
    check(pix.data == sensor.pixel_value(int'(cfg.col_start) + exp_x * col_step_i,
                                         int'(cfg.row_start) + exp_y * row_step_i,
                                         base_frame + exp_f),
          "pixel value");
    check(pix.sof == (exp_x == 0 && exp_y == 0), "sof flag");
    check(pix.eol == (exp_x == int'(cfg.num_cols) - 1), "eol flag");
    check(pix.eof == (exp_x == int'(cfg.num_cols) - 1 && exp_y == int'(cfg.num_rows) - 1),
          "eof flag");
    if (exp_x == 0) begin
      if (exp_y > 0) check(cyc - last_row_cyc == row_per_cyc, "row period in cycles");
      last_row_cyc = cyc;
    end
    if (pix.sof) begin
      if (nframes_seen > 0) check(cyc - last_sof_cyc == frame_per_cyc, "frame period");
      last_sof_cyc = cyc;
    end
    if (exp_x == int'(cfg.num_cols) - 1) begin
      exp_x = 0;
      if (exp_y == int'(cfg.num_rows) - 1) begin
        exp_y = 0; exp_f++; nframes_seen++;
      end else exp_y++;
    end else exp_x++;
  end

  // integration time seen by the model at each S pulse
  int     integ_checks;
  longint exp_integ_ns;
  always @(negedge s) begin
    check(sensor.last_integ_ns == exp_integ_ns, "integration time");
    integ_checks++;
  end

  int frame_done_count;
  always @(posedge clk) if (frame_done) frame_done_count++;

  task automatic run(input int rs, cs, nr, nc, ir, rp, nf, input int exp_row_cyc,
                     input bit use_stop, input int rstep = 1, input int cstep = 1);
    int cal0, s0, r0, clkx0, fd0;
    cfg = '{row_start: 10'(rs), col_start: 10'(cs), num_rows: 11'(nr), num_cols: 11'(nc),
            int_rows: 16'(ir), row_period: 16'(rp), nframes: 16'(nf),
            row_step: 4'(rstep), col_step: 4'(cstep)};
    row_step_i = rstep; col_step_i = cstep;
    exp_x = 0; exp_y = 0; exp_f = 0; npix = 0; nframes_seen = 0;
    base_frame   = sensor.reads[rs];
    row_per_cyc  = exp_row_cyc;
    frame_per_cyc = longint'(exp_row_cyc) * nr;
    exp_integ_ns = (longint'(ir) * exp_row_cyc - 241) * 10;
    cal0 = sensor.cal_count; s0 = sensor.s_count; r0 = sensor.r_count;
    clkx0 = sensor.clkx_count; fd0 = frame_done_count;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    check(busy, "busy after start");
    if (use_stop) begin
      // let two frames' resets begin, then ask to stop
      repeat (nr * exp_row_cyc + 50) @(posedge clk);
      @(negedge clk) stop = 1'b1;
      @(negedge clk) stop = 1'b0;
      nf = 2;
    end
    wait (!busy);
    repeat (50) @(posedge clk);
    check(npix == nf * nr * nc, $sformatf("pixel count %0d", npix));
    check(frame_done_count - fd0 == nf, "frame_done count");
    check(sensor.cal_count - cal0 == nf, "one Cal per frame");
    check(sensor.cal_row == rs, "Cal on the first window row");
    check(sensor.s_count - s0 == nf * nr && sensor.r_count - r0 == nf * nr, "S and R count");
    check(sensor.clkx_count - clkx0 == nf * nr * nc, "Clk_X count");
  endtask

  initial begin
    cfg = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    // small window, configured row period, two frames, integration 3 rows
    run(50, 100, 8, 16, 3, 1000, 2, 1000, 1'b0);
    // full row width at the paper's row period, integration equal to the frame height
    run(0, 0, 3, 1024, 3, 10240, 1, 10240, 1'b0);
    // row period shorter than the readout needs: 582 + (40+3)*9 + 1 cycles
    run(1000, 900, 5, 40, 2, 100, 1, 582 + 43 * 9 + 1, 1'b0);
    // sub-sampling: every 3rd row and every 4th column
    run(300, 20, 6, 12, 1, 800, 1, 800, 1'b0, 3, 4);
    // continuous operation ended by stop
    run(7, 3, 4, 10, 2, 800, 0, 800, 1'b1);
    check(sensor.errors == 0, "sensor model sequence errors");
    check(integ_checks == 38, "integration checks ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
