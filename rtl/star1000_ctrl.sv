// star1000_ctrl: clock and control sequencer for the Star1000 CMOS image sensor.
//
// The Star1000 has no timing generator of its own, so this block drives all its digital
// pins and captures the 10-bit ADC output. It runs a rolling shutter: time is cut into
// row periods, and in every row period the block
//   1. reads one row: puts its Y address on A0..A9, pulses Ld_Y (active low), pulses S
//      to sample the integrated signal into the column amplifiers, pulses Reset to clear
//      the row and pulses R to sample the reset level; on the first row of each frame a
//      Cal pulse is added inside the S pulse;
//   2. resets the row that starts integrating: Y address, Ld_Y pulse, Reset pulse;
//   3. reads the sampled row out pixel by pixel: for every column it puts the X address
//      on A0..A9, pulses Ld_X (active low), gives one Clk_X and one Clk_ADC period, and
//      takes the ADC result DATA_LAT pixel periods later from D0..D9.
// A row is reset int_rows row periods before it is read, so the integration time is
// about int_rows row periods (exactly int_rows*row_period - 241 cycles with the default
// pulse timing). Rows are read in order; reading of one frame overlaps resetting of the
// next, as in a rolling shutter, so int_rows must not exceed num_rows when more than one
// frame is taken.
//
// Timing follows the paper's timing diagrams at a 100 MHz clock (one cycle = 10 ns):
// address set-up 10 ns, Ld_Y low 20 ns, address hold 10 ns; in the row reset Reset rises
// 100 ns after Ld_Y falls and lasts 200 ns; in the row readout S rises 3.2 us after Ld_Y
// falls and lasts 0.4 us, Reset follows 100 ns after S for 200 ns, R follows 1.2 us after
// Reset for 0.4 us; Cal lasts 100 ns. The row period of 0.1024 ms (10240 cycles, 1024
// rows = 104.8576 ms per frame) is the paper's, given here at run time in cfg.row_period.
// This design's own choices: the order readout-reset-pixels inside a row period, the
// position of Cal inside S (T_S_CAL), the pixel period of 9 cycles (so that 1024 pixels
// fit in 0.1024 ms together with the row sequences), Ld_X low for 20 ns like Ld_Y, Clk_X
// and Clk_ADC high in the first half of each pixel period, and the window/frame-count
// controls (window origin and size, sub-sampling steps, frame count). Addresses wrap
// modulo 1024. A row period never ends before its pixel readout is complete, so a short
// cfg.row_period gives the fastest rate the window allows.
//
// Interface: start (one-cycle pulse, ignored while busy) takes cfg and starts; stop asks
// to end after the frame being reset. Pixels leave on pix_valid/pix, one beat per pixel,
// with no back-pressure (the sensor cannot wait). frame_done pulses after the last pixel
// of a frame. All sensor pins are registered.
module star1000_ctrl
  import img_pkg::*;
#(
  parameter int unsigned PIX_CYC   = 9,    // clock cycles per pixel
  parameter int unsigned DATA_LAT  = 3,    // ADC latency in pixel periods
  parameter int unsigned T_SETUP   = 1,    // address set-up before Ld falls (10 ns)
  parameter int unsigned T_LD      = 2,    // Ld_Y / Ld_X low time (20 ns)
  parameter int unsigned T_HOLD    = 1,    // address hold after Ld rises (10 ns)
  parameter int unsigned T_LD_RST  = 10,   // Ld_Y fall to Reset rise, row reset (100 ns)
  parameter int unsigned T_RST     = 20,   // Reset width (200 ns)
  parameter int unsigned T_LD_S    = 320,  // Ld_Y fall to S rise (3.2 us)
  parameter int unsigned T_S       = 40,   // S width (0.4 us)
  parameter int unsigned T_S_RST   = 10,   // S fall to Reset rise (100 ns)
  parameter int unsigned T_RST_R   = 120,  // Reset fall to R rise (1.2 us)
  parameter int unsigned T_R       = 40,   // R width (0.4 us)
  parameter int unsigned T_S_CAL   = 30,   // S rise to Cal rise
  parameter int unsigned T_CAL     = 10    // Cal width (100 ns)
) (
  input  logic       clk,
  input  logic       rst_n,
  // control
  input  star_cfg_t  cfg,
  input  logic       start,
  input  logic       stop,
  output logic       busy,
  output logic       frame_done,
  // Star1000 pins
  output logic [9:0] addr,      // A0..A9
  output logic       ld_y_n,    // Ld_Y, latches addr as row address when low
  output logic       ld_x_n,    // Ld_X, latches addr as column address when low
  output logic       s,         // S: sample signal level into column amplifiers
  output logic       r,         // R: sample reset level into column amplifiers
  output logic       row_reset, // Reset: reset the addressed row
  output logic       cal,       // Cal: output amplifier calibration
  output logic       clk_x,     // Clk_X
  output logic       clk_adc,   // Clk_ADC
  input  logic [9:0] d,         // D0..D9
  // pixel stream
  output logic       pix_valid,
  output pix_t       pix
);

  // Offsets inside a row period.
  localparam int unsigned RD_LDF  = T_SETUP;                  // Ld_Y fall, readout
  localparam int unsigned RD_S0   = RD_LDF + T_LD_S;
  localparam int unsigned RD_S1   = RD_S0 + T_S;
  localparam int unsigned RD_RST0 = RD_S1 + T_S_RST;
  localparam int unsigned RD_RST1 = RD_RST0 + T_RST;
  localparam int unsigned RD_R0   = RD_RST1 + T_RST_R;
  localparam int unsigned RD_R1   = RD_R0 + T_R;
  localparam int unsigned RS_OFF  = RD_R1;                    // row reset sequence
  localparam int unsigned RS_LDF  = RS_OFF + T_SETUP;
  localparam int unsigned RS_RST0 = RS_LDF + T_LD_RST;
  localparam int unsigned RS_RST1 = RS_RST0 + T_RST;
  localparam int unsigned PX_OFF  = RS_RST1;                  // pixel readout
  localparam int unsigned ADR_T   = T_SETUP + T_LD + T_HOLD;  // address window of a Ld pulse

  if (PIX_CYC < T_SETUP + T_LD + 2) begin : g_chk_pix $error("PIX_CYC too short for the Ld_X pulse"); end
  if (T_S_CAL + T_CAL > T_S) begin : g_chk_cal $error("Cal must lie inside S"); end
  if (DATA_LAT < 1) begin : g_chk_lat $error("DATA_LAT must be at least 1"); end

  localparam int unsigned PH_W = $clog2(PIX_CYC);

  // ---------------------------------------------------------------- frame state
  star_cfg_t   c;             // configuration latched at start
  logic        running;
  logic        stop_req;
  logic [15:0] t;             // cycle inside the row period
  logic        do_rd, do_rst; // this row period reads / resets a row
  logic [10:0] rd_row, rst_row;   // row index inside the window
  logic [9:0]  rd_addr, rst_addr; // their Y addresses
  logic [9:0]  col_addr;          // X address of the current pixel slot
  logic [9:0]  row_inc, col_inc;  // sub-sampling steps
  logic [15:0] rst_frames;    // frames whose reset has begun
  logic        rst_on;        // resets continue in the next row periods
  logic [15:0] lag;           // row periods since start, saturating at int_rows
  logic [15:0] pending;       // rows reset and not yet read

  // pixel readout position
  logic [10:0]     px_slot;
  logic [PH_W-1:0] px_ph;
  logic            px_on, px_done;

  logic slot_end;
  assign slot_end = running && px_done && (t >= c.row_period - 16'd1);

  // next-slot decisions
  logic        rst_last_row;
  logic        rst_on_nx;
  logic [15:0] pending_nx, lag_nx, int_eff;
  always_comb begin
    int_eff      = (c.int_rows == 16'd0) ? 16'd1 : c.int_rows;
    row_inc      = (c.row_step == 4'd0) ? 10'd1 : 10'(c.row_step);
    col_inc      = (c.col_step == 4'd0) ? 10'd1 : 10'(c.col_step);
    rst_last_row = do_rst && (rst_row == c.num_rows - 11'd1);
    rst_on_nx    = rst_on;
    if (rst_last_row &&
        (stop_req || stop || (c.nframes != 16'd0 && rst_frames == c.nframes)))
      rst_on_nx = 1'b0;
    pending_nx = pending + {15'd0, do_rst} - {15'd0, do_rd};
    lag_nx     = (lag >= int_eff) ? lag : lag + 16'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c          <= '0;
      running    <= 1'b0;
      stop_req   <= 1'b0;
      t          <= '0;
      do_rd      <= 1'b0;
      do_rst     <= 1'b0;
      rd_row     <= '0;
      rst_row    <= '0;
      rd_addr    <= '0;
      rst_addr   <= '0;
      rst_frames <= '0;
      rst_on     <= 1'b0;
      lag        <= '0;
      pending    <= '0;
    end else if (!running) begin
      stop_req <= 1'b0;
      if (start) begin
        c          <= cfg;
        running    <= 1'b1;
        t          <= '0;
        do_rd      <= 1'b0;
        do_rst     <= 1'b1;
        rd_row     <= '0;
        rst_row    <= '0;
        rd_addr    <= cfg.row_start;
        rst_addr   <= cfg.row_start;
        rst_frames <= 16'd1;
        rst_on     <= 1'b1;
        lag        <= '0;
        pending    <= '0;
      end
    end else begin
      if (stop) stop_req <= 1'b1;
      if (!slot_end) begin
        t <= t + 16'd1;
      end else begin
        t       <= '0;
        pending <= pending_nx;
        lag     <= lag_nx;
        rst_on  <= rst_on_nx;
        // row to reset next
        if (do_rst) begin
          if (rst_last_row) begin
            rst_row  <= '0;
            rst_addr <= c.row_start;
            if (rst_on_nx) rst_frames <= rst_frames + 16'd1;
          end else begin
            rst_row  <= rst_row + 11'd1;
            rst_addr <= rst_addr + row_inc;
          end
        end
        do_rst <= rst_on_nx;
        // row to read next
        if (do_rd) begin
          if (rd_row == c.num_rows - 11'd1) begin
            rd_row  <= '0;
            rd_addr <= c.row_start;
          end else begin
            rd_row  <= rd_row + 11'd1;
            rd_addr <= rd_addr + row_inc;
          end
        end
        do_rd <= (lag_nx >= int_eff) && (pending_nx != 16'd0);
        if (!rst_on_nx && pending_nx == 16'd0) running <= 1'b0;
      end
    end
  end

  assign busy = running;

  // ---------------------------------------------------------------- pixel position
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      px_slot  <= '0;
      px_ph    <= '0;
      px_on    <= 1'b0;
      px_done  <= 1'b0;
      col_addr <= '0;
    end else if (!running || slot_end) begin
      px_slot  <= '0;
      px_ph    <= '0;
      px_on    <= 1'b0;
      px_done  <= 1'b0;
      col_addr <= running ? c.col_start : cfg.col_start;
    end else if (!px_on && !px_done) begin
      if (t == 16'(PX_OFF - 1)) px_on <= 1'b1;
    end else if (px_on) begin
      if (px_ph == PH_W'(PIX_CYC - 1)) begin
        px_ph    <= '0;
        col_addr <= col_addr + col_inc;
        if (px_slot == c.num_cols + 11'(DATA_LAT - 1)) begin
          px_on   <= 1'b0;
          px_done <= 1'b1;
        end else begin
          px_slot <= px_slot + 11'd1;
        end
      end else begin
        px_ph <= px_ph + PH_W'(1);
      end
    end
  end

  // ---------------------------------------------------------------- pin generation
  function automatic logic win(input logic [15:0] tt, input int unsigned a, input int unsigned b);
    return (32'(tt) >= a) && (32'(tt) < b);
  endfunction

  logic       first_row;
  logic       col_slot;   // pixel slot that addresses a column
  logic [9:0] addr_nx;
  logic       ld_y_nx, ld_x_nx, s_nx, r_nx, rst_nx, cal_nx, clk_x_nx, clk_adc_nx;

  always_comb begin
    first_row = (rd_row == 11'd0);
    col_slot  = px_on && (px_slot < c.num_cols);
    addr_nx    = '0;
    ld_y_nx    = 1'b1;
    ld_x_nx    = 1'b1;
    s_nx       = 1'b0;
    r_nx       = 1'b0;
    rst_nx     = 1'b0;
    cal_nx     = 1'b0;
    clk_x_nx   = 1'b0;
    clk_adc_nx = 1'b0;
    if (running) begin
      if (do_rd) begin
        if (win(t, 0, ADR_T))                 addr_nx = rd_addr;
        if (win(t, RD_LDF, RD_LDF + T_LD))    ld_y_nx = 1'b0;
        if (win(t, RD_S0, RD_S1))             s_nx    = 1'b1;
        if (win(t, RD_RST0, RD_RST1))         rst_nx  = 1'b1;
        if (win(t, RD_R0, RD_R1))             r_nx    = 1'b1;
        if (first_row && win(t, RD_S0 + T_S_CAL, RD_S0 + T_S_CAL + T_CAL)) cal_nx = 1'b1;
      end
      if (do_rst) begin
        if (win(t, RS_OFF, RS_OFF + ADR_T))   addr_nx = rst_addr;
        if (win(t, RS_LDF, RS_LDF + T_LD))    ld_y_nx = 1'b0;
        if (win(t, RS_RST0, RS_RST1))         rst_nx  = 1'b1;
      end
      if (do_rd && px_on) begin
        clk_adc_nx = (px_ph < PH_W'(PIX_CYC / 2));
        if (col_slot) begin
          addr_nx  = col_addr;
          ld_x_nx  = !((px_ph >= PH_W'(T_SETUP)) && (px_ph < PH_W'(T_SETUP + T_LD)));
          clk_x_nx = (px_ph < PH_W'(PIX_CYC / 2));
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr      <= '0;
      ld_y_n    <= 1'b1;
      ld_x_n    <= 1'b1;
      s         <= 1'b0;
      r         <= 1'b0;
      row_reset <= 1'b0;
      cal       <= 1'b0;
      clk_x     <= 1'b0;
      clk_adc   <= 1'b0;
    end else begin
      addr      <= addr_nx;
      ld_y_n    <= ld_y_nx;
      ld_x_n    <= ld_x_nx;
      s         <= s_nx;
      r         <= r_nx;
      row_reset <= rst_nx;
      cal       <= cal_nx;
      clk_x     <= clk_x_nx;
      clk_adc   <= clk_adc_nx;
    end
  end

  // ---------------------------------------------------------------- pixel capture
  // D is sampled at the end of pixel slot k + DATA_LAT and belongs to column k.
  logic       cap;
  logic [10:0] cap_x;
  assign cap   = running && do_rd && px_on && (px_ph == PH_W'(PIX_CYC - 1)) &&
                 (px_slot >= 11'(DATA_LAT));
  assign cap_x = px_slot - 11'(DATA_LAT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pix_valid  <= 1'b0;
      pix        <= '0;
      frame_done <= 1'b0;
    end else begin
      pix_valid  <= cap;
      frame_done <= 1'b0;
      if (cap) begin
        pix.data <= d;
        pix.x    <= cap_x;
        pix.y    <= rd_row;
        pix.sof  <= (rd_row == 11'd0) && (cap_x == 11'd0);
        pix.eol  <= (cap_x == c.num_cols - 11'd1);
        pix.eof  <= (cap_x == c.num_cols - 11'd1) && (rd_row == c.num_rows - 11'd1);
        frame_done <= (cap_x == c.num_cols - 11'd1) && (rd_row == c.num_rows - 11'd1);
      end
    end
  end

  // ---------------------------------------------------------------- rules
  // Ld_Y and Ld_X never load at the same time, and S and R never overlap.
  a_ld_excl: assert property (@(posedge clk) disable iff (!rst_n) !(!ld_y_n && !ld_x_n));
  a_sr_excl: assert property (@(posedge clk) disable iff (!rst_n) !(s && r));

endmodule
