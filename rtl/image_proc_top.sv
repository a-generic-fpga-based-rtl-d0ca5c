// image_proc_top: image-acquisition logic of the FPGA detector-readout board.
//
// The board reads either of two sensors and puts the image into SDRAM for the soft
// processor:
//   * the Star1000 CMOS sensor, whose pins are all driven by star1000_ctrl (row reset,
//     row readout, Cal, pixel readout and ADC capture, at the 100 MHz system clock);
//   * the UV CCD camera, whose own timing generator sends frame-valid, line-valid,
//     pixel clock and data; uvccd_capture decodes them in the pixel-clock domain and
//     pix_async_fifo brings the pixels to the system clock.
// sensor_sel chooses the source whose pixels go to frame_writer, which turns them into
// 16-bit word writes into the frame area starting at frame_base. The Star1000 sequencer
// accepts star_start only while the Star1000 is selected, and the CCD capture takes a
// frame only if the CCD is selected when the frame begins, so a switch of sensor_sel
// between frames changes the source cleanly. sensor_en switches the 5 V supply of the
// selected sensor when sensor_pwr is set; only one sensor is powered at a time.
//
// The processor (a vendor soft core), the SDRAM controller, the SPI set-up of the CCD
// timing generator, the UARTs and the SD card are outside this module: their sides are
// the configuration/status ports and the memory write port. rst_n is asynchronous; it
// is released to the pixel-clock domain through a two-stage synchroniser. The system
// clock is the paper's 100 MHz; the CCD pixel clock may be any rate up to it.
module image_proc_top
  import img_pkg::*;
#(
  parameter int unsigned ADDR_W     = 25,  // SDRAM word address (64 MB, 16-bit words)
  parameter int unsigned LINE_LOG2  = 11,  // frame line stride 2048 words
  parameter int unsigned WR_FIFO    = 64,  // frame_writer FIFO depth
  parameter int unsigned CDC_FIFO   = 16,  // CCD clock-crossing FIFO depth
  parameter int unsigned PIX_CYC    = 9,   // Star1000 clock cycles per pixel
  parameter int unsigned ADC_LAT    = 3    // Star1000 ADC latency in pixel periods
) (
  input  logic              clk,          // 100 MHz system clock
  input  logic              rst_n,
  // processor side: control and status
  input  sensor_e           sensor_sel,
  input  logic              sensor_pwr,
  output logic [1:0]        sensor_en,    // [0] Star1000 supply, [1] UV CCD supply
  input  star_cfg_t         star_cfg,
  input  logic              star_start,
  input  logic              star_stop,
  output logic              star_busy,
  input  logic [ADDR_W-1:0] frame_base,
  input  logic              clear_status,
  output logic              frame_done,
  output logic [15:0]       frame_count,
  output logic              wr_overflow,
  output logic [15:0]       drop_count,
  output logic              cdc_overflow,
  // Star1000 pins
  output logic [9:0]        s1k_addr,
  output logic              s1k_ld_y_n,
  output logic              s1k_ld_x_n,
  output logic              s1k_s,
  output logic              s1k_r,
  output logic              s1k_reset,
  output logic              s1k_cal,
  output logic              s1k_clk_x,
  output logic              s1k_clk_adc,
  input  logic [9:0]        s1k_d,
  // UV CCD timing generator outputs
  input  logic              ccd_pclk,
  input  logic              ccd_fv,
  input  logic              ccd_lv,
  input  pix_data_t         ccd_data,
  // SDRAM controller write port
  output logic              mem_valid,
  input  logic              mem_ready,
  output logic [ADDR_W-1:0] mem_addr,
  output logic [15:0]       mem_data
);

  // ------------------------------------------------------------ sensor power
  always_comb begin
    sensor_en = 2'b00;
    if (sensor_pwr) sensor_en = (sensor_sel == SENSOR_UVCCD) ? 2'b10 : 2'b01;
  end

  // ------------------------------------------------------------ Star1000 path
  logic s1k_valid;
  pix_t s1k_pix;

  star1000_ctrl #(.PIX_CYC(PIX_CYC), .DATA_LAT(ADC_LAT)) u_star (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg       (star_cfg),
    .start     (star_start && sensor_sel == SENSOR_STAR1000),
    .stop      (star_stop),
    .busy      (star_busy),
    .frame_done(),
    .addr      (s1k_addr),
    .ld_y_n    (s1k_ld_y_n),
    .ld_x_n    (s1k_ld_x_n),
    .s         (s1k_s),
    .r         (s1k_r),
    .row_reset (s1k_reset),
    .cal       (s1k_cal),
    .clk_x     (s1k_clk_x),
    .clk_adc   (s1k_clk_adc),
    .d         (s1k_d),
    .pix_valid (s1k_valid),
    .pix       (s1k_pix)
  );

  // ------------------------------------------------------------ UV CCD path
  logic [1:0] prst_sync;
  logic       prst_n;
  always_ff @(posedge ccd_pclk or negedge rst_n) begin
    if (!rst_n) prst_sync <= 2'b00;
    else        prst_sync <= {prst_sync[0], 1'b1};
  end
  assign prst_n = prst_sync[1];

  logic [1:0] ccd_sel_sync;
  always_ff @(posedge ccd_pclk or negedge prst_n) begin
    if (!prst_n) ccd_sel_sync <= 2'b00;
    else         ccd_sel_sync <= {ccd_sel_sync[0], sensor_sel == SENSOR_UVCCD};
  end

  logic ccd_valid, ccd_ovf_p;
  pix_t ccd_pix;

  uvccd_capture u_ccd (
    .pclk      (ccd_pclk),
    .rst_n     (prst_n),
    .enable    (ccd_sel_sync[1]),
    .fv        (ccd_fv),
    .lv        (ccd_lv),
    .data      (ccd_data),
    .pix_valid (ccd_valid),
    .pix       (ccd_pix),
    .frame_done()
  );

  logic        cdc_valid, cdc_full;
  logic [PIX_W-1:0] cdc_data;

  pix_async_fifo #(.WIDTH(PIX_W), .DEPTH(CDC_FIFO)) u_cdc (
    .wclk    (ccd_pclk),
    .wrst_n  (prst_n),
    .wvalid  (ccd_valid),
    .wdata   (ccd_pix),
    .wfull   (cdc_full),
    .overflow(ccd_ovf_p),
    .rclk    (clk),
    .rrst_n  (rst_n),
    .rvalid  (cdc_valid),
    .rdata   (cdc_data),
    .rready  (1'b1)
  );

  // sticky CDC overflow flag, brought to the system clock
  logic [1:0] ovf_sync;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ovf_sync <= 2'b00;
    else        ovf_sync <= {ovf_sync[0], ccd_ovf_p};
  end
  assign cdc_overflow = ovf_sync[1];

  // ------------------------------------------------------------ source select
  logic wr_valid;
  pix_t wr_pix;
  always_comb begin
    if (sensor_sel == SENSOR_UVCCD) begin
      wr_valid = cdc_valid;
      wr_pix   = pix_t'(cdc_data);
    end else begin
      wr_valid = s1k_valid;
      wr_pix   = s1k_pix;
    end
  end

  frame_writer #(.ADDR_W(ADDR_W), .LINE_LOG2(LINE_LOG2), .FIFO_DEPTH(WR_FIFO)) u_wr (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (wr_valid),
    .in_pix      (wr_pix),
    .base_addr   (frame_base),
    .clear_status(clear_status),
    .frame_done  (frame_done),
    .frame_count (frame_count),
    .overflow    (wr_overflow),
    .drop_count  (drop_count),
    .mem_valid   (mem_valid),
    .mem_ready   (mem_ready),
    .mem_addr    (mem_addr),
    .mem_data    (mem_data)
  );

endmodule
