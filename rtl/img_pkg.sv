// img_pkg: types and constants shared by the image-acquisition blocks.
//
// Every sensor front end delivers the same pixel stream: one beat per pixel, carrying
// the 10-bit sample, its column (x) and row (y) in the image, and three framing flags.
// sof marks the first pixel of a frame, eol the last pixel of a line and eof the last
// pixel of a frame. Coordinates are 11 bits wide so that the 1360-column UV CCD fits.
// The 10-bit sample width and the 1024 x 1024 Star1000 array follow the sensor
// descriptions; the stream format itself is a choice of this design.
package img_pkg;

  localparam int unsigned DATA_W  = 10;  // ADC resolution of both sensors
  localparam int unsigned COORD_W = 11;  // enough for 1360 columns / 1024 rows

  typedef logic [DATA_W-1:0]  pix_data_t;
  typedef logic [COORD_W-1:0] coord_t;

  typedef struct packed {
    logic      sof;   // first pixel of a frame
    logic      eol;   // last pixel of a line
    logic      eof;   // last pixel of a frame
    coord_t    x;     // column in the image (0 = first read column)
    coord_t    y;     // row in the image (0 = first read row)
    pix_data_t data;  // ADC sample
  } pix_t;

  localparam int unsigned PIX_W = $bits(pix_t);

  // Run-time settings of the Star1000 sequencer, written by the processor.
  // Rows and columns are counted from the window origin (row_start, col_start); with a
  // step above 1 only every row_step-th row / col_step-th column is read (sub-sampling).
  // A frame of num_rows rows takes num_rows row periods; each row is integrated
  // for about int_rows row periods (see star1000_ctrl).
  typedef struct packed {
    logic [9:0]  row_start;   // first Y address of the window
    logic [9:0]  col_start;   // first X address of the window
    logic [10:0] num_rows;    // 1..1024 rows in the window
    logic [10:0] num_cols;    // 1..1024 columns in the window
    logic [3:0]  row_step;    // Y address increment, 0 is taken as 1
    logic [3:0]  col_step;    // X address increment, 0 is taken as 1
    logic [15:0] int_rows;    // integration time in row periods, >= 1
    logic [15:0] row_period;  // row period in clock cycles (10240 = 0.1024 ms at 100 MHz)
    logic [15:0] nframes;     // frames per start command, 0 = until stop
  } star_cfg_t;

  // Source selection of the top level.
  typedef enum logic {
    SENSOR_STAR1000 = 1'b0,
    SENSOR_UVCCD    = 1'b1
  } sensor_e;

endpackage
