// star1000_model: behavioural model of the digital pins of the Star1000 image sensor,
// for simulation only (not synthesizable).
//
// It latches A0..A9 as row address at the end of an Ld_Y low pulse and as column
// address at the end of an Ld_X low pulse. The rising edge of S "samples" the latched
// row: the model notes which row it is, how often it has been read before (its frame
// number) and how long ago the row was last reset (the integration time, in ns). The
// ADC is a DATA_LAT-stage pipeline clocked by Clk_ADC: each rising edge converts the
// currently latched column of the sampled row. The pixel value is a fixed function of
// column, row and frame, pixel_value(), which testbenches use to predict the data.
// The model also counts sequence errors it can see on its pins.
module star1000_model #(
  parameter int unsigned DATA_LAT = 3
) (
  input  logic [9:0] addr,
  input  logic       ld_y_n,
  input  logic       ld_x_n,
  input  logic       s,
  input  logic       r,
  input  logic       row_reset,
  input  logic       cal,
  input  logic       clk_x,
  input  logic       clk_adc,
  output logic [9:0] d
);
  function automatic logic [9:0] pixel_value(input int x, input int y, input int f);
    return 10'((x * 3 + y * 5 + f * 17) & 10'h3ff);
  endfunction

  logic [9:0] y_lat = '0, x_lat = '0, smp_row = '0;
  int         smp_frame = 0;
  longint     rst_time [1024];
  int         reads    [1024];
  longint     last_integ_ns = 0;
  int         s_count = 0, r_count = 0, cal_count = 0, reset_count = 0, clkx_count = 0;
  int         cal_row = -1;
  int         errors = 0;
  logic       s_seen = 1'b0;   // S seen, R not yet
  logic [9:0] pipe [DATA_LAT];

  initial begin
    foreach (rst_time[i]) rst_time[i] = 0;
    foreach (reads[i]) reads[i] = 0;
    foreach (pipe[i]) pipe[i] = '0;
  end

  always @(posedge ld_y_n) y_lat = addr;
  always @(posedge ld_x_n) x_lat = addr;
  always @(posedge clk_x) clkx_count++;

  always @(posedge row_reset) begin
    rst_time[y_lat] = $time;
    reset_count++;
  end

  always @(posedge s) begin
    if (s_seen) errors++;            // two S without R
    s_seen        = 1'b1;
    smp_row       = y_lat;
    smp_frame     = reads[y_lat];
    reads[y_lat]  = reads[y_lat] + 1;
    last_integ_ns = $time - rst_time[y_lat];
    s_count++;
  end

  always @(posedge r) begin
    if (!s_seen || y_lat != smp_row) errors++;  // R must follow S of the same row
    s_seen = 1'b0;
    r_count++;
  end

  always @(posedge cal) begin
    if (!s) errors++;                // Cal inside S
    cal_row = int'(y_lat);
    cal_count++;
  end

  always @(posedge clk_adc) begin
    for (int i = DATA_LAT - 1; i > 0; i--) pipe[i] = pipe[i-1];
    pipe[0] = pixel_value(int'(x_lat), int'(smp_row), smp_frame);
  end

  assign d = pipe[DATA_LAT-1];
endmodule
