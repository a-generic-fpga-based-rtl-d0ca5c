// pix_async_fifo: dual-clock FIFO that carries the pixel stream from the CCD pixel
// clock to the system clock.
//
// A standard Gray-code FIFO: the write and read pointers are one bit wider than the
// address, cross to the other clock through two flip-flops each as Gray code, and full
// and empty are derived from the synchronised copies (both are pessimistic). The storage
// is a DEPTH-entry array of WIDTH bits, written in the write domain and read
// combinationally at the read pointer (first-word fall-through). A write when full is
// dropped and counted on the sticky overflow flag of the write domain. The paper does
// not describe the clock crossing; it is needed because the CCD's pixel clock is
// independent of the 100 MHz system clock.
module pix_async_fifo #(
  parameter int unsigned WIDTH = 36,
  parameter int unsigned DEPTH = 16   // power of two
) (
  // write side
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wvalid,
  input  logic [WIDTH-1:0] wdata,
  output logic             wfull,
  output logic             overflow,  // sticky: a write was dropped
  // read side
  input  logic             rclk,
  input  logic             rrst_n,
  output logic             rvalid,
  output logic [WIDTH-1:0] rdata,
  input  logic             rready
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer in read domain
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer in write domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  logic [AW:0] wbin_nx;
  assign wbin_nx = wbin + (AW+1)'(1);
  assign wfull   = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wclk) begin
    if (wvalid && !wfull) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
      overflow <= 1'b0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wvalid && !wfull) begin
        wbin  <= wbin_nx;
        wgray <= bin2gray(wbin_nx);
      end
      if (wvalid && wfull) overflow <= 1'b1;
    end
  end

  // read domain
  logic [AW:0] rbin_nx;
  assign rbin_nx = rbin + (AW+1)'(1);
  assign rvalid  = (rgray != wgray_r2);
  assign rdata   = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rvalid && rready) begin
        rbin  <= rbin_nx;
        rgray <= bin2gray(rbin_nx);
      end
    end
  end

  if (DEPTH < 4 || (1 << AW) != DEPTH) begin : g_chk_depth
    $error("DEPTH must be a power of two, at least 4");
  end
endmodule
