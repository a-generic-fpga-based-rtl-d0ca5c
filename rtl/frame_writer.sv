// frame_writer: writes the pixel stream into the frame area of the board's SDRAM.
//
// The acquired image goes to RAM, where the soft processor works on it. Pixels arrive
// from a sensor front end that cannot be stalled, so they first enter a FIFO_DEPTH-entry
// synchronous FIFO; from there each pixel becomes one 16-bit word write on a valid/ready
// port toward the SDRAM controller, at word address
//     base_addr + y * 2**LINE_LOG2 + x,
// with the 10-bit sample in the low bits. The 64 MB x16 SDRAM of the board has 2**25
// words, hence ADDR_W = 25. A line stride of 2048 words holds a 1360-pixel CCD line and
// a 1024-pixel Star1000 line; one frame then spans 4 MB.
//
// When the FIFO is full an arriving pixel is dropped: the sticky overflow flag is set
// and drop_count counts the lost pixels. frame_done pulses when the write of a pixel
// marked eof is accepted, and frame_count counts such frames. clear_status clears the
// overflow flag, drop_count and frame_count.
//
// The paper gives the RAM (64 MB) and says that images are sent to it; the write port,
// the FIFO depth, the one-word-per-pixel layout and the line stride are this design's
// choices. The SDRAM controller itself is not part of this design.
module frame_writer
  import img_pkg::*;
#(
  parameter int unsigned ADDR_W     = 25,  // word address width (64 MB / 2 bytes)
  parameter int unsigned LINE_LOG2  = 11,  // line stride 2048 words
  parameter int unsigned FIFO_DEPTH = 64   // power of two
) (
  input  logic              clk,
  input  logic              rst_n,
  // pixel stream in (no back-pressure)
  input  logic              in_valid,
  input  pix_t              in_pix,
  // configuration and status
  input  logic [ADDR_W-1:0] base_addr,
  input  logic              clear_status,
  output logic              frame_done,
  output logic [15:0]       frame_count,
  output logic              overflow,
  output logic [15:0]       drop_count,
  // word write port toward the SDRAM controller
  output logic              mem_valid,
  input  logic              mem_ready,
  output logic [ADDR_W-1:0] mem_addr,
  output logic [15:0]       mem_data
);
  localparam int unsigned AW = $clog2(FIFO_DEPTH);

  pix_t        fifo [FIFO_DEPTH];
  logic [AW:0] wr_ptr, rd_ptr;
  logic        full, empty, push, pop;

  assign full  = (wr_ptr[AW] != rd_ptr[AW]) && (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]);
  assign empty = (wr_ptr == rd_ptr);
  assign push  = in_valid && !full;
  assign pop   = mem_valid && mem_ready;

  always_ff @(posedge clk) begin
    if (push) fifo[wr_ptr[AW-1:0]] <= in_pix;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  pix_t head;
  assign head      = fifo[rd_ptr[AW-1:0]];
  assign mem_valid = !empty;
  assign mem_addr  = base_addr + (ADDR_W'(head.y) << LINE_LOG2) + ADDR_W'(head.x);
  assign mem_data  = 16'(head.data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame_done  <= 1'b0;
      frame_count <= '0;
      overflow    <= 1'b0;
      drop_count  <= '0;
    end else begin
      frame_done <= pop && head.eof;
      if (clear_status) begin
        frame_count <= '0;
        overflow    <= 1'b0;
        drop_count  <= '0;
      end else begin
        if (pop && head.eof) frame_count <= frame_count + 16'd1;
        if (in_valid && full) begin
          overflow <= 1'b1;
          if (drop_count != '1) drop_count <= drop_count + 16'd1;
        end
      end
    end
  end

  // The port holds a request until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           mem_valid && !mem_ready |=> mem_valid && $stable(mem_addr));

  if (FIFO_DEPTH < 2 || (1 << AW) != FIFO_DEPTH) begin : g_chk_depth
    $error("FIFO_DEPTH must be a power of two, at least 2");
  end
endmodule
