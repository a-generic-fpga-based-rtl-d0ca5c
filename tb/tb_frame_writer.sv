// tb_frame_writer: self-checking testbench of the frame writer.
//
// Pixel beats of small frames are offered at random times while the memory port's ready
// is driven randomly. The testbench keeps its own copy of the FIFO contents (a queue of
// at most FIFO_DEPTH pixels), predicts which pixels are dropped, and checks every memory
// write: address base + y*2**LINE_LOG2 + x, data, order. It also checks frame_done and
// frame_count, the overflow flag and drop count after a long memory stall, that a
// stalled request holds still, and clear_status.
`timescale 1ns/1ps
module tb_frame_writer;
  import img_pkg::*;

  localparam int ADDR_W = 25, LINE_LOG2 = 11, DEPTH = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              in_valid = 1'b0, clear_status = 1'b0, mem_ready = 1'b0;
  pix_t              in_pix = '0;
  logic [ADDR_W-1:0] base_addr = 25'h040_0000;
  logic              frame_done, overflow, mem_valid;
  logic [15:0]       frame_count, drop_count, mem_data;
  logic [ADDR_W-1:0] mem_addr;

  frame_writer #(.ADDR_W(ADDR_W), .LINE_LOG2(LINE_LOG2), .FIFO_DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pix_t exp_q[$];
  int   exp_drops = 0, writes = 0, eofs_written = 0, done_pulses = 0;
  int   ready_pct = 70;
  logic prev_stall = 1'b0;
  logic [ADDR_W-1:0] prev_addr;

  // reference model and checker, evaluated on each rising edge before the update
  always @(posedge clk) if (rst_n) begin
    pix_t h;
    int   occ;
    occ = exp_q.size();  // occupancy before this edge's write
    check(mem_valid == (occ != 0), "valid when non-empty");
    if (prev_stall) check(mem_valid && mem_addr == prev_addr, "stalled request held");
    if (mem_valid && mem_ready) begin
      writes++;
      if (exp_q.size() == 0) check(1'b0, "unexpected write");
      else begin
        h = exp_q.pop_front();
        check(mem_addr == base_addr + (ADDR_W'(h.y) << LINE_LOG2) + ADDR_W'(h.x), "address");
        check(mem_data == 16'(h.data), "data");
        if (h.eof) eofs_written++;
      end
    end
    if (in_valid) begin
      if (occ == DEPTH) exp_drops++;   // full: the pixel is lost
      else exp_q.push_back(in_pix);
    end
    prev_stall = mem_valid && !mem_ready;
    prev_addr  = mem_addr;
    if (frame_done) done_pulses++;
  end

  always @(negedge clk) mem_ready = ($urandom_range(99) < ready_pct);

  task automatic send_frame(input int cols, rows, input int gap_max);
    for (int y = 0; y < rows; y++)
      for (int x = 0; x < cols; x++) begin
        @(negedge clk);
        in_valid     = 1'b1;
        in_pix.x     = coord_t'(x);
        in_pix.y     = coord_t'(y);
        in_pix.data  = pix_data_t'($urandom);
        in_pix.sof   = (x == 0 && y == 0);
        in_pix.eol   = (x == cols - 1);
        in_pix.eof   = (x == cols - 1 && y == rows - 1);
        @(negedge clk) in_valid = 1'b0;
        repeat ($urandom_range(gap_max)) @(negedge clk);
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // no drops: gaps leave time to drain
    send_frame(12, 5, 3);
    send_frame(1360 >> 4, 3, 2);
    repeat (40) @(negedge clk);
    check(exp_drops == 0 && !overflow && drop_count == 0, "no overflow at low rate");
    check(frame_count == 2 && done_pulses == 2 && eofs_written == 2, "frame count");
    // memory stalls completely: the FIFO fills and pixels are dropped
    ready_pct = 0;
    send_frame(20, 1, 0);
    check(overflow, "overflow flag set");
    check(int'(drop_count) == exp_drops && exp_drops == 20 - DEPTH, "drop count");
    ready_pct = 60;
    repeat (60) @(negedge clk);
    check(exp_q.size() == 0 && !mem_valid, "drained after stall");
    // clear the status
    @(negedge clk) clear_status = 1'b1;
    @(negedge clk) clear_status = 1'b0;
    check(!overflow && drop_count == 0 && frame_count == 0, "clear_status");
    base_addr = 25'h1ff_0000;
    send_frame(9, 4, 1);
    repeat (60) @(negedge clk);
    check(frame_count == 1, "frame count after clear");
    check(writes > 300, "writes happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
