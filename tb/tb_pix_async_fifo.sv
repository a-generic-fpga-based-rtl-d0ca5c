// tb_pix_async_fifo: self-checking testbench of the dual-clock pixel FIFO.
//
// The write clock (37 ns) and read clock (10 ns) are unrelated. Phase 1 writes bursts
// while the reader is stalled, so the FIFO fills: the testbench checks that wfull rises
// after exactly DEPTH writes, that further writes are dropped and set the sticky
// overflow flag. Phase 2 lets the reader drain with a random ready and checks that the
// words come out in order and that rvalid falls when the FIFO is empty. Phase 3 streams
// random data with random gaps on both sides and compares every word read against a
// queue of the words accepted.
`timescale 1ns/1ps
module tb_pix_async_fifo;
  localparam int WIDTH = 35, DEPTH = 16;

  logic wclk = 1'b0, rclk = 1'b0, rst_n = 1'b0;
  always #18.5 wclk = ~wclk;
  always #5    rclk = ~rclk;

  logic             wvalid = 1'b0, wfull, overflow, rvalid, rready = 1'b0;
  logic [WIDTH-1:0] wdata = '0, rdata;

  pix_async_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (
    .wclk, .wrst_n(rst_n), .wvalid, .wdata, .wfull, .overflow,
    .rclk, .rrst_n(rst_n), .rvalid, .rdata, .rready);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (200_000) @(posedge rclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [WIDTH-1:0] q[$];
  int reads = 0;
  // writer-side bookkeeping of accepted words
  always @(posedge wclk) if (rst_n && wvalid && !wfull) q.push_back(wdata);
  // reader-side comparison
  always @(posedge rclk) if (rst_n && rvalid && rready) begin
    reads++;
    if (q.size() == 0) check(1'b0, "read from an empty FIFO");
    else check(rdata == q.pop_front(), "data in order");
  end

  task automatic write_word(input logic [WIDTH-1:0] w);
    @(negedge wclk) wvalid = 1'b1; wdata = w;
    @(negedge wclk) wvalid = 1'b0;
  endtask

  initial begin
    int n;
    repeat (3) @(posedge wclk);
    rst_n = 1'b1;
    repeat (3) @(posedge wclk);
    // phase 1: fill with the reader stalled
    for (int i = 0; i < DEPTH; i++) begin
      check(!wfull, "not full before DEPTH writes");
      write_word(WIDTH'(i + 100));
    end
    @(negedge wclk);
    check(wfull, "full after DEPTH writes");
    check(!overflow, "no overflow yet");
    write_word(WIDTH'(999));             // dropped
    @(negedge wclk);
    check(overflow, "overflow after a write into a full FIFO");
    check(q.size() == DEPTH, "dropped word not accepted");
    // phase 2: drain
    fork
      forever @(negedge rclk) rready = ($urandom_range(3) != 0);
    join_none
    wait (reads == DEPTH);
    repeat (10) @(posedge rclk);
    check(!rvalid, "empty after draining");
    repeat (4) @(posedge wclk);
    check(!wfull, "not full after draining");
    // phase 3: random streaming
    n = 0;
    while (n < 3000) begin
      @(negedge wclk);
      wvalid = ($urandom_range(1) == 1) && !wfull;
      wdata  = WIDTH'({$urandom, $urandom});
      if (wvalid) n++;
    end
    @(negedge wclk) wvalid = 1'b0;
    repeat (60) @(posedge rclk);
    check(q.size() == 0 && !rvalid, "all streamed words read");
    check(reads == DEPTH + 3000, $sformatf("read count %0d", reads));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
