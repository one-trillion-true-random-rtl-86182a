// tb_bit_queue: checks the dual-clock FIFO for order, loss and overflow.
//
// The write clock runs at 468.75 MHz and the read clock at 156.25 MHz (the
// sample and Ethernet clocks), with a small phase offset. Phase 1 writes and
// reads random traffic; phase 2 stops reading until the FIFO overflows, then
// drains it. The testbench records every word it offers while wr_full is low
// and expects exactly those, in order, at the read side; words offered while
// full must be counted in wr_drop_count. rd_count must never claim more words
// than have been accepted and not yet read.
`timescale 1ps/1ps
module tb_bit_queue;
  localparam int AW = 4;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [63:0] wr_data = 0, rd_data;
  logic wr_full, rd_empty;
  logic [31:0] wr_drop_count;
  logic [AW:0] rd_count;
  int checks = 0, failures = 0;
  logic [63:0] model [$];
  int drops = 0, reads = 0, writes = 0;
  bit read_on = 1, write_on = 1;

  always #1067 wclk = ~wclk;
  initial begin #1500; forever #3200 rclk = ~rclk; end

  bit_queue #(.DATA_W(64), .ADDR_W(AW)) dut (.*);

  // write side: offer a random word on about half of the clocks
  always @(negedge wclk) if (wrst_n) begin
    wr_en   <= write_on && ($urandom_range(0, 1) == 1);
    wr_data <= {$urandom, $urandom};
  end
  always @(posedge wclk) if (wrst_n && wr_en) begin
    if (wr_full) drops++;
    else begin model.push_back(wr_data); writes++; end
  end

  // read side: pop on random clocks when not empty
  always @(negedge rclk) if (rrst_n) rd_en <= read_on && !rd_empty && ($urandom_range(0, 3) != 0);
  always @(posedge rclk) if (rrst_n) begin
    checks++;
    if (int'(rd_count) > model.size()) begin
      failures++; $display("FAIL rd_count %0d above %0d held", rd_count, model.size());
    end
    if (rd_en) begin
      logic [63:0] e;
      e = model.pop_front();
      reads++;
      checks++;
      if (rd_data !== e) begin failures++; $display("FAIL read %0d: %h expected %h", reads, rd_data, e); end
    end
  end

  initial begin
    repeat (4) @(posedge rclk);
    wrst_n = 1; rrst_n = 1;
    repeat (3000) @(posedge rclk);
    // overflow: stop reading
    read_on = 0;
    repeat (200) @(posedge rclk);
    checks++;
    if (drops == 0 || !wr_full) begin failures++; $display("FAIL no overflow seen"); end
    write_on = 0;
    read_on  = 1;
    repeat (200) @(posedge rclk);
    checks++;
    if (!rd_empty || model.size() != 0 || rd_count != 0) begin
      failures++; $display("FAIL not drained: %0d left", model.size());
    end
    checks++;
    if (wr_drop_count != 32'(drops)) begin failures++; $display("FAIL drop count %0d/%0d", wr_drop_count, drops); end
    $display("writes %0d reads %0d drops %0d", writes, reads, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge rclk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
