// bit_queue: dual-clock FIFO that holds packed random words between the
// sample clock (write side) and the Ethernet transmit clock (read side).
//
// It holds 2**ADDR_W words. Read and write pointers are ADDR_W+1 bits wide;
// each is kept in binary and in Gray code, and the Gray copy crosses to the
// other clock through a two-flop synchroniser. Full and empty compare a local
// pointer with the synchronised one, so both are safe (full may be reported a
// little late in clearing, empty likewise). The read side is first-word-fall-
// through: rd_data shows the head word whenever rd_empty is low.
//
// The random bit generator is never stalled: a word written while the queue
// is full is dropped and counted in wr_drop_count. rd_count is the fill level
// seen by the read side (it may lag writes by a few read clocks), which the
// UDP framer uses to wait for a whole payload.
//
// Timing: a write becomes visible to the reader after about three read
// clocks; a read frees its slot for the writer after about three write
// clocks. The queue itself is named in the published design; its depth, the
// clock crossing and the drop policy are this design's own.
module bit_queue #(
  parameter int unsigned DATA_W = 64,
  parameter int unsigned ADDR_W = 9
) (
  // write side, sample clock
  input  logic              wclk,
  input  logic              wrst_n,
  input  logic              wr_en,
  input  logic [DATA_W-1:0] wr_data,
  output logic              wr_full,
  output logic [31:0]       wr_drop_count,
  // read side, Ethernet clock
  input  logic              rclk,
  input  logic              rrst_n,
  input  logic              rd_en,
  output logic [DATA_W-1:0] rd_data,
  output logic              rd_empty,
  output logic [ADDR_W:0]   rd_count
);

  localparam int unsigned DEPTH = 1 << ADDR_W;

  logic [DATA_W-1:0] mem [DEPTH];

  function automatic logic [ADDR_W:0] bin2gray(logic [ADDR_W:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [ADDR_W:0] gray2bin(logic [ADDR_W:0] g);
    logic [ADDR_W:0] b;
    b[ADDR_W] = g[ADDR_W];
    for (int i = int'(ADDR_W) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  logic [ADDR_W:0] wbin, wgray;         // write pointer, binary and Gray
  logic [ADDR_W:0] rbin, rgray;         // read pointer, binary and Gray

  // ---------------- write side ----------------
  logic [ADDR_W:0] rgray_w1, rgray_w2;   // read pointer synchronised to wclk
  logic            do_write;

  assign wr_full  = (wgray == {~rgray_w2[ADDR_W:ADDR_W-1], rgray_w2[ADDR_W-2:0]});
  assign do_write = wr_en && !wr_full;

  always_ff @(posedge wclk) begin
    if (!wrst_n) begin
      wbin          <= '0;
      wgray         <= '0;
      rgray_w1      <= '0;
      rgray_w2      <= '0;
      wr_drop_count <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (do_write) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
      if (wr_en && wr_full && wr_drop_count != '1)
        wr_drop_count <= wr_drop_count + 32'd1;
    end
  end

  always_ff @(posedge wclk) begin
    if (do_write) mem[wbin[ADDR_W-1:0]] <= wr_data;
  end

  // ---------------- read side ----------------
  logic [ADDR_W:0] wgray_r1, wgray_r2;   // write pointer synchronised to rclk
  logic            do_read;

  assign rd_empty = (rgray == wgray_r2);
  assign do_read  = rd_en && !rd_empty;
  assign rd_data  = mem[rbin[ADDR_W-1:0]];
  assign rd_count = gray2bin(wgray_r2) - rbin;

  always_ff @(posedge rclk) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (do_read) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

  a_no_read_when_empty: assert property (@(posedge rclk) disable iff (!rrst_n) rd_en |-> !rd_empty)
    else $error("bit_queue: read while empty");

  initial assert (ADDR_W >= 2) else $error("bit_queue: ADDR_W must be at least 2");

endmodule
