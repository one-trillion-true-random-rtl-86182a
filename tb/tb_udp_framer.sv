// tb_udp_framer: checks the Ethernet/IPv4/UDP frames built around the random
// payload.
//
// A testbench queue supplies random 64-bit words (q_count, q_data, q_pop);
// tx_tready is random, so the MAC stalls the stream. Each frame is collected
// byte by byte (honouring tkeep) and checked field by field against values
// written out here: addresses, EtherType, IPv4 lengths, identification equal
// to the frame number, a header checksum that sums to 0xFFFF, UDP ports and
// length, and a payload equal to the queued words in order. Also checked:
// tvalid never drops inside a frame, and frame_count.
`timescale 1ns/1ps
module tb_udp_framer;
  import mtj_trng_pkg::*;
  localparam int PW = 8;                  // payload words
  localparam int FRAME_BYTES = 42 + 8 * PW;

  logic clk = 0, rst_n = 0;
  net_cfg_t net;
  logic [9:0] q_count;
  logic [63:0] q_data;
  logic q_pop;
  logic [63:0] tx_tdata;
  logic [7:0] tx_tkeep;
  logic tx_tvalid, tx_tlast, tx_tready = 0;
  logic [31:0] frame_count;
  int checks = 0, failures = 0;
  logic [63:0] q [$];
  logic [63:0] sent_words [$];   // words popped, in order
  logic [7:0] fb [$];             // bytes of the frame being received
  int frames = 0, stalls = 0;
  bit in_frame = 0;

  always #3.2 clk = ~clk;

  udp_framer #(.PAYLOAD_WORDS(PW), .CNT_W(10)) dut (.*);

  assign q_count = 10'(q.size() > 1023 ? 1023 : q.size());
  assign q_data  = (q.size() > 0) ? q[0] : 64'd0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL frame %0d: %s", frames, what); end
  endtask

  function automatic int be16(int i);
    return {fb[i], fb[i+1]};
  endfunction

  task automatic check_frame();
    int sum;
    chk(fb.size() == FRAME_BYTES, $sformatf("length %0d", fb.size()));
    if (fb.size() != FRAME_BYTES) return;
    chk({fb[0], fb[1], fb[2], fb[3], fb[4], fb[5]} == net.dst_mac, "dst mac");
    chk({fb[6], fb[7], fb[8], fb[9], fb[10], fb[11]} == net.src_mac, "src mac");
    chk(be16(12) == 'h0800, "ethertype");
    chk(fb[14] == 8'h45 && fb[23] == 8'd17 && fb[22] == 8'd64, "ip version/proto/ttl");
    chk(be16(16) == 20 + 8 + 8 * PW, "ip total length");
    chk(be16(18) == frames, "ip identification");
    chk(be16(20) == 'h4000, "ip flags");
    chk({fb[26], fb[27], fb[28], fb[29]} == net.src_ip, "src ip");
    chk({fb[30], fb[31], fb[32], fb[33]} == net.dst_ip, "dst ip");
    sum = 0;
    for (int i = 14; i < 34; i += 2) sum += be16(i);
    while (sum > 'hFFFF) sum = (sum & 'hFFFF) + (sum >> 16);
    chk(sum == 'hFFFF, $sformatf("ip checksum (sum %h)", sum));
    chk(be16(34) == net.src_port && be16(36) == net.dst_port, "udp ports");
    chk(be16(38) == 8 + 8 * PW, "udp length");
    chk(be16(40) == 0, "udp checksum");
    for (int w = 0; w < PW; w++) begin
      logic [63:0] e, got;
      e = sent_words.pop_front();
      for (int b = 0; b < 8; b++) got[8*b +: 8] = fb[42 + 8*w + b];
      chk(got == e, $sformatf("payload word %0d %h/%h", w, got, e));
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (q_pop) begin
      chk(q.size() > 0, "pop from empty queue");
      sent_words.push_back(q.pop_front());
    end
    if (in_frame) chk(tx_tvalid, "tvalid dropped inside frame");
    if (tx_tvalid && !tx_tready) stalls++;
    if (tx_tvalid && tx_tready) begin
      for (int b = 0; b < 8; b++) if (tx_tkeep[b]) fb.push_back(tx_tdata[8*b +: 8]);
      in_frame = !tx_tlast;
      if (tx_tlast) begin
        chk(tx_tkeep == 8'h03, "last tkeep");
        check_frame();
        fb.delete();
        frames++;
      end else begin
        chk(tx_tkeep == 8'hFF, "tkeep inside frame");
      end
    end
  end

  // queue filled at a random pace; MAC ready at random
  always @(negedge clk) if (rst_n) begin
    if ($urandom_range(0, 3) == 0) q.push_back({$urandom, $urandom});
    tx_tready <= ($urandom_range(0, 3) != 0);
  end

  initial begin
    net = DEFAULT_NET_CFG;
    net.dst_ip = 32'h0A00_0002;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (frames == 12);
    @(negedge clk);
    chk(frame_count == 32'd12, "frame_count");
    chk(stalls > 0, "no MAC stall exercised");
    $display("frames %0d stalls %0d", frames, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
