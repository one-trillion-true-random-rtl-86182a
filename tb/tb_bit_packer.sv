// tb_bit_packer: checks word packing, bit order and the bit counter.
//
// Feeds random bits with random gaps. The testbench keeps the bits in a list
// and, for each word_valid, rebuilds the expected word: bit number i of the
// word (0 = oldest) must sit at byte i/8, bit 7 - i%8. It also checks that a
// word appears exactly after every 64th bit and that bit_count matches.
`timescale 1ns/1ps
module tb_bit_packer;
  logic clk = 0, rst_n = 0;
  logic bit_valid = 0, bit_in = 0;
  logic word_valid;
  logic [63:0] word_out;
  logic [47:0] bit_count;
  int checks = 0, failures = 0;
  logic sent [$];
  int nbits = 0, nwords = 0;

  always #1 clk = ~clk;

  bit_packer #(.WORD_W(64), .CNT_W(48)) dut (.*);

  int consumed = 0;   // bits taken by the packer before the current edge
  always @(posedge clk) if (rst_n) begin
    logic [63:0] e;
    if (word_valid) begin
    for (int i = 0; i < 64; i++) e[8*(i/8) + 7 - i%8] = sent.pop_front();
    checks++;
    nwords++;
    if (word_out !== e) begin failures++; $display("FAIL word %0d: %h expected %h", nwords, word_out, e); end
    checks++;
    if (consumed != 64 * nwords) begin failures++; $display("FAIL word after %0d bits", consumed); end
    end
    if (bit_valid) consumed++;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // a fixed first word: 0x80 in byte 0 means the first bit sits in bit 7
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      bit_valid = 1; bit_in = (i == 0) || (i == 63);
      sent.push_back(bit_in);
      nbits++;
    end
    @(negedge clk) bit_valid = 0;
    @(negedge clk);
    checks++;
    if (word_out !== 64'h0100_0000_0000_0080) begin failures++; $display("FAIL fixed word %h", word_out); end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      bit_valid = ($urandom_range(0, 2) != 0);
      bit_in    = 1'($urandom_range(0, 1));
      if (bit_valid) begin sent.push_back(bit_in); nbits++; end
    end
    @(negedge clk) bit_valid = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (bit_count !== 48'(nbits)) begin failures++; $display("FAIL bit_count %0d/%0d", bit_count, nbits); end
    checks++;
    if (sent.size() != nbits % 64 || nwords < 30) begin failures++; $display("FAIL leftover %0d words %0d", sent.size(), nwords); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
