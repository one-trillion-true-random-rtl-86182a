// bit_packer: gathers the serial random bits into words for the queue.
//
// Every bit_valid adds bit_in to the word being built. Bit number i of a word
// (0 = oldest) goes to byte i/8, and inside a byte the oldest bit is the most
// significant, so a host that reads the UDP payload byte by byte, MSB first,
// gets the bits in the order they were produced. After WORD_W bits the full
// word is presented on word_out with a one-clock word_valid and the next word
// starts empty. bit_count counts every bit taken since reset.
//
// Timing: word_valid rises one clock after the bit_valid of the word's last
// bit; word_out holds its value until the next word completes.
//
// The published design only says the bits are queued before they are sent;
// the word width and bit order are this design's own choice.
module bit_packer #(
  parameter int unsigned WORD_W = 64,
  parameter int unsigned CNT_W  = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bit_valid,
  input  logic              bit_in,
  output logic              word_valid,
  output logic [WORD_W-1:0] word_out,
  output logic [CNT_W-1:0]  bit_count
);

  localparam int unsigned IW = $clog2(WORD_W);

  logic [IW-1:0]     idx;
  logic [WORD_W-1:0] acc, acc_next;
  logic [IW-1:0]     pos;

  // oldest bit of each byte in its MSB
  assign pos = {idx[IW-1:3], ~idx[2:0]};

  always_comb begin
    acc_next      = acc;
    acc_next[pos] = bit_in;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idx        <= '0;
      acc        <= '0;
      word_valid <= 1'b0;
      word_out   <= '0;
      bit_count  <= '0;
    end else begin
      word_valid <= 1'b0;
      if (bit_valid) begin
        bit_count <= bit_count + CNT_W'(1);
        idx       <= idx + IW'(1);
        if (idx == IW'(WORD_W - 1)) begin
          word_out   <= acc_next;
          word_valid <= 1'b1;
          acc        <= '0;
        end else begin
          acc <= acc_next;
        end
      end
    end
  end

  initial assert (WORD_W >= 8 && (WORD_W & (WORD_W - 1)) == 0)
    else $error("bit_packer: WORD_W must be a power of two, at least 8");

endmodule
