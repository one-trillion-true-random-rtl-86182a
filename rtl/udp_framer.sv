// udp_framer: sends the queued random words to the host as UDP datagrams.
//
// When the queue holds at least PAYLOAD_WORDS words, the framer builds an
// Ethernet II + IPv4 + UDP header (42 bytes) and streams the frame to a 10G
// Ethernet MAC as 64-bit words: byte n of the frame is byte n%8 of word n/8,
// in bits [8*(n%8)+7 : 8*(n%8)]. The header fills words 0-4 and the first two
// bytes of word 5; from there on every word is the last two bytes of the
// previous payload word followed by the first six bytes of the next one, so
// one queue word is popped per output word. The final word carries the two
// left-over payload bytes (tkeep = 8'h03). A frame is PAYLOAD_WORDS+6 words.
//
// Header fields: destination and source MAC, EtherType 0x0800; IPv4 version 4,
// IHL 5, total length 28+payload, identification = frame number, don't-
// fragment, TTL 64, protocol 17, header checksum computed here; UDP source
// and destination port, length 8+payload, checksum 0 (none). The MAC adds the
// preamble and the frame check sequence.
//
// Handshake: AXI4-Stream style. A word moves when tx_tvalid and tx_tready are
// both high; tx_tvalid stays high from the first word to tx_tlast, because
// the whole payload is queued before the frame starts. The first word appears
// one clock after the queue reaches PAYLOAD_WORDS.
//
// The published design only states that the bits go to a computer over 10 Gb/s
// Ethernet with UDP; the frame layout, payload size and handshake are this
// design's own.
module udp_framer
  import mtj_trng_pkg::*;
#(
  parameter int unsigned PAYLOAD_WORDS = 128,
  parameter int unsigned CNT_W         = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  net_cfg_t         net,
  input  logic [CNT_W-1:0] q_count,
  input  logic [63:0]      q_data,
  output logic             q_pop,
  output logic [63:0]      tx_tdata,
  output logic [7:0]       tx_tkeep,
  output logic             tx_tvalid,
  output logic             tx_tlast,
  input  logic             tx_tready,
  output logic [31:0]      frame_count
);

  localparam int unsigned PAYLOAD_BYTES = 8 * PAYLOAD_WORDS;
  localparam int unsigned LAST_W        = PAYLOAD_WORDS + 5;
  localparam int unsigned WI_W          = $clog2(LAST_W + 1);
  localparam logic [15:0] IP_LEN        = 16'(20 + 8 + PAYLOAD_BYTES);
  localparam logic [15:0] UDP_LEN       = 16'(8 + PAYLOAD_BYTES);

  // header, byte n in element n; padded to 48 bytes (six words)
  typedef logic [47:0][7:0] hdr_t;

  function automatic logic [15:0] ip_checksum(net_cfg_t n, logic [15:0] ident);
    logic [31:0] s;
    s = 32'h4500 + 32'(IP_LEN) + 32'(ident) + 32'h4000 + 32'h4011
      + 32'(n.src_ip[31:16]) + 32'(n.src_ip[15:0])
      + 32'(n.dst_ip[31:16]) + 32'(n.dst_ip[15:0]);
    s = {16'd0, s[15:0]} + {16'd0, s[31:16]};
    s = {16'd0, s[15:0]} + {16'd0, s[31:16]};
    return ~s[15:0];
  endfunction

  function automatic hdr_t build_header(net_cfg_t n, logic [15:0] ident);
    hdr_t        h;
    logic [15:0] csum;
    h    = '0;
    csum = ip_checksum(n, ident);
    for (int i = 0; i < 6; i++) begin
      h[i]     = n.dst_mac[8*(5-i) +: 8];
      h[6 + i] = n.src_mac[8*(5-i) +: 8];
    end
    h[12] = 8'h08;  h[13] = 8'h00;                        // EtherType IPv4
    h[14] = 8'h45;  h[15] = 8'h00;                        // version/IHL, DSCP
    h[16] = IP_LEN[15:8];  h[17] = IP_LEN[7:0];
    h[18] = ident[15:8];   h[19] = ident[7:0];
    h[20] = 8'h40;  h[21] = 8'h00;                        // don't fragment
    h[22] = 8'd64;  h[23] = 8'd17;                        // TTL, UDP
    h[24] = csum[15:8];    h[25] = csum[7:0];
    for (int i = 0; i < 4; i++) begin
      h[26 + i] = n.src_ip[8*(3-i) +: 8];
      h[30 + i] = n.dst_ip[8*(3-i) +: 8];
    end
    h[34] = n.src_port[15:8];  h[35] = n.src_port[7:0];
    h[36] = n.dst_port[15:8];  h[37] = n.dst_port[7:0];
    h[38] = UDP_LEN[15:8];     h[39] = UDP_LEN[7:0];
    h[40] = 8'h00;  h[41] = 8'h00;                        // no UDP checksum
    return h;
  endfunction

  typedef enum logic {S_IDLE, S_SEND} state_e;

  state_e          state;
  hdr_t            hdr;
  logic [15:0]     carry;     // two bytes held over from the previous word
  logic [WI_W-1:0] wi;        // word index inside the frame
  logic            fire;

  assign tx_tvalid = (state == S_SEND);
  assign fire      = tx_tvalid && tx_tready;
  assign tx_tlast  = (wi == WI_W'(LAST_W));
  assign q_pop     = fire && (wi >= WI_W'(5)) && (wi < WI_W'(LAST_W));

  always_comb begin
    if (wi < WI_W'(5)) begin
      tx_tdata = hdr[8*wi +: 8];
      tx_tkeep = 8'hFF;
    end else if (!tx_tlast) begin
      tx_tdata = {q_data[47:0], carry};
      tx_tkeep = 8'hFF;
    end else begin
      tx_tdata = {48'd0, carry};
      tx_tkeep = 8'h03;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      hdr         <= '0;
      carry       <= '0;
      wi          <= '0;
      frame_count <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (q_count >= CNT_W'(PAYLOAD_WORDS)) begin
            hdr   <= build_header(net, frame_count[15:0]);
            carry <= '0;
            wi    <= '0;
            state <= S_SEND;
          end
        end
        S_SEND: begin
          if (fire) begin
            if (wi == WI_W'(4))      carry <= {hdr[41], hdr[40]};
            else if (q_pop)          carry <= q_data[63:48];
            if (tx_tlast) begin
              state       <= S_IDLE;
              frame_count <= frame_count + 32'd1;
            end
            wi <= wi + WI_W'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI-Stream rule: once offered, a word stays until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (tx_tvalid && !tx_tready) |=> (tx_tvalid && $stable(tx_tdata) && $stable(tx_tkeep) && $stable(tx_tlast)))
    else $error("udp_framer: stream word changed while stalled");

  initial assert (PAYLOAD_WORDS < (1 << CNT_W))
    else $error("udp_framer: q_count too narrow for PAYLOAD_WORDS");

endmodule
