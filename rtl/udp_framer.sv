// udp_framer: wraps each RTP packet in Ethernet, IPv4 and UDP headers and
// sends the frame as a byte stream to the Ethernet MAC.
//
// The firmware formats its data as UDP datagrams for a 1 Gbit/s link; the
// headers themselves are the standard ones (Ethernet II, IPv4 without
// options, UDP). Every RTP packet of this design has the same length,
// 4*(SAMPLES_PER_PACKET+5)-3 bytes, so the IP and UDP lengths and the IPv4
// header checksum are known before the payload arrives and no packet buffer
// is needed. Per frame the framer sends 42 header bytes:
//   Ethernet: dst MAC, src MAC, type 0x0800
//   IPv4:     0x45, 0x00, total length, identification (+1 per frame),
//             flags 0x4000 (don't fragment), TTL 64, protocol 17, checksum,
//             src IP, dst IP
//   UDP:      src port, dst port, length, checksum 0 (not used, as IPv4 allows)
// then the RTP bytes, byte 0 of each 32-bit word first, only the bytes whose
// i_keep bit is set. Preamble, padding and FCS are left to the MAC.
// Header choices (TTL, DF, checksum 0, identification counter) are this
// design's. Addresses and ports come from registers.
//
// Input: 32-bit RTP word stream (valid/ready/keep/last), a word is taken
// when its last kept byte is sent. Output: bytes with o_valid/o_ready and
// o_last on the final byte; one byte per cycle while o_ready is high
// (800 Mbit/s at 100 MHz). Latency from the first input word to the first
// output byte: 2 cycles.
module udp_framer #(
  parameter int unsigned SAMPLES_PER_PACKET = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [47:0] dst_mac,
  input  logic [47:0] src_mac,
  input  logic [31:0] src_ip,
  input  logic [31:0] dst_ip,
  input  logic [15:0] src_port,
  input  logic [15:0] dst_port,
  input  logic        i_valid,
  output logic        i_ready,
  input  logic [31:0] i_data,
  input  logic [3:0]  i_keep,
  input  logic        i_last,
  output logic        o_valid,
  input  logic        o_ready,
  output logic [7:0]  o_data,
  output logic        o_last
);
  localparam int unsigned HDR_BYTES = 42;
  localparam int unsigned RTP_BYTES = 4 * (SAMPLES_PER_PACKET + 5) - 3;
  localparam logic [15:0] UDP_LEN   = 16'(8 + RTP_BYTES);
  localparam logic [15:0] IP_LEN    = 16'(20 + 8 + RTP_BYTES);

  typedef enum logic [1:0] {F_IDLE, F_HDR, F_PAY} fstate_t;
  fstate_t      state;
  logic [5:0]   hidx;      // header byte index
  logic [1:0]   bidx;      // byte within the input word
  logic [15:0]  ip_id;
  logic [15:0]  csum_q;
  logic [7:0]   hdr [HDR_BYTES];

  // IPv4 header checksum: one's-complement sum of the header's 16-bit words.
  function automatic logic [15:0] ip_csum(logic [15:0] id, logic [31:0] s, logic [31:0] d);
    logic [31:0] acc;
    acc = 32'h4500 + 32'(IP_LEN) + 32'(id) + 32'h4000 + 32'h4011
        + 32'(s[31:16]) + 32'(s[15:0]) + 32'(d[31:16]) + 32'(d[15:0]);
    acc = 32'(acc[15:0]) + 32'(acc[31:16]);
    acc = 32'(acc[15:0]) + 32'(acc[31:16]);
    return ~acc[15:0];
  endfunction

  always_comb begin
    for (int i = 0; i < 6; i++) begin
      hdr[i]     = dst_mac[47 - 8*i -: 8];
      hdr[6 + i] = src_mac[47 - 8*i -: 8];
    end
    hdr[12] = 8'h08;  hdr[13] = 8'h00;
    hdr[14] = 8'h45;  hdr[15] = 8'h00;
    hdr[16] = IP_LEN[15:8];  hdr[17] = IP_LEN[7:0];
    hdr[18] = ip_id[15:8];   hdr[19] = ip_id[7:0];
    hdr[20] = 8'h40;  hdr[21] = 8'h00;
    hdr[22] = 8'd64;  hdr[23] = 8'd17;
    hdr[24] = csum_q[15:8];  hdr[25] = csum_q[7:0];
    for (int i = 0; i < 4; i++) begin
      hdr[26 + i] = src_ip[31 - 8*i -: 8];
      hdr[30 + i] = dst_ip[31 - 8*i -: 8];
    end
    hdr[34] = src_port[15:8]; hdr[35] = src_port[7:0];
    hdr[36] = dst_port[15:8]; hdr[37] = dst_port[7:0];
    hdr[38] = UDP_LEN[15:8];  hdr[39] = UDP_LEN[7:0];
    hdr[40] = 8'h00;          hdr[41] = 8'h00;
  end

  // Last kept byte of the current input word.
  logic [1:0] last_b;
  always_comb begin
    last_b = 2'd0;
    for (int b = 0; b < 4; b++) if (i_keep[3 - b]) last_b = 2'(b);
  end

  logic take;     // output register free to load
  assign take = !o_valid || o_ready;
  assign i_ready = (state == F_PAY) && take && i_valid && (bidx == last_b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= F_IDLE;
      hidx    <= '0;
      bidx    <= '0;
      ip_id   <= '0;
      csum_q  <= '0;
      o_valid <= 1'b0;
      o_data  <= '0;
      o_last  <= 1'b0;
    end else begin
      if (o_valid && o_ready) o_valid <= 1'b0;
      unique case (state)
        F_IDLE: if (i_valid) begin
          csum_q <= ip_csum(ip_id, src_ip, dst_ip);
          hidx   <= '0;
          state  <= F_HDR;
        end
        F_HDR: if (take) begin
          o_valid <= 1'b1;
          o_data  <= hdr[hidx];
          o_last  <= 1'b0;
          if (hidx == 6'(HDR_BYTES - 1)) begin
            state <= F_PAY;
            bidx  <= '0;
          end else hidx <= hidx + 1'b1;
        end
        F_PAY: if (take && i_valid) begin
          o_valid <= 1'b1;
          o_data  <= i_data[31 - 8*bidx -: 8];
          o_last  <= i_last && (bidx == last_b);
          if (bidx == last_b) begin
            bidx <= '0;
            if (i_last) begin
              state <= F_IDLE;
              ip_id <= ip_id + 16'd1;
            end
          end else bidx <= bidx + 1'b1;
        end
        default: state <= F_IDLE;
      endcase
    end
  end
endmodule
