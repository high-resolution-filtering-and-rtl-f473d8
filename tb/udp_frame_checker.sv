// udp_frame_checker: testbench monitor for the Ethernet frame byte stream of
// one FPGA module. It checks the 42 header bytes of every frame (MAC
// addresses, EtherType 0x0800, IPv4 version/length/identification/flags/
// TTL/protocol/addresses, a valid IPv4 header checksum, UDP ports, length
// and zero checksum) against the configured values, requires the
// identification to count up from 0 by one per frame and the frame length
// to be 42 + the fixed RTP packet length, and re-assembles the payload into
// 32-bit words (byte 0 in [31:24]) with keep bits and a last flag, which it
// hands on, one word per cycle and registered, to an RTP stream checker.
module udp_frame_checker #(
  parameter int SAMPLES = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        b_valid,
  input  logic        b_ready,
  input  logic [7:0]  b_data,
  input  logic        b_last,
  input  logic [47:0] dst_mac,
  input  logic [47:0] src_mac,
  input  logic [31:0] src_ip,
  input  logic [31:0] dst_ip,
  input  logic [15:0] src_port,
  input  logic [15:0] dst_port,
  output logic        w_valid,
  output logic [31:0] w_data,
  output logic [3:0]  w_keep,
  output logic        w_last
);
  localparam int RTPB = 4 * (SAMPLES + 5) - 3;
  int checks = 0, failures = 0, frames = 0;
  logic [7:0] hb [42];
  int nb = 0;
  logic [31:0] acc = 0;
  logic [3:0]  kacc = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %m %s", what); end
  endtask

  task automatic judge_header();
    logic [7:0] e [42];
    logic [31:0] sum;
    for (int i = 0; i < 6; i++) begin e[i] = dst_mac[47 - 8*i -: 8]; e[6 + i] = src_mac[47 - 8*i -: 8]; end
    e[12] = 8'h08; e[13] = 8'h00; e[14] = 8'h45; e[15] = 8'h00;
    e[16] = 8'((28 + RTPB) >> 8); e[17] = 8'(28 + RTPB);
    e[18] = 8'(frames >> 8); e[19] = 8'(frames);
    e[20] = 8'h40; e[21] = 8'h00; e[22] = 8'd64; e[23] = 8'd17;
    e[24] = hb[24]; e[25] = hb[25];
    for (int i = 0; i < 4; i++) begin e[26 + i] = src_ip[31 - 8*i -: 8]; e[30 + i] = dst_ip[31 - 8*i -: 8]; end
    e[34] = src_port[15:8]; e[35] = src_port[7:0]; e[36] = dst_port[15:8]; e[37] = dst_port[7:0];
    e[38] = 8'((8 + RTPB) >> 8); e[39] = 8'(8 + RTPB); e[40] = 0; e[41] = 0;
    for (int i = 0; i < 42; i++)
      check(hb[i] == e[i], $sformatf("frame %0d header byte %0d: %h, expected %h", frames, i, hb[i], e[i]));
    sum = 0;
    for (int i = 14; i < 34; i += 2) sum += {hb[i], hb[i + 1]};
    sum = (sum & 32'hFFFF) + (sum >> 16);
    sum = (sum & 32'hFFFF) + (sum >> 16);
    check(sum == 32'hFFFF, $sformatf("frame %0d IPv4 checksum, sum %h", frames, sum));
  endtask

  always @(posedge clk) begin
    w_valid <= 1'b0;
    if (!rst_n) begin
      nb = 0; acc = 0; kacc = 0;
      w_data <= '0; w_keep <= '0; w_last <= 1'b0;
    end else if (b_valid && b_ready) begin
      if (nb < 42) begin
        hb[nb] = b_data;
        if (nb == 41) judge_header();
        check(!b_last, "frame ends inside the header");
      end else begin
        automatic int p = nb - 42;
        acc[31 - 8*(p % 4) -: 8] = b_data;
        kacc[3 - (p % 4)] = 1'b1;
        if (p % 4 == 3 || b_last) begin
          w_valid <= 1'b1;
          w_data  <= acc;
          w_keep  <= kacc;
          w_last  <= b_last;
          acc = 0; kacc = 0;
        end
      end
      nb++;
      if (b_last) begin
        check(nb == 42 + RTPB, $sformatf("frame %0d length %0d", frames, nb));
        frames++;
        nb = 0;
      end
    end
  end
endmodule
