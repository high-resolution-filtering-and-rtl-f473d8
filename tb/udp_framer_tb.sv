// udp_framer_tb: sends RTP-sized packets of random words through the framer
// with random gaps and random output back-pressure, and checks each frame:
// length, every Ethernet/IPv4/UDP header byte, that the IPv4 header sums to
// 0xFFFF in one's-complement arithmetic (valid checksum), the identification
// counting up, the payload bytes in order (byte 0 of each word first, the
// footer word contributing one byte) and o_last on the final byte only.
module udp_framer_tb;
  localparam int N = 4, WORDS = N + 5, RTPB = 4 * WORDS - 3, FRAMES = 25;
  logic clk = 0, rst_n = 0;
  logic [47:0] dst_mac = 48'h02_00_5E_10_20_30, src_mac = 48'h02_B1_DA_00_00_01;
  logic [31:0] src_ip = 32'hC0A8_0A02, dst_ip = 32'hC0A8_0A64;
  logic [15:0] src_port = 16'd5004, dst_port = 16'd5006;
  logic i_valid = 0, i_ready, i_last = 0;
  logic [31:0] i_data = 0;
  logic [3:0] i_keep = 0;
  logic o_valid, o_ready = 0, o_last;
  logic [7:0] o_data;
  int checks = 0, failures = 0, frames = 0;
  logic [7:0] exp_pay [$];
  logic [7:0] got [$];

  always #5 clk = ~clk;
  udp_framer #(.SAMPLES_PER_PACKET(N)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Source: FRAMES packets of WORDS words. Driven and sampled on the
  // falling edge, where i_ready is settled for the next rising edge.
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < FRAMES; f++) begin
      for (int w = 0; w < WORDS; w++) begin
        automatic logic [31:0] d = $urandom;
        automatic bit lst = (w == WORDS - 1);
        repeat (1 + $urandom_range(0, 2)) @(negedge clk);
        i_valid = 1; i_data = d; i_last = lst; i_keep = lst ? 4'b1000 : 4'b1111;
        for (int b = 0; b < (lst ? 1 : 4); b++) exp_pay.push_back(d[31 - 8*b -: 8]);
        #1;
        while (!i_ready) begin @(negedge clk); #1; end
        @(posedge clk);
        #1 i_valid = 0;
      end
    end
  end

  task automatic judge();
    logic [31:0] sum;
    logic [7:0] e [42];
    check(got.size() == 42 + RTPB, $sformatf("frame length %0d", got.size()));
    if (got.size() != 42 + RTPB) return;
    for (int i = 0; i < 6; i++) begin e[i] = dst_mac[47 - 8*i -: 8]; e[6 + i] = src_mac[47 - 8*i -: 8]; end
    e[12] = 8'h08; e[13] = 8'h00; e[14] = 8'h45; e[15] = 8'h00;
    e[16] = 8'((20 + 8 + RTPB) >> 8); e[17] = 8'(20 + 8 + RTPB);
    e[18] = 8'(frames >> 8); e[19] = 8'(frames);
    e[20] = 8'h40; e[21] = 8'h00; e[22] = 8'd64; e[23] = 8'd17;
    e[24] = got[24]; e[25] = got[25];
    for (int i = 0; i < 4; i++) begin e[26 + i] = src_ip[31 - 8*i -: 8]; e[30 + i] = dst_ip[31 - 8*i -: 8]; end
    e[34] = src_port[15:8]; e[35] = src_port[7:0]; e[36] = dst_port[15:8]; e[37] = dst_port[7:0];
    e[38] = 8'((8 + RTPB) >> 8); e[39] = 8'(8 + RTPB); e[40] = 0; e[41] = 0;
    for (int i = 0; i < 42; i++) check(got[i] == e[i], $sformatf("frame %0d header byte %0d: %h exp %h", frames, i, got[i], e[i]));
    sum = 0;
    for (int i = 14; i < 34; i += 2) sum += {got[i], got[i + 1]};
    sum = (sum & 32'hFFFF) + (sum >> 16);
    sum = (sum & 32'hFFFF) + (sum >> 16);
    check(sum == 32'hFFFF, $sformatf("IPv4 checksum, sum %h", sum));
    for (int i = 42; i < got.size(); i++) begin
      automatic logic [7:0] x = exp_pay.pop_front();
      check(got[i] == x, $sformatf("payload byte %0d", i - 42));
    end
    frames++;
  endtask

  always @(posedge clk) if (rst_n) begin
    o_ready <= ($urandom_range(0, 3) != 0);
    if (o_valid && o_ready) begin
      got.push_back(o_data);
      if (o_last) begin judge(); got.delete(); end
      else check(got.size() < 42 + RTPB, "o_last missing");
    end
  end

  initial begin
    wait (frames == FRAMES);
    repeat (20) @(posedge clk);
    check(exp_pay.size() == 0 && got.size() == 0, "all bytes accounted for");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (FRAMES * 200 * 3) @(posedge clk);
    failures++;
    $display("FAIL: watchdog frames=%0d", frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
