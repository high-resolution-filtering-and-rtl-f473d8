// bidaq_top_tb: end-to-end test of two FPGA modules on one synchronization
// chain, each with two analog-to-digital boards of six ADC models.
//
// Module A is made master through its registers and issues the start; module
// B is a slave. The test checks that every board of both modules releases
// its first SYNC on the same cycle, then lets the acquisition run while it:
// runs A's two boards at different sampling periods; disables one channel;
// drives A's GPIO (four bits in, four out) and changes the inputs half way;
// injects an ADC error and withholds one channel's samples for a while;
// stalls A's output long enough to drop a block. Frame checkers verify the
// Ethernet/IPv4/UDP header of every frame (A with addresses and ports set
// through its registers, B with the reset ports) and hand the payload to
// stream checkers that verify every RTP packet; at the end the test requires that each of these mechanisms
// was seen at least once and that the packet counters read through the
// register bus match the packets received.
module bidaq_top_tb;
  localparam int NB = 2, ADCS = 6, N = 4, NA = NB * ADCS, NCH = NA * 2;
  localparam int SCLK_DIV = 5, REF_DIV = 8;
  localparam logic [23:0] SSRC = 24'h0B1DA0;
  localparam logic [7:0]  GPIO_X = 8'h35, GPIO_Y = 8'hCA;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // register buses
  logic [7:0]  a_addr = 0, b_addr = 0;
  logic        a_wr = 0, b_wr = 0, a_rd = 0, b_rd = 0;
  logic [31:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  // boards
  logic [NB-1:0] a_sync_n, b_sync_n;
  logic [NA-1:0] a_sclk, a_cs_n, a_miso, b_sclk, b_cs_n, b_miso;
  logic [NA-1:0] a_err = 0, a_mute = 0;
  // sync chain
  logic a_ref_out, a_ref_oe, b_ref_out, b_ref_oe, a_pull, b_pull, ref_line, start_line;
  // gpio
  logic [7:0] a_gpio_i = GPIO_X, a_gpio_o, a_gpio_oe, b_gpio_o, b_gpio_oe;
  // streams
  logic a_valid, b_valid, a_last, b_last, a_ready = 1, b_ready = 1;
  logic [7:0]  a_data, b_data;
  // RTP words re-assembled from the frames
  logic        aw_valid, bw_valid, aw_last, bw_last;
  logic [31:0] aw_data, bw_data;
  logic [3:0]  aw_keep, bw_keep;
  localparam logic [47:0] A_DMAC = 48'h02_00_5E_01_02_03, A_SMAC = 48'h02_B1_DA_00_00_0A;
  localparam logic [31:0] A_SIP = 32'hC0A8_0A0A, A_DIP = 32'hC0A8_0A01, B_SIP = 32'hC0A8_0A0B;
  localparam logic [15:0] A_SPORT = 16'd6000, A_DPORT = 16'd6002;

  assign ref_line   = a_ref_oe ? a_ref_out : (b_ref_oe ? b_ref_out : 1'b0);
  assign start_line = ~(a_pull | b_pull);

  bidaq_top #(.NUM_BOARDS(NB), .ADCS_PER_BOARD(ADCS), .SAMPLES_PER_PACKET(N),
              .SCLK_DIV(SCLK_DIV), .REF_DIV(REF_DIV)) u_a (
    .clk, .rst_n, .bus_addr(a_addr), .bus_write(a_wr), .bus_wdata(a_wdata), .bus_read(a_rd), .bus_rdata(a_rdata),
    .board_sync_n(a_sync_n), .adc_sclk(a_sclk), .adc_cs_n(a_cs_n), .adc_miso(a_miso),
    .ref_clk_in(ref_line), .ref_clk_out(a_ref_out), .ref_clk_oe(a_ref_oe),
    .start_line, .start_pull(a_pull),
    .gpio_i(a_gpio_i), .gpio_o(a_gpio_o), .gpio_oe(a_gpio_oe),
    .o_valid(a_valid), .o_ready(a_ready), .o_data(a_data), .o_last(a_last));
  bidaq_top #(.NUM_BOARDS(NB), .ADCS_PER_BOARD(ADCS), .SAMPLES_PER_PACKET(N),
              .SCLK_DIV(SCLK_DIV), .REF_DIV(REF_DIV)) u_b (
    .clk, .rst_n, .bus_addr(b_addr), .bus_write(b_wr), .bus_wdata(b_wdata), .bus_read(b_rd), .bus_rdata(b_rdata),
    .board_sync_n(b_sync_n), .adc_sclk(b_sclk), .adc_cs_n(b_cs_n), .adc_miso(b_miso),
    .ref_clk_in(ref_line), .ref_clk_out(b_ref_out), .ref_clk_oe(b_ref_oe),
    .start_line, .start_pull(b_pull),
    .gpio_i(8'h00), .gpio_o(b_gpio_o), .gpio_oe(b_gpio_oe),
    .o_valid(b_valid), .o_ready(b_ready), .o_data(b_data), .o_last(b_last));

  for (genvar i = 0; i < NA; i++) begin : g_adc
    ad7175_model #(.ID(i), .CONV_DLY(1500)) u_ma (
      .sync_n(a_sync_n[i / ADCS]), .cs_n(a_cs_n[i]), .sclk(a_sclk[i]),
      .err_inject(a_err[i]), .mute_ch1(a_mute[i]), .dout(a_miso[i]));
    ad7175_model #(.ID(i), .CONV_DLY(1500)) u_mb (
      .sync_n(b_sync_n[i / ADCS]), .cs_n(b_cs_n[i]), .sclk(b_sclk[i]),
      .err_inject(1'b0), .mute_ch1(1'b0), .dout(b_miso[i]));
  end

  logic [NCH-1:0] a_en = ~(NCH'(1) << 6), b_en = '1;
  logic [NB-1:0][23:0] a_per = {24'd150, 24'd100}, b_per = {24'd120, 24'd120};

  udp_frame_checker #(.SAMPLES(N)) fc_a (
    .clk, .rst_n, .b_valid(a_valid), .b_ready(a_ready), .b_data(a_data), .b_last(a_last),
    .dst_mac(A_DMAC), .src_mac(A_SMAC), .src_ip(A_SIP), .dst_ip(A_DIP), .src_port(A_SPORT), .dst_port(A_DPORT),
    .w_valid(aw_valid), .w_data(aw_data), .w_keep(aw_keep), .w_last(aw_last));
  udp_frame_checker #(.SAMPLES(N)) fc_b (
    .clk, .rst_n, .b_valid(b_valid), .b_ready(b_ready), .b_data(b_data), .b_last(b_last),
    .dst_mac(48'd0), .src_mac(48'd0), .src_ip(B_SIP), .dst_ip(A_DIP), .src_port(16'd5004), .dst_port(16'd5004),
    .w_valid(bw_valid), .w_data(bw_data), .w_keep(bw_keep), .w_last(bw_last));

  rtp_stream_checker #(.NB(NB), .ADCS(ADCS), .SAMPLES(N)) chk_a (
    .clk, .rst_n, .o_valid(aw_valid), .o_ready(1'b1), .o_data(aw_data), .o_keep(aw_keep), .o_last(aw_last),
    .ch_en(a_en), .period(a_per), .ssrc_base(SSRC), .pt(7'd96), .fmt(8'h01),
    .aux_a(GPIO_X & 8'h0F), .aux_b(GPIO_Y & 8'h0F));
  rtp_stream_checker #(.NB(NB), .ADCS(ADCS), .SAMPLES(N)) chk_b (
    .clk, .rst_n, .o_valid(bw_valid), .o_ready(1'b1), .o_data(bw_data), .o_keep(bw_keep), .o_last(bw_last),
    .ch_en(b_en), .period(b_per), .ssrc_base(SSRC + 24'd1), .pt(7'd96), .fmt(8'h01),
    .aux_a(8'h00), .aux_b(8'h00));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(bit which_b, logic [7:0] a, logic [31:0] d);
    @(posedge clk);
    if (which_b) begin b_addr <= a; b_wdata <= d; b_wr <= 1; end
    else         begin a_addr <= a; a_wdata <= d; a_wr <= 1; end
    @(posedge clk);
    a_wr <= 0; b_wr <= 0;
  endtask
  task automatic rd(bit which_b, logic [7:0] a, output logic [31:0] d);
    @(posedge clk);
    if (which_b) begin b_addr <= a; b_rd <= 1; end else begin a_addr <= a; a_rd <= 1; end
    @(posedge clk);
    a_rd <= 0; b_rd <= 0;
    #1 d = which_b ? b_rdata : a_rdata;
  endtask

  // First SYNC release of every board
  longint first_rise [2][NB];
  logic [NB-1:0] a_sq = '1, b_sq = '1;
  initial for (int t = 0; t < 2; t++) for (int b = 0; b < NB; b++) first_rise[t][b] = -1;
  always @(posedge clk) if (rst_n) begin
    a_sq <= a_sync_n; b_sq <= b_sync_n;
    for (int b = 0; b < NB; b++) begin
      if (a_sync_n[b] && !a_sq[b] && first_rise[0][b] < 0) first_rise[0][b] = $time;
      if (b_sync_n[b] && !b_sq[b] && first_rise[1][b] < 0) first_rise[1][b] = $time;
    end
  end

  int stall = 0;
  always @(posedge clk) begin
    if (stall > 0) begin a_ready <= 0; stall--; end
    else a_ready <= ($urandom_range(0, 7) != 0);
    b_ready <= ($urandom_range(0, 3) != 0);
  end

  localparam int BLK0 = N * 100 * REF_DIV;   // cycles per block of A's board 0

  initial begin
    logic [31:0] d;
    repeat (5) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);
    for (int t = 0; t < 2; t++) begin
      wr(t, 8'h04, t ? 32'(b_en[23:0]) : 32'(a_en[23:0]));
      wr(t, 8'h10, 32'(SSRC + 24'(t)));
      for (int b = 0; b < NB; b++) wr(t, 8'(8'h40 + 4 * b), 32'(t ? b_per[b] : a_per[b]));
    end
    wr(0, 8'h60, A_DMAC[31:0]); wr(0, 8'h64, 32'(A_DMAC[47:32]));
    wr(0, 8'h68, A_SMAC[31:0]); wr(0, 8'h6C, 32'(A_SMAC[47:32]));
    wr(0, 8'h30, A_SIP); wr(0, 8'h34, A_DIP); wr(0, 8'h38, {A_SPORT, A_DPORT});
    wr(1, 8'h30, B_SIP); wr(1, 8'h34, A_DIP);
    wr(0, 8'h18, 32'hFF); wr(0, 8'h1C, 32'hF0); wr(0, 8'h20, 32'hA5);
    wr(1, 8'h00, 32'h1);            // B: run, slave
    wr(0, 8'h00, 32'h3);            // A: run, master
    repeat (50) @(posedge clk);
    check(a_gpio_oe == 8'hF0 && a_gpio_o == 8'hA0 && b_gpio_oe == 8'h00, "GPIO outputs");
    check(a_ref_oe && !b_ref_oe, "only the master drives the reference clock");
    rd(0, 8'h28, d); check(d[0] == 0, "not running before start");
    wr(0, 8'h00, 32'h7);            // A: start
    repeat (2 * BLK0) @(posedge clk);
    rd(0, 8'h28, d); check(d[0] == 1, "A running");
    rd(1, 8'h28, d); check(d[0] == 1, "B running");
    for (int t = 0; t < 2; t++) for (int b = 0; b < NB; b++)
      check(first_rise[t][b] == first_rise[0][0] && first_rise[0][0] > 0,
            $sformatf("first SYNC of module %0d board %0d at %0d, master board 0 at %0d",
                      t, b, first_rise[t][b], first_rise[0][0]));
    a_err[2] = 1;                   // ADC error on A board 0, channels 4-5
    repeat (BLK0) @(posedge clk);
    a_err[2] = 0;
    a_mute[7] = 1;                  // A board 1, channel 3 withheld
    repeat (BLK0) @(posedge clk);
    a_mute[7] = 0;
    a_gpio_i = GPIO_Y;
    stall = 3 * BLK0 / 2;           // A's output blocked: a block is dropped
    repeat (4 * BLK0) @(posedge clk);
    wr(0, 8'h00, 32'h0); wr(1, 8'h00, 32'h0);   // stop
    repeat (BLK0) @(posedge clk);
    rd(0, 8'h2C, d); check(int'(d) == chk_a.packets, $sformatf("A packet count %0d vs %0d", d, chk_a.packets));
    rd(1, 8'h2C, d); check(int'(d) == chk_b.packets, $sformatf("B packet count %0d vs %0d", d, chk_b.packets));
    rd(0, 8'h28, d); check(d[31:16] != 0, "A dropped-block counter");
    rd(1, 8'h28, d); check(d[31:16] == 0, "B dropped no block");

    // mechanisms
    $display("INFO A packets=%0d err=%0d miss=%0d ovr=%0d gaps=%0d auxX=%0d auxY=%0d  B packets=%0d",
             chk_a.packets, chk_a.err_flags, chk_a.miss_flags, chk_a.ovr_flags, chk_a.ts_gaps,
             chk_a.aux_a_seen, chk_a.aux_b_seen, chk_b.packets);
    check(chk_a.packets > 60 && chk_b.packets > 60, "packets flowed on both modules");
    check(chk_a.err_flags > 0, "ADC error reported in a footer");
    check(chk_a.miss_flags > 0, "missing sample reported in a footer");
    check(chk_a.ovr_flags > 0 && chk_a.ts_gaps > 0, "dropped block reported");
    check(chk_a.aux_a_seen > 0 && chk_a.aux_b_seen > 0, "GPIO inputs carried in the samples");
    check(chk_a.pkts_of[6] == 0, "disabled channel sent nothing");
    check(chk_a.pkts_of[0] > chk_a.pkts_of[12], "board 0 (faster) sent more packets than board 1");
    check(chk_b.pkts_of[0] == chk_b.pkts_of[23], "B boards at equal rates");
    check(fc_a.frames == chk_a.packets && fc_b.frames == chk_b.packets, "one frame per packet");
    checks += chk_a.checks + chk_b.checks + fc_a.checks + fc_b.checks;
    failures += chk_a.failures + chk_b.failures + fc_a.failures + fc_b.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12 * BLK0) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
