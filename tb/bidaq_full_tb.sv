// bidaq_full_tb: a full crate, two FPGA modules at their default size (each
// 8 boards, 48 ADC models, 96 channels, 64 samples per packet; 192 channels
// together) on one synchronization chain. Module 0 is made master through
// its registers and issues the start; module 1 is a slave. Module 0 samples
// at 25 ksps on every board, the highest rate of the boards; module 1 at
// 5 ksps, the rate of the large bolometer arrays.
//
// Every frame of both modules is checked: the Ethernet/IPv4/UDP header by a
// frame checker and every RTP packet by a stream checker. The test requires
// that all 16 boards release their first SYNC on the same cycle, that no
// footer flag is raised and no block dropped, that module 1 delivers one
// full block (96 packets) while module 0 delivers one block every fifth of
// that time, that every channel of a module has sent the same number of
// packets, and that the packet counters read through the register bus
// agree. The output of each module stands for a 1 Gbit/s MAC: one byte per
// cycle, then 24 idle cycles after each frame for preamble, FCS and
// inter-frame gap. Each of module 0's blocks must leave before its next
// block is complete.
module bidaq_full_tb;
  localparam int NM = 2, NB = 8, ADCS = 6, N = 64, NA = NB * ADCS, NCH = NA * 2;
  localparam int REF_DIV = 8;
  localparam int PERIOD0 = 500, PERIOD1 = 2500;        // 12.5 MHz / period: 25 kHz, 5 kHz
  localparam int FRAME0 = PERIOD0 * REF_DIV, FRAME1 = PERIOD1 * REF_DIV;   // clk cycles per sample
  localparam logic [23:0] SSRC = 24'h00C0DE;
  localparam logic [47:0] DMAC = 48'h02_00_5E_7F_00_01, SMAC = 48'h02_B1_DA_00_01_00;
  localparam logic [31:0] SIP = 32'h0A00_0064, DIP = 32'h0A00_0001;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NM-1:0][7:0]  addr = '0;
  logic [NM-1:0]       wr_en = '0, rd_en = '0;
  logic [NM-1:0][31:0] wdata = '0, rdata;
  logic [NM-1:0][NB-1:0] sync_n;
  logic [NM-1:0][NA-1:0] sclk, cs_n, miso;
  logic [NM-1:0] ref_out, ref_oe, pull;
  logic ref_line, start_line;
  logic [NM-1:0][7:0] gpio_o, gpio_oe;
  logic [NM-1:0] o_valid, o_last, o_ready = '1;
  logic [NM-1:0][7:0] o_data;
  logic [NM-1:0] w_valid, w_last;
  logic [NM-1:0][31:0] w_data;
  logic [NM-1:0][3:0]  w_keep;
  logic [NB-1:0][23:0] per [NM];

  assign ref_line   = ref_oe[0] ? ref_out[0] : (ref_oe[1] ? ref_out[1] : 1'b0);
  assign start_line = ~(|pull);
  always_comb for (int b = 0; b < NB; b++) begin per[0][b] = 24'(PERIOD0); per[1][b] = 24'(PERIOD1); end

  for (genvar m = 0; m < NM; m++) begin : g_mod
    bidaq_top u_top (
      .clk, .rst_n, .bus_addr(addr[m]), .bus_write(wr_en[m]), .bus_wdata(wdata[m]), .bus_read(rd_en[m]), .bus_rdata(rdata[m]),
      .board_sync_n(sync_n[m]), .adc_sclk(sclk[m]), .adc_cs_n(cs_n[m]), .adc_miso(miso[m]),
      .ref_clk_in(ref_line), .ref_clk_out(ref_out[m]), .ref_clk_oe(ref_oe[m]),
      .start_line, .start_pull(pull[m]),
      .gpio_i(8'h5A), .gpio_o(gpio_o[m]), .gpio_oe(gpio_oe[m]),
      .o_valid(o_valid[m]), .o_ready(o_ready[m]), .o_data(o_data[m]), .o_last(o_last[m]));

    for (genvar i = 0; i < NA; i++) begin : g_adc
      ad7175_model #(.ID(i), .CONV_DLY(8000)) u_m (
        .sync_n(sync_n[m][i / ADCS]), .cs_n(cs_n[m][i]), .sclk(sclk[m][i]),
        .err_inject(1'b0), .mute_ch1(1'b0), .dout(miso[m][i]));
    end

    udp_frame_checker #(.SAMPLES(N)) fc (
      .clk, .rst_n, .b_valid(o_valid[m]), .b_ready(o_ready[m]), .b_data(o_data[m]), .b_last(o_last[m]),
      .dst_mac(DMAC), .src_mac(SMAC + 48'(m)), .src_ip(SIP + 32'(m)), .dst_ip(DIP), .src_port(16'd5004), .dst_port(16'd5004),
      .w_valid(w_valid[m]), .w_data(w_data[m]), .w_keep(w_keep[m]), .w_last(w_last[m]));

    rtp_stream_checker #(.NB(NB), .ADCS(ADCS), .SAMPLES(N)) chk (
      .clk, .rst_n, .o_valid(w_valid[m]), .o_ready(1'b1), .o_data(w_data[m]), .o_keep(w_keep[m]), .o_last(w_last[m]),
      .ch_en('1), .period(per[m]), .ssrc_base(SSRC + 24'(m << 8)), .pt(7'd96), .fmt(8'h01),
      .aux_a(8'h0A), .aux_b(8'h0A));

    // MAC stand-in: 24 idle cycles after each frame
    int gap = 0;
    always @(posedge clk) begin
      if (o_valid[m] && o_ready[m] && o_last[m]) gap = 24;
      else if (gap > 0) gap--;
      o_ready[m] <= (gap == 0);
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(int m, logic [7:0] a, logic [31:0] d);
    @(posedge clk); addr[m] <= a; wdata[m] <= d; wr_en[m] <= 1;
    @(posedge clk); wr_en[m] <= 0;
  endtask
  task automatic rd(int m, logic [7:0] a, output logic [31:0] d);
    @(posedge clk); addr[m] <= a; rd_en[m] <= 1;
    @(posedge clk); rd_en[m] <= 0;
    #1 d = rdata[m];
  endtask

  // First SYNC release of every board of both modules
  longint first_rise [NM][NB];
  logic [NM-1:0][NB-1:0] sq = '1;
  initial for (int m = 0; m < NM; m++) for (int b = 0; b < NB; b++) first_rise[m][b] = -1;
  always @(posedge clk) if (rst_n) begin
    sq <= sync_n;
    for (int m = 0; m < NM; m++) for (int b = 0; b < NB; b++)
      if (sync_n[m][b] && !sq[m][b] && first_rise[m][b] < 0) first_rise[m][b] = $time;
  end

  // Time from the first to the last frame byte of each of module 0's blocks
  longint t_first = -1, t_last = -1, burst_max = 0;
  always @(posedge clk) if (rst_n && o_valid[0] && o_ready[0]) begin
    if (t_last < 0 || $time - t_last > 2 * FRAME0 * 10) t_first = $time;
    t_last = $time;
    if (t_last - t_first > burst_max) burst_max = t_last - t_first;
  end

  initial begin
    logic [31:0] d;
    int p0;
    repeat (5) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);
    for (int m = 0; m < NM; m++) begin
      wr(m, 8'h04, '1); wr(m, 8'h08, '1); wr(m, 8'h0C, '1);
      wr(m, 8'h10, 32'(SSRC + 24'(m << 8)));
      wr(m, 8'h60, DMAC[31:0]); wr(m, 8'h64, 32'(DMAC[47:32]));
      wr(m, 8'h68, SMAC[31:0] + 32'(m)); wr(m, 8'h6C, 32'(SMAC[47:32]));
      wr(m, 8'h30, SIP + 32'(m)); wr(m, 8'h34, DIP);
      wr(m, 8'h18, 32'h0F); wr(m, 8'h1C, 32'h00);   // GPIO bits 3..0 as inputs
      for (int b = 0; b < NB; b++) wr(m, 8'(8'h40 + 4 * b), m ? PERIOD1 : PERIOD0);
    end
    wr(1, 8'h00, 32'h1);              // module 1: run, slave
    wr(0, 8'h00, 32'h3);              // module 0: run, master
    wr(0, 8'h00, 32'h7);              // start
    wait (g_mod[1].chk.packets == NCH);
    wr(0, 8'h00, 32'h0); wr(1, 8'h00, 32'h0);   // stop
    repeat (2 * NCH * 400) @(posedge clk);
    for (int m = 0; m < NM; m++) for (int b = 0; b < NB; b++)
      check(first_rise[m][b] == first_rise[0][0] && first_rise[0][0] > 0,
            $sformatf("first SYNC of module %0d board %0d at %0d, master board 0 at %0d",
                      m, b, first_rise[m][b], first_rise[0][0]));
    p0 = g_mod[0].chk.pkts_of[0];
    $display("INFO packets: module 0 %0d (%0d per channel), module 1 %0d; longest module 0 burst=%0d cycles, block=%0d cycles",
             g_mod[0].chk.packets, p0, g_mod[1].chk.packets, burst_max / 10, N * FRAME0);
    check(p0 >= 4 && p0 <= 5, $sformatf("module 0 sent %0d blocks while module 1 sent one", p0));
    check(g_mod[1].chk.packets == NCH, "module 1 sent exactly one block");
    for (int g = 0; g < NCH; g++) begin
      check(g_mod[0].chk.pkts_of[g] == p0, $sformatf("module 0 channel %0d packets %0d", g, g_mod[0].chk.pkts_of[g]));
      check(g_mod[1].chk.pkts_of[g] == 1, $sformatf("module 1 channel %0d packets %0d", g, g_mod[1].chk.pkts_of[g]));
    end
    rd(0, 8'h2C, d); check(int'(d) == g_mod[0].chk.packets, $sformatf("module 0 packet counter %0d", d));
    rd(1, 8'h2C, d); check(int'(d) == g_mod[1].chk.packets, $sformatf("module 1 packet counter %0d", d));
    rd(0, 8'h28, d); check(d[31:16] == 0, "module 0 dropped no block");
    rd(1, 8'h28, d); check(d[31:16] == 0, "module 1 dropped no block");
    check(burst_max / 10 < N * FRAME0, "a block leaves before the next one is complete");
    checks += g_mod[0].chk.checks + g_mod[0].fc.checks + g_mod[1].chk.checks + g_mod[1].fc.checks;
    failures += g_mod[0].chk.failures + g_mod[0].fc.failures + g_mod[1].chk.failures + g_mod[1].fc.failures;
    check(g_mod[0].chk.err_flags == 0 && g_mod[0].chk.miss_flags == 0 && g_mod[0].chk.ovr_flags == 0 &&
          g_mod[1].chk.err_flags == 0 && g_mod[1].chk.miss_flags == 0 && g_mod[1].chk.ovr_flags == 0,
          "no footer flag raised");
    check(g_mod[0].chk.aux_a_seen == g_mod[0].chk.packets * N, "aux byte on every sample");
    check(g_mod[0].fc.frames == g_mod[0].chk.packets && g_mod[1].fc.frames == g_mod[1].chk.packets, "one frame per packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N * FRAME1 * 3 / 2 + 50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog packets %0d %0d", g_mod[0].chk.packets, g_mod[1].chk.packets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
