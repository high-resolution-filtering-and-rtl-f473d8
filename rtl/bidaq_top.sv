// bidaq_top: acquisition firmware of one BiDAQ FPGA module.
//
// One module reads NUM_BOARDS analog-to-digital boards of 12 channels each
// (8 boards, 96 channels, 48 SPI lines by default). Each board has its own
// SYNC line and sampling period; all boards and all modules of a system are
// kept in step by the distributed reference clock and open-drain start line,
// which this module drives when it is the master. The samples of every
// channel are packed into RTP packets (one stream per channel, identified by
// its SSRC), the boards' packet streams are merged, and every packet is sent
// as one UDP datagram in an Ethernet frame, byte by byte, to the Gigabit
// Ethernet MAC, which is outside this design.
// The 8-bit GPIO port's inputs ride along with every sample. Software sets
// everything through the register bus (see csr_regs).
//
// Ports are the register bus, the SPI and SYNC lines toward the boards, the
// two synchronization lines (each with its driven copy and enable), the GPIO
// pads and the frame byte stream to the MAC (o_valid/o_ready, o_last on the
// last byte of a frame; preamble and FCS are the MAC's).
//
// Sequence of use: set periods, channel enables and CTRL.run (with
// CTRL.is_master on the master); the master then writes CTRL.start, its
// start pulse reaches every module through the start line and all boards
// start converting on the same reference edge. Packets of a block leave one
// sampling period after its last SYNC.
module bidaq_top
  import bidaq_pkg::*;
#(
  parameter int unsigned NUM_BOARDS         = 8,
  parameter int unsigned ADCS_PER_BOARD     = 6,
  parameter int unsigned SAMPLES_PER_PACKET = 64,
  parameter int unsigned SCLK_DIV           = 5,
  parameter int unsigned REF_DIV            = 8,
  parameter int unsigned START_LEN          = 16
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // register bus from the processor
  input  logic [7:0]                         bus_addr,
  input  logic                               bus_write,
  input  logic [31:0]                        bus_wdata,
  input  logic                               bus_read,
  output logic [31:0]                        bus_rdata,
  // analog-to-digital boards
  output logic [NUM_BOARDS-1:0]              board_sync_n,
  output logic [NUM_BOARDS*ADCS_PER_BOARD-1:0] adc_sclk,
  output logic [NUM_BOARDS*ADCS_PER_BOARD-1:0] adc_cs_n,
  input  logic [NUM_BOARDS*ADCS_PER_BOARD-1:0] adc_miso,
  // inter-FPGA synchronization lines
  input  logic                               ref_clk_in,
  output logic                               ref_clk_out,
  output logic                               ref_clk_oe,
  input  logic                               start_line,
  output logic                               start_pull,
  // GPIO pads
  input  logic [GPIO_W-1:0]                  gpio_i,
  output logic [GPIO_W-1:0]                  gpio_o,
  output logic [GPIO_W-1:0]                  gpio_oe,
  // UDP/IPv4/Ethernet frames, byte stream toward the Ethernet MAC
  output logic                               o_valid,
  input  logic                               o_ready,
  output logic [7:0]                         o_data,
  output logic                               o_last
);
  localparam int unsigned CH_B = 2 * ADCS_PER_BOARD;
  localparam int unsigned NCH  = NUM_BOARDS * CH_B;

  logic                                run, is_master, start_cmd;
  logic [NCH-1:0]                      ch_enable;
  logic [NUM_BOARDS-1:0][PERIOD_W-1:0] period;
  logic [23:0]                         ssrc_base;
  logic [6:0]                          payload_type;
  logic [7:0]                          data_format;
  logic [GPIO_W-1:0]                   gpio_enable, gpio_dir_out, gpio_out, gpio_in;
  logic                                ref_tick, start_pulse, running;
  logic [15:0]                         overrun_cnt;
  logic [31:0]                         pkt_cnt;

  logic [NUM_BOARDS-1:0]               b_valid, b_ready, b_last, b_ovr;
  logic [NUM_BOARDS-1:0][31:0]         b_data;
  logic [NUM_BOARDS-1:0][3:0]          b_keep;
  logic                                m_valid, m_ready, m_last;
  logic [31:0]                         m_data;
  logic [3:0]                          m_keep;
  logic [47:0]                         dst_mac, src_mac;
  logic [31:0]                         src_ip, dst_ip;
  logic [15:0]                         src_port, dst_port;

  csr_regs #(.NUM_BOARDS(NUM_BOARDS), .CHANNELS(NCH)) u_csr (
    .clk, .rst_n, .bus_addr, .bus_write, .bus_wdata, .bus_read, .bus_rdata,
    .run, .is_master, .start_cmd, .ch_enable, .period, .ssrc_base,
    .payload_type, .data_format, .gpio_enable, .gpio_dir_out, .gpio_out,
    .dst_mac, .src_mac, .src_ip, .dst_ip, .src_port, .dst_port, .gpio_in, .running, .overrun_cnt, .pkt_cnt
  );

  sync_distrib #(.REF_DIV(REF_DIV), .START_LEN(START_LEN)) u_syncd (
    .clk, .rst_n, .is_master, .start_cmd,
    .ref_clk_in, .ref_clk_out, .ref_clk_oe,
    .start_line, .start_pull, .ref_tick, .start_pulse
  );

  gpio_port #(.W(GPIO_W)) u_gpio (
    .clk, .rst_n, .enable(gpio_enable), .dir_out(gpio_dir_out), .out_val(gpio_out),
    .pad_i(gpio_i), .pad_o(gpio_o), .pad_oe(gpio_oe), .in_val(gpio_in)
  );

  for (genvar b = 0; b < NUM_BOARDS; b++) begin : g_board
    board_acq #(
      .ADCS(ADCS_PER_BOARD), .SAMPLES_PER_PACKET(SAMPLES_PER_PACKET),
      .BOARD_ID(b), .SCLK_DIV(SCLK_DIV)
    ) u_board (
      .clk, .rst_n, .run, .start(start_pulse), .ref_tick, .period(period[b]),
      .ch_enable(ch_enable[b*CH_B +: CH_B]), .ssrc_base, .payload_type,
      .data_format, .aux(gpio_in),
      .sync_n(board_sync_n[b]),
      .sclk(adc_sclk[b*ADCS_PER_BOARD +: ADCS_PER_BOARD]),
      .cs_n(adc_cs_n[b*ADCS_PER_BOARD +: ADCS_PER_BOARD]),
      .miso(adc_miso[b*ADCS_PER_BOARD +: ADCS_PER_BOARD]),
      .o_valid(b_valid[b]), .o_ready(b_ready[b]), .o_data(b_data[b]),
      .o_keep(b_keep[b]), .o_last(b_last[b]), .overrun(b_ovr[b])
    );
  end

  pkt_arbiter #(.N(NUM_BOARDS)) u_arb (
    .clk, .rst_n,
    .i_valid(b_valid), .i_ready(b_ready), .i_data(b_data), .i_keep(b_keep), .i_last(b_last),
    .o_valid(m_valid), .o_ready(m_ready), .o_data(m_data), .o_keep(m_keep), .o_last(m_last)
  );

  udp_framer #(.SAMPLES_PER_PACKET(SAMPLES_PER_PACKET)) u_udp (
    .clk, .rst_n, .dst_mac, .src_mac, .src_ip, .dst_ip, .src_port, .dst_port,
    .i_valid(m_valid), .i_ready(m_ready), .i_data(m_data), .i_keep(m_keep), .i_last(m_last),
    .o_valid, .o_ready, .o_data, .o_last
  );

  // Status: running since the last start, packets sent, blocks dropped.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running     <= 1'b0;
      pkt_cnt     <= '0;
      overrun_cnt <= '0;
    end else begin
      if (!run)             running <= 1'b0;
      else if (start_pulse) running <= 1'b1;
      if (o_valid && o_ready && o_last) pkt_cnt <= pkt_cnt + 32'd1;
      if (|b_ovr && overrun_cnt != 16'hFFFF) overrun_cnt <= overrun_cnt + 16'd1;
    end
  end
endmodule
