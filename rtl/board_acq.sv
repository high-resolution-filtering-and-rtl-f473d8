// board_acq: acquisition path of one 12-channel analog-to-digital board.
//
// One SYNC generator drives the board's common SYNC line; six SPI readers
// (one per 2-channel AD7175-2) download the results; a fixed-priority
// multiplexer passes one result per clk cycle to the RTP packetizer, which
// files it under channel 2*adc + status[0] and flags it when status bit 6
// (ADC error) is set. The GPIO inputs travel as the auxiliary byte, and the
// payload header is {data-format code, SYNC period}. The readers deliver at
// most one result per ADC every 32 SCLK periods, so the multiplexer never
// holds a reader for more than a few cycles. The channel mapping, the
// auxiliary byte and the header encoding are this design's choices.
module board_acq
  import bidaq_pkg::*;
#(
  parameter int unsigned ADCS               = 6,
  parameter int unsigned SAMPLES_PER_PACKET = 64,
  parameter int unsigned BOARD_ID           = 0,
  parameter int unsigned SCLK_DIV           = 5
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  run,
  input  logic                  start,
  input  logic                  ref_tick,
  input  logic [PERIOD_W-1:0]   period,
  input  logic [2*ADCS-1:0]     ch_enable,
  input  logic [23:0]           ssrc_base,
  input  logic [6:0]            payload_type,
  input  logic [7:0]            data_format,
  input  logic [7:0]            aux,
  output logic                  sync_n,
  output logic [ADCS-1:0]       sclk,
  output logic [ADCS-1:0]       cs_n,
  input  logic [ADCS-1:0]       miso,
  output logic                  o_valid,
  input  logic                  o_ready,
  output logic [31:0]           o_data,
  output logic [3:0]            o_keep,
  output logic                  o_last,
  output logic                  overrun
);
  localparam int unsigned CH = 2 * ADCS;

  logic              frame;
  logic [31:0]       sample_cnt;
  logic [ADCS-1:0]   s_valid, s_ready;
  logic [23:0]       s_data   [ADCS];
  logic [7:0]        s_status [ADCS];
  logic              wr_valid, wr_err;
  logic [3:0]        wr_ch;
  logic [23:0]       wr_data;

  sync_gen #(.PERIOD_W(PERIOD_W)) u_sync (
    .clk, .rst_n, .run, .start, .ref_tick, .period,
    .sync_n, .frame, .sample_cnt
  );

  for (genvar a = 0; a < ADCS; a++) begin : g_adc
    adc_spi_reader #(.SCLK_DIV(SCLK_DIV)) u_rd (
      .clk, .rst_n, .en(run),
      .sclk(sclk[a]), .cs_n(cs_n[a]), .miso(miso[a]),
      .smp_valid(s_valid[a]), .smp_ready(s_ready[a]),
      .smp_data(s_data[a]), .smp_status(s_status[a])
    );
  end

  always_comb begin
    s_ready  = '0;
    wr_valid = 1'b0;
    wr_ch    = '0;
    wr_data  = '0;
    wr_err   = 1'b0;
    for (int a = ADCS - 1; a >= 0; a--) begin
      if (s_valid[a]) begin
        s_ready  = ADCS'(1) << a;
        wr_valid = 1'b1;
        wr_ch    = 4'(2 * a) + 4'(s_status[a][0]);
        wr_data  = s_data[a];
        wr_err   = s_status[a][6];
      end
    end
  end

  rtp_packetizer #(
    .CHANNELS(CH), .SAMPLES_PER_PACKET(SAMPLES_PER_PACKET), .BOARD_ID(BOARD_ID)
  ) u_pkt (
    .clk, .rst_n, .run, .frame, .timestamp(sample_cnt), .aux,
    .wr_valid, .wr_ch, .wr_data, .wr_err,
    .ch_enable, .ssrc_base, .payload_type,
    .pl_header({data_format, period}),
    .o_valid, .o_ready, .o_data, .o_keep, .o_last, .overrun
  );
endmodule
