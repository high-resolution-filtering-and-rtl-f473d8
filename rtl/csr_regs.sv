// csr_regs: memory-mapped control and status registers of the acquisition
// firmware, written and read by the software on the SoC's ARM cores.
//
// Through them the software enables channels one by one, sets each board's
// sampling frequency (SYNC period in reference-clock ticks), makes this
// module the synchronization master, starts and stops the acquisition and
// configures the GPIO port; it also sets the SSRC base, the RTP payload type
// and the data-format code, sets the addresses and ports of the UDP
// datagrams, and reads the GPIO inputs and the counters.
// That these settings exist follows the paper; the register map, reset
// values and the bus below are this design's choices.
//
// Bus: single-cycle writes (bus_write with bus_addr/bus_wdata); bus_read
// returns bus_rdata on the next cycle. Byte addresses, 32-bit registers:
//   0x00 CTRL      [0] run, [1] is_master, [2] start command (write 1, self-clearing pulse)
//   0x04 CH_EN0    channel enables  31..0      0x08 CH_EN1   63..32
//   0x0C CH_EN2    channel enables  95..64
//   0x10 SSRC      [23:0] SSRC base (upper 24 bits of every SSRC)
//   0x14 FORMAT    [6:0] payload type, [15:8] data-format code
//   0x18 GPIO_EN   0x1C GPIO_DIR (1 = output)   0x20 GPIO_OUT
//   0x24 GPIO_IN   (read only)
//   0x28 STATUS    (read only) [0] running, [31:16] dropped-block count
//   0x2C PKT_CNT   (read only) packets sent
//   0x30 SRC_IP    0x34 DST_IP    0x38 PORTS [31:16] source, [15:0] destination
//   0x40+4*b       SYNC period of board b, reference ticks
//   0x60 DST_MAC_LO [31:0]   0x64 DST_MAC_HI [15:0]
//   0x68 SRC_MAC_LO [31:0]   0x6C SRC_MAC_HI [15:0]
// Unmapped addresses read 0.
module csr_regs
  import bidaq_pkg::*;
#(
  parameter int unsigned NUM_BOARDS = 8,
  parameter int unsigned CHANNELS   = 96
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  bus_addr,
  input  logic        bus_write,
  input  logic [31:0] bus_wdata,
  input  logic        bus_read,
  output logic [31:0] bus_rdata,
  output logic                               run,
  output logic                               is_master,
  output logic                               start_cmd,
  output logic [CHANNELS-1:0]                ch_enable,
  output logic [NUM_BOARDS-1:0][PERIOD_W-1:0] period,
  output logic [23:0]                        ssrc_base,
  output logic [6:0]                         payload_type,
  output logic [7:0]                         data_format,
  output logic [GPIO_W-1:0]                  gpio_enable,
  output logic [GPIO_W-1:0]                  gpio_dir_out,
  output logic [GPIO_W-1:0]                  gpio_out,
  output logic [47:0]                        dst_mac,
  output logic [47:0]                        src_mac,
  output logic [31:0]                        src_ip,
  output logic [31:0]                        dst_ip,
  output logic [15:0]                        src_port,
  output logic [15:0]                        dst_port,
  input  logic [GPIO_W-1:0]                  gpio_in,
  input  logic                               running,
  input  logic [15:0]                        overrun_cnt,
  input  logic [31:0]                        pkt_cnt
);
  localparam int unsigned ENW = 96;   // three enable words
  localparam logic [PERIOD_W-1:0] PERIOD_RST = PERIOD_W'(2500);  // 5 ksps at 12.5 MHz
  localparam logic [15:0]         PORT_RST   = 16'd5004;          // usual RTP port

  logic [ENW-1:0] en_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run          <= 1'b0;
      is_master    <= 1'b0;
      start_cmd    <= 1'b0;
      en_q         <= '0;
      for (int b = 0; b < NUM_BOARDS; b++) period[b] <= PERIOD_RST;
      ssrc_base    <= '0;
      payload_type <= RTP_PT_DEFAULT;
      data_format  <= FMT_S24_AUX8;
      gpio_enable  <= '0;
      gpio_dir_out <= '0;
      gpio_out     <= '0;
      dst_mac      <= '0;
      src_mac      <= '0;
      src_ip       <= '0;
      dst_ip       <= '0;
      src_port     <= PORT_RST;
      dst_port     <= PORT_RST;
    end else begin
      start_cmd <= 1'b0;
      if (bus_write) begin
        unique case (bus_addr)
          8'h00: begin
            run       <= bus_wdata[0];
            is_master <= bus_wdata[1];
            start_cmd <= bus_wdata[2];
          end
          8'h04: en_q[31:0]   <= bus_wdata;
          8'h08: en_q[63:32]  <= bus_wdata;
          8'h0C: en_q[95:64]  <= bus_wdata;
          8'h10: ssrc_base    <= bus_wdata[23:0];
          8'h14: begin
            payload_type <= bus_wdata[6:0];
            data_format  <= bus_wdata[15:8];
          end
          8'h18: gpio_enable  <= bus_wdata[GPIO_W-1:0];
          8'h1C: gpio_dir_out <= bus_wdata[GPIO_W-1:0];
          8'h20: gpio_out     <= bus_wdata[GPIO_W-1:0];
          8'h30: src_ip       <= bus_wdata;
          8'h34: dst_ip       <= bus_wdata;
          8'h38: {src_port, dst_port} <= bus_wdata;
          8'h60: dst_mac[31:0]  <= bus_wdata;
          8'h64: dst_mac[47:32] <= bus_wdata[15:0];
          8'h68: src_mac[31:0]  <= bus_wdata;
          8'h6C: src_mac[47:32] <= bus_wdata[15:0];
          default: begin
            for (int b = 0; b < NUM_BOARDS; b++)
              if (bus_addr == 8'(8'h40 + 4 * b)) period[b] <= bus_wdata[PERIOD_W-1:0];
          end
        endcase
      end
    end
  end

  assign ch_enable = en_q[CHANNELS-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bus_rdata <= '0;
    else if (bus_read) begin
      unique case (bus_addr)
        8'h00: bus_rdata <= {30'd0, is_master, run};
        8'h04: bus_rdata <= en_q[31:0];
        8'h08: bus_rdata <= en_q[63:32];
        8'h0C: bus_rdata <= en_q[95:64];
        8'h10: bus_rdata <= {8'd0, ssrc_base};
        8'h14: bus_rdata <= {16'd0, data_format, 1'b0, payload_type};
        8'h18: bus_rdata <= 32'(gpio_enable);
        8'h1C: bus_rdata <= 32'(gpio_dir_out);
        8'h20: bus_rdata <= 32'(gpio_out);
        8'h24: bus_rdata <= 32'(gpio_in);
        8'h28: bus_rdata <= {overrun_cnt, 15'd0, running};
        8'h2C: bus_rdata <= pkt_cnt;
        8'h30: bus_rdata <= src_ip;
        8'h34: bus_rdata <= dst_ip;
        8'h38: bus_rdata <= {src_port, dst_port};
        8'h60: bus_rdata <= dst_mac[31:0];
        8'h64: bus_rdata <= {16'd0, dst_mac[47:32]};
        8'h68: bus_rdata <= src_mac[31:0];
        8'h6C: bus_rdata <= {16'd0, src_mac[47:32]};
        default: begin
          bus_rdata <= '0;
          for (int b = 0; b < NUM_BOARDS; b++)
            if (bus_addr == 8'(8'h40 + 4 * b)) bus_rdata <= 32'(period[b]);
        end
      endcase
    end
  end
endmodule
