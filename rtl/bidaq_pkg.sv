// bidaq_pkg: constants and types shared by the BiDAQ acquisition firmware.
//
// The sizes that come from the system description are the 12 channels per
// analog-to-digital board (six 2-channel AD7175-2 converters), 8 boards per
// FPGA module (96 channels, 48 SPI lines), 24-bit conversions carried in
// 32-bit sample words with 8 auxiliary bits, an 8-bit GPIO port and the RTP
// packet layout. The footer flag positions, the data-format code and the RTP
// constants chosen here are this design's own.
package bidaq_pkg;

  localparam int unsigned GPIO_W          = 8;
  localparam int unsigned PERIOD_W        = 24;  // SYNC period, reference ticks

  // RTP (RFC 3550) fixed header byte: version 2, no padding, extension or CSRC.
  localparam logic [7:0] RTP_BYTE0        = 8'h80;
  localparam logic [6:0] RTP_PT_DEFAULT   = 7'd96;  // first dynamic payload type

  // Footer flag bits (byte at the end of every packet payload).
  localparam int unsigned FTR_ADC_ERR     = 0;  // an ADC flagged an error in the block
  localparam int unsigned FTR_MISSING     = 1;  // a channel delivered no sample in a period
  localparam int unsigned FTR_OVERRUN     = 2;  // an earlier block was dropped

  // Data-format code placed in the payload header: 24-bit two's-complement
  // sample in bits [31:8], 8 auxiliary bits in [7:0].
  localparam logic [7:0] FMT_S24_AUX8     = 8'h01;

endpackage
