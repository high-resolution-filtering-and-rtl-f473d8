// adc_spi_reader: SPI master that downloads conversion results from one
// 2-channel AD7175-2 sigma-delta ADC.
//
// Each ADC on an analog-to-digital board has its own SPI line clocked at
// 20 MHz (SCLK_DIV system clocks per SCLK period, 100 MHz / 5 by default).
// The ADC is assumed to run in continuous-read mode with the status byte
// appended: chip select stays low while the reader is enabled, the DOUT/RDY
// line falls when a new result is ready, and the reader then clocks
// 24 data bits and 8 status bits out, MSB first. SCLK idles high; the ADC
// shifts on the falling edge and the reader samples MISO in the system clock
// cycle that raises SCLK (SPI mode 3). The per-ADC SPI rate is the paper's;
// the read-mode and framing are taken from the converter's usual use.
//
// The result is presented on smp_* with a valid/ready handshake and held
// until taken; no new transfer starts while a result is held. The status
// byte carries the channel number in [1:0] and the ADC error flag in [6].
// Timing: a transfer takes 32 * SCLK_DIV cycles plus 3 cycles to detect RDY
// through the two-flop synchronizer.
module adc_spi_reader #(
  parameter int unsigned SCLK_DIV    = 5,
  parameter int unsigned DATA_BITS   = 24,
  parameter int unsigned STATUS_BITS = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  output logic                   sclk,
  output logic                   cs_n,
  input  logic                   miso,
  output logic                   smp_valid,
  input  logic                   smp_ready,
  output logic [DATA_BITS-1:0]   smp_data,
  output logic [STATUS_BITS-1:0] smp_status
);
  localparam int unsigned NBITS = DATA_BITS + STATUS_BITS;
  localparam int unsigned LOW_T = SCLK_DIV / 2;          // SCLK low cycles
  localparam int unsigned DIV_W = $clog2(SCLK_DIV + 1);
  localparam int unsigned BIT_W = $clog2(NBITS + 1);

  typedef enum logic [1:0] {S_IDLE, S_LOW, S_HIGH, S_HOLD} state_t;
  state_t              state;
  logic [DIV_W-1:0]    div_cnt;
  logic [BIT_W-1:0]    bit_cnt;
  logic [NBITS-1:0]    shreg;
  logic [1:0]          rdy_sync;

  // Two-flop synchronizer used only to detect RDY (the data bits are sampled
  // relative to our own SCLK and need none).
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rdy_sync <= 2'b11;
    else        rdy_sync <= {rdy_sync[0], miso};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      div_cnt   <= '0;
      bit_cnt   <= '0;
      shreg     <= '0;
      sclk      <= 1'b1;
      smp_valid <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: begin
          sclk <= 1'b1;
          if (en && !smp_valid && !rdy_sync[1]) begin
            state   <= S_LOW;
            sclk    <= 1'b0;
            div_cnt <= DIV_W'(LOW_T - 1);
            bit_cnt <= '0;
          end
        end
        S_LOW: begin
          if (div_cnt == 0) begin
            sclk    <= 1'b1;                      // rising edge: sample
            shreg   <= {shreg[NBITS-2:0], miso};
            bit_cnt <= bit_cnt + 1'b1;
            div_cnt <= DIV_W'(SCLK_DIV - LOW_T - 1);
            state   <= S_HIGH;
          end else div_cnt <= div_cnt - 1'b1;
        end
        S_HIGH: begin
          if (div_cnt == 0) begin
            if (bit_cnt == BIT_W'(NBITS)) begin
              smp_valid <= 1'b1;
              state     <= S_HOLD;
            end else begin
              sclk    <= 1'b0;                    // falling edge: ADC shifts
              div_cnt <= DIV_W'(LOW_T - 1);
              state   <= S_LOW;
            end
          end else div_cnt <= div_cnt - 1'b1;
        end
        S_HOLD: begin
          // Wait for the result to be taken and for DOUT/RDY to return high
          // so the same result is not read twice.
          if (smp_valid && smp_ready) smp_valid <= 1'b0;
          if ((!smp_valid || smp_ready) && rdy_sync[1]) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (!en) begin
        state <= S_IDLE;
        sclk  <= 1'b1;
      end
    end
  end

  assign cs_n       = ~en;
  assign smp_data   = shreg[NBITS-1 -: DATA_BITS];
  assign smp_status = shreg[STATUS_BITS-1:0];
endmodule
