// ad7175_model: behavioural model (not synthesizable) of the SPI side of a
// 2-channel AD7175-2 sigma-delta ADC in continuous-read mode with the status
// byte appended.
//
// Each rising edge of sync_n starts a conversion sequence: after CONV_DLY
// time units channel 0 is ready, DOUT/RDY falls, and the 32-bit word
// {24-bit result, status} is shifted out MSB first, one bit per falling SCLK
// edge; after the 32nd rising edge DOUT/RDY returns high. Channel 1 follows
// after another CONV_DLY. The result of conversion n (n-th SYNC edge,
// counting from 0) is bidaq_tb_pkg::adc_value(ID, ch, n). Status byte:
// [7] RDY (0), [6] ADC error (err_inject), [1:0] channel. With mute_ch1 set
// the channel-1 result is withheld, which the acquisition must flag as a
// missing sample. With cs_n high the output reads high and SYNC edges are
// ignored.
module ad7175_model #(
  parameter int unsigned ID       = 0,
  parameter int unsigned CONV_DLY = 2000
) (
  input  logic sync_n,
  input  logic cs_n,
  input  logic sclk,
  input  logic err_inject,
  input  logic mute_ch1,
  output logic dout
);
  logic        d = 1'b1;
  int unsigned n = 0;
  int unsigned conversions = 0;
  longint      t_ready = 0;     // time DOUT/RDY last fell to announce a result

  assign dout = cs_n ? 1'b1 : d;

  // SYNC edges count only while the ADC is selected, so that the settling of
  // the lines at power-up is not taken as a conversion start.
  always @(posedge sync_n) if (!cs_n) begin
    int unsigned this_n;
    logic [31:0] word;
    this_n = n;
    n++;
    for (int ch = 0; ch < 2; ch++) begin
      #(CONV_DLY);
      if (!(mute_ch1 && ch == 1)) begin
        word = {bidaq_tb_pkg::adc_value(ID, ch, this_n), 1'b0, err_inject, 4'b0000, 2'(ch)};
        d = 1'b0;
        t_ready = $time;
        for (int i = 0; i < 32; i++) begin
          @(negedge sclk);
          d = word[31 - i];
        end
        @(posedge sclk);
        #1 d = 1'b1;
        conversions++;
      end
    end
  end
endmodule
