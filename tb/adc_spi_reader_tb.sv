// adc_spi_reader_tb: checks the SPI reader against the AD7175-2 model.
//
// SYNC edges start conversion pairs in the model; the reader's results are
// taken with random back-pressure and each is compared with the expected
// value, channel and error flag. The transfer time (RDY fall to result) is
// checked against 32 SCLK periods of 5 clk cycles (20 MHz from 100 MHz)
// plus the synchronizer latency.
module adc_spi_reader_tb;
  localparam int DIV = 5;
  logic clk = 0, rst_n = 0, en = 0;
  logic sclk, cs_n, miso, sync_n = 1, err_inject = 0;
  logic smp_valid, smp_ready = 0;
  logic [23:0] smp_data;
  logic [7:0]  smp_status;
  int checks = 0, failures = 0;
  int unsigned got = 0;
  longint t_rdy, t_valid;

  always #5 clk = ~clk;

  adc_spi_reader #(.SCLK_DIV(DIV)) dut (.*);
  ad7175_model #(.ID(3), .CONV_DLY(1500)) adc (
    .sync_n, .cs_n, .sclk, .err_inject, .mute_ch1(1'b0), .dout(miso));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Random back-pressure
  always @(posedge clk) smp_ready <= ($urandom_range(0, 3) != 0);

  logic was_valid = 0;
  always @(posedge clk) if (rst_n) begin
    if (smp_valid && !was_valid) begin
      t_valid = $time;
      t_rdy   = adc.t_ready;
      // 32 SCLK periods, up to 4 cycles of RDY detection and start
      check((t_valid - t_rdy) >= 32 * DIV * 10 && (t_valid - t_rdy) <= (32 * DIV + 5) * 10,
            $sformatf("transfer time %0d", t_valid - t_rdy));
    end
    was_valid <= smp_valid & ~smp_ready;
    if (smp_valid && smp_ready) begin
      automatic int unsigned n  = got / 2;
      automatic int unsigned ch = got % 2;
      check(smp_data == bidaq_tb_pkg::adc_value(3, ch, n),
            $sformatf("data n=%0d ch=%0d got %h", n, ch, smp_data));
      check(smp_status[1:0] == 2'(ch), "channel id");
      check(smp_status[6] == (n >= 6), "error flag");
      got++;
    end
  end

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    en = 1;
    for (int k = 0; k < 10; k++) begin
      if (k == 6) err_inject = 1;
      @(posedge clk) sync_n = 0;
      repeat (20) @(posedge clk);
      sync_n = 1;
      repeat (1000) @(posedge clk);
    end
    check(got == 20, $sformatf("results received %0d", got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
