// gpio_port_tb: random enable, direction, output value and pad inputs; the
// pad drive, output enable and (two cycles later) the input value are
// compared with a reference computed in the testbench.
module gpio_port_tb;
  logic clk = 0, rst_n = 0;
  logic [7:0] enable = 0, dir_out = 0, out_val = 0, pad_i = 0;
  logic [7:0] pad_o, pad_oe, in_val;
  logic [7:0] pad_d1 = 0, pad_d2 = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  gpio_port #(.W(8)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 300; i++) begin
      @(posedge clk);
      // settings change slowly, pads every cycle
      if (i % 20 == 0) begin
        enable  <= 8'($urandom);
        dir_out <= 8'($urandom);
        out_val <= 8'($urandom);
      end
      pad_i  <= 8'($urandom);
      pad_d1 <= pad_i;
      pad_d2 <= pad_d1;
      #1;
      check(pad_oe == (enable & dir_out), "output enable");
      check(pad_o == (out_val & enable & dir_out), "output value");
      if (i > 3) check(in_val == (pad_d2 & enable & ~dir_out),
                       $sformatf("input %h exp %h", in_val, pad_d2 & enable & ~dir_out));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
