// csr_regs_tb: register bus check. Reset values, write then read back of
// every read-write register, the decoded outputs, the self-clearing start
// command, the read-only status inputs, the network addresses and an
// unmapped address.
module csr_regs_tb;
  localparam int NB = 8, NCH = 96;
  logic clk = 0, rst_n = 0;
  logic [7:0] bus_addr = 0;
  logic bus_write = 0, bus_read = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic run, is_master, start_cmd;
  logic [NCH-1:0] ch_enable;
  logic [NB-1:0][23:0] period;
  logic [23:0] ssrc_base;
  logic [6:0] payload_type;
  logic [7:0] data_format, gpio_enable, gpio_dir_out, gpio_out;
  logic [47:0] dst_mac, src_mac;
  logic [31:0] src_ip, dst_ip;
  logic [15:0] src_port, dst_port;
  logic [7:0] gpio_in = 8'hA5;
  logic running = 1;
  logic [15:0] overrun_cnt = 16'h0042;
  logic [31:0] pkt_cnt = 32'hDEAD_0001;
  int checks = 0, failures = 0, start_pulses = 0;

  always #5 clk = ~clk;
  csr_regs #(.NUM_BOARDS(NB), .CHANNELS(NCH)) dut (.*);
  always @(posedge clk) if (rst_n && start_cmd) start_pulses++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(posedge clk); bus_addr <= a; bus_wdata <= d; bus_write <= 1;
    @(posedge clk); bus_write <= 0;
    #1;
  endtask
  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(posedge clk); bus_addr <= a; bus_read <= 1;
    @(posedge clk); bus_read <= 0;
    #1 d = bus_rdata;
  endtask

  initial begin
    logic [31:0] d;
    logic [23:0] pv [NB];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(!run && !is_master && ch_enable == 0, "reset control");
    check(payload_type == 7'd96 && data_format == 8'h01, "reset format");
    check(period[3] == 24'd2500, "reset period");
    wr(8'h04, 32'h1234_5678); wr(8'h08, 32'h9ABC_DEF0); wr(8'h0C, 32'h0F0F_F0F0);
    check(ch_enable == {32'h0F0F_F0F0, 32'h9ABC_DEF0, 32'h1234_5678}, "channel enables");
    wr(8'h10, 32'hFF11_2233); check(ssrc_base == 24'h11_2233, "ssrc");
    wr(8'h14, 32'h0000_0561); check(payload_type == 7'h61 && data_format == 8'h05, "format");
    wr(8'h18, 32'hF0); wr(8'h1C, 32'h3C); wr(8'h20, 32'h99);
    check(gpio_enable == 8'hF0 && gpio_dir_out == 8'h3C && gpio_out == 8'h99, "gpio setup");
    for (int b = 0; b < NB; b++) begin
      pv[b] = 24'($urandom);
      wr(8'(8'h40 + 4 * b), {8'hEE, pv[b]});
    end
    for (int b = 0; b < NB; b++) begin
      check(period[b] == pv[b], $sformatf("period %0d", b));
      rd(8'(8'h40 + 4 * b), d); check(d == {8'h00, pv[b]}, $sformatf("read period %0d", b));
    end
    wr(8'h00, 32'h3);
    check(run && is_master && start_pulses == 0, "run + master");
    wr(8'h00, 32'h7);
    repeat (3) @(posedge clk);
    check(start_pulses == 1 && !start_cmd, "start command is one pulse");
    rd(8'h00, d); check(d == 32'h3, "read ctrl");
    rd(8'h08, d); check(d == 32'h9ABC_DEF0, "read en1");
    rd(8'h10, d); check(d == 32'h0011_2233, "read ssrc");
    rd(8'h14, d); check(d == 32'h0000_0561, "read format");
    rd(8'h1C, d); check(d == 32'h3C, "read gpio dir");
    rd(8'h24, d); check(d == 32'hA5, "read gpio in");
    rd(8'h28, d); check(d == 32'h0042_0001, "read status");
    rd(8'h2C, d); check(d == 32'hDEAD_0001, "read packet count");
    rd(8'h3C, d); check(d == 0, "unmapped");
    check(src_port == 16'd5004 && dst_port == 16'd5004, "reset ports");
    wr(8'h30, 32'hC0A8_0102); wr(8'h34, 32'hC0A8_01FE); wr(8'h38, 32'h1388_138A);
    wr(8'h60, 32'h3344_5566); wr(8'h64, 32'hFFFF_1122); wr(8'h68, 32'hCCDD_EEFF); wr(8'h6C, 32'h0000_AABB);
    check(src_ip == 32'hC0A8_0102 && dst_ip == 32'hC0A8_01FE, "IP addresses");
    check(src_port == 16'h1388 && dst_port == 16'h138A, "ports");
    check(dst_mac == 48'h1122_3344_5566 && src_mac == 48'hAABB_CCDD_EEFF, "MAC addresses");
    rd(8'h64, d); check(d == 32'h0000_1122, "read dst MAC high");
    rd(8'h38, d); check(d == 32'h1388_138A, "read ports");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
