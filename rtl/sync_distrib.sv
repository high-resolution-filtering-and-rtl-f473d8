// sync_distrib: master/slave handling of the inter-FPGA synchronization lines.
//
// FPGA modules are kept in step by two daisy-chained lines: a reference clock
// (16 MHz at most) and an open-drain start line. Either one FPGA, made master
// by a slow-control command, drives them, or they come from an external
// device. As master this block divides the system clock by REF_DIV
// (12.5 MHz from 100 MHz by default) onto ref_clk_out and, on start_cmd,
// pulls the start line low for START_LEN cycles. In either role the block
// synchronizes the incoming reference clock and the wired start line with two
// flops each and turns their edges into single-cycle pulses: ref_tick at each
// rising reference edge and start_pulse at the falling edge of the start
// line. The master takes its ticks from the looped-back line like every
// slave, so all modules see the same edges with the same latency. Divider
// value, pulse length and synchronizers are this design's choices.
module sync_distrib #(
  parameter int unsigned REF_DIV   = 8,
  parameter int unsigned START_LEN = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic is_master,
  input  logic start_cmd,
  input  logic ref_clk_in,
  output logic ref_clk_out,
  output logic ref_clk_oe,
  input  logic start_line,
  output logic start_pull,
  output logic ref_tick,
  output logic start_pulse
);
  localparam int unsigned DW = $clog2(REF_DIV + 1);
  localparam int unsigned SW = $clog2(START_LEN + 1);

  logic [DW-1:0] div_cnt;
  logic [SW-1:0] pull_cnt;
  logic [2:0]    ref_s, start_s;

  // Master: reference clock generator (high for REF_DIV/2 cycles).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt     <= '0;
      ref_clk_out <= 1'b0;
    end else begin
      div_cnt     <= (div_cnt == DW'(REF_DIV - 1)) ? '0 : div_cnt + 1'b1;
      ref_clk_out <= (div_cnt < DW'(REF_DIV / 2));
    end
  end
  assign ref_clk_oe = is_master;

  // Master: open-drain start pulse.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      pull_cnt <= '0;
    else if (is_master && start_cmd) pull_cnt <= SW'(START_LEN);
    else if (pull_cnt != 0)          pull_cnt <= pull_cnt - 1'b1;
  end
  assign start_pull = (pull_cnt != 0);

  // Both roles: synchronize the lines and detect edges.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_s       <= '0;
      start_s     <= '1;
      ref_tick    <= 1'b0;
      start_pulse <= 1'b0;
    end else begin
      ref_s       <= {ref_s[1:0], ref_clk_in};
      start_s     <= {start_s[1:0], start_line};
      ref_tick    <= ref_s[1] & ~ref_s[2];
      start_pulse <= ~start_s[1] & start_s[2];
    end
  end
endmodule
