// sync_gen: common SYNC generator of one analog-to-digital board.
//
// All ADCs of a board share one SYNC line whose period sets the board's
// sampling frequency; each rising edge starts a conversion on every ADC of
// the board. The period is counted in ticks of the reference clock that is
// distributed to every FPGA, so all boards and FPGAs stay locked to one
// time base, and the common start pulse resets the phase. Counting in
// reference ticks and the active-low SYNC (rising edge = start, as on the
// AD7175-2 SYNC pin) are this design's choices.
//
// Interface: while run is high the generator waits for start, then every
// `period` reference ticks (period >= SYNC_LOW+1) holds sync_n low for
// SYNC_LOW ticks and releases it; at the release it pulses `frame` for one
// clk cycle and sample_cnt, the index of the sampling period that begins,
// advances (0 for the first one after start). sample_cnt is the RTP
// timestamp unit. Dropping run stops SYNC and waits for the next start.
module sync_gen #(
  parameter int unsigned PERIOD_W = 24,
  parameter int unsigned SYNC_LOW = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                run,
  input  logic                start,
  input  logic                ref_tick,
  input  logic [PERIOD_W-1:0] period,
  output logic                sync_n,
  output logic                frame,
  output logic [31:0]         sample_cnt
);
  logic                armed;      // started and running
  logic                first;      // next release is sample 0
  logic [PERIOD_W-1:0] tick_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed      <= 1'b0;
      first      <= 1'b1;
      tick_cnt   <= '0;
      sync_n     <= 1'b1;
      frame      <= 1'b0;
      sample_cnt <= '0;
    end else begin
      frame <= 1'b0;
      if (!run) begin
        armed  <= 1'b0;
        sync_n <= 1'b1;
      end else if (start) begin
        // Phase alignment: begin a SYNC low pulse now on every board.
        armed    <= 1'b1;
        first    <= 1'b1;
        tick_cnt <= '0;
        sync_n   <= 1'b0;
      end else if (armed && ref_tick) begin
        if (tick_cnt == PERIOD_W'(SYNC_LOW - 1)) begin
          sync_n     <= 1'b1;                   // rising edge: conversion start
          frame      <= 1'b1;
          sample_cnt <= first ? 32'd0 : sample_cnt + 32'd1;
          first      <= 1'b0;
        end
        if (tick_cnt == period - 1'b1) begin
          tick_cnt <= '0;
          sync_n   <= 1'b0;
        end else tick_cnt <= tick_cnt + 1'b1;
      end
    end
  end
endmodule
