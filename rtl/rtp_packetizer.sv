// rtp_packetizer: turns the samples of one analog-to-digital board into RTP
// packets, one stream per channel.
//
// Write side: every `frame` pulse (the board's SYNC) opens a sampling period;
// the samples the ADC readers deliver until the next pulse belong to it and
// are stored as 32-bit words {24-bit ADC result, 8 auxiliary bits} in the
// write half of a double buffer, at [channel][period index]. The auxiliary
// byte is `aux` latched at the SYNC (the GPIO inputs in this design). The
// timestamp of the block's first period is kept. When SAMPLES_PER_PACKET
// periods are complete (seen at the next SYNC) the halves swap and the read
// side sends the block. If the read side is still busy with the previous
// block, the new block is dropped, `overrun` pulses and the next packets
// carry the overrun flag.
//
// Read side: for every channel enabled when the block was handed over, in
// channel order, one packet of SAMPLES_PER_PACKET+5 words, byte 0 of each
// word in bits [31:24] (network order):
//   word 0      RTP byte 0x80 | marker 0, payload type | sequence number
//   word 1      timestamp (sample index of the first sample)
//   word 2      SSRC = {ssrc_base, BOARD_ID*CHANNELS + channel}
//   word 3      payload header (sampling frequency and data format)
//   word 4..    samples
//   last word   footer byte in byte 0 (o_keep = 4'b1000)
// Footer bits: [0] an ADC flagged an error on this channel in the block,
// [1] the channel missed a sample in some period, [2] a block was dropped
// before this one. The sequence number counts packets per channel.
// The packet layout and field meanings follow the paper's figure; the
// double buffering, the SSRC and footer encodings and the stream handshake
// are this design's choices.
//
// Stream: o_valid/o_ready with o_data, o_keep, o_last; one word per cycle
// while o_ready is high. A block leaves SAMPLES_PER_PACKET+5 words per
// enabled channel plus one cycle per disabled channel.
module rtp_packetizer
  import bidaq_pkg::*;
#(
  parameter int unsigned CHANNELS           = 12,
  parameter int unsigned SAMPLES_PER_PACKET = 64,
  parameter int unsigned BOARD_ID           = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                run,
  input  logic                frame,
  input  logic [31:0]         timestamp,
  input  logic [7:0]          aux,
  input  logic                wr_valid,
  input  logic [3:0]          wr_ch,
  input  logic [23:0]         wr_data,
  input  logic                wr_err,
  input  logic [CHANNELS-1:0] ch_enable,
  input  logic [23:0]         ssrc_base,
  input  logic [6:0]          payload_type,
  input  logic [31:0]         pl_header,
  output logic                o_valid,
  input  logic                o_ready,
  output logic [31:0]         o_data,
  output logic [3:0]          o_keep,
  output logic                o_last,
  output logic                overrun
);
  localparam int unsigned N      = SAMPLES_PER_PACKET;
  localparam int unsigned DEPTH  = 2 * CHANNELS * N;
  localparam int unsigned AW     = $clog2(DEPTH);
  localparam int unsigned IW     = $clog2(N + 1);
  localparam int unsigned CW     = $clog2(CHANNELS + 1);
  localparam int unsigned WW     = $clog2(N + 5);
  localparam int unsigned NWORDS = N + 5;

  // ---------------- sample buffer (two halves) ----------------
  logic [31:0] mem [DEPTH];

  function automatic logic [AW-1:0] addr_of(logic bank, logic [CW-1:0] ch, logic [IW-1:0] idx);
    return AW'((32'(bank) * CHANNELS + 32'(ch)) * N + 32'(idx));
  endfunction

  // ---------------- write side ----------------
  logic                started;
  logic                wr_bank;
  logic [IW-1:0]       frm_idx;
  logic [31:0]         blk_ts;
  logic [7:0]          aux_q;
  logic [CHANNELS-1:0] rcv_mask, blk_miss, blk_err;
  logic                pend_ovr;
  logic                wr_ok;
  logic [CHANNELS-1:0] wr_hot;

  // ---------------- read side state shared with the write side ----------------
  logic                rd_busy;
  logic                rd_bank;
  logic [31:0]         rd_ts;
  logic [CHANNELS-1:0] rd_en, rd_miss, rd_err;
  logic                rd_ovr;
  logic                handover;   // write side: block complete, read side free

  assign wr_ok  = started && wr_valid && (32'(wr_ch) < CHANNELS);
  assign wr_hot = wr_ok ? (CHANNELS'(1) << wr_ch) : '0;

  // Flags of the block including the period that closes now.
  logic [CHANNELS-1:0] miss_now, err_now;
  always_comb begin
    miss_now = blk_miss | (ch_enable & ~(rcv_mask | wr_hot));
    err_now  = blk_err | ((wr_ok && wr_err) ? wr_hot : '0);
  end

  always_ff @(posedge clk) begin
    if (wr_ok) mem[addr_of(wr_bank, CW'(wr_ch), frm_idx)] <= {wr_data, aux_q};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      started  <= 1'b0;
      wr_bank  <= 1'b0;
      frm_idx  <= '0;
      blk_ts   <= '0;
      aux_q    <= '0;
      rcv_mask <= '0;
      blk_miss <= '0;
      blk_err  <= '0;
      pend_ovr <= 1'b0;
      overrun  <= 1'b0;
      handover <= 1'b0;
      rd_bank  <= 1'b0;
      rd_ts    <= '0;
      rd_en    <= '0;
      rd_miss  <= '0;
      rd_err   <= '0;
      rd_ovr   <= 1'b0;
    end else begin
      overrun  <= 1'b0;
      handover <= 1'b0;
      if (wr_ok) begin
        rcv_mask <= rcv_mask | wr_hot;
        if (wr_err) blk_err <= blk_err | wr_hot;
      end
      if (!run) begin
        started <= 1'b0;
      end else if (frame) begin
        aux_q    <= aux;
        rcv_mask <= '0;
        if (!started) begin
          started  <= 1'b1;
          frm_idx  <= '0;
          blk_ts   <= timestamp;
          blk_miss <= '0;
          blk_err  <= '0;
        end else begin
          // Close the period that just ended.
          if (frm_idx == IW'(N - 1)) begin
            if (!rd_busy) begin
              handover <= 1'b1;
              rd_bank  <= wr_bank;
              rd_ts    <= blk_ts;
              rd_en    <= ch_enable;
              rd_miss  <= miss_now;
              rd_err   <= err_now;
              rd_ovr   <= pend_ovr;
              pend_ovr <= 1'b0;
              wr_bank  <= ~wr_bank;
            end else begin
              pend_ovr <= 1'b1;
              overrun  <= 1'b1;
            end
            frm_idx  <= '0;
            blk_ts   <= timestamp;
            blk_miss <= '0;
            blk_err  <= '0;
          end else begin
            frm_idx  <= frm_idx + 1'b1;
            blk_miss <= miss_now;
            blk_err  <= err_now;
          end
        end
      end
    end
  end

  // ---------------- read side ----------------
  logic [CW-1:0] rd_ch;
  logic [WW-1:0] widx;
  logic [15:0]   seq [CHANNELS];
  logic          load;        // a new output word is taken this cycle
  logic          ch_on;
  logic          sel_smp;     // o_data comes from the buffer
  logic [31:0]   hdr_q, smp_q;
  logic [7:0]    gch;

  assign ch_on = rd_en[rd_ch];
  assign load  = rd_busy && ch_on && (!o_valid || o_ready);
  assign gch   = 8'(BOARD_ID * CHANNELS) + 8'(rd_ch);

  always_ff @(posedge clk) begin
    if (load) smp_q <= mem[addr_of(rd_bank, rd_ch, IW'(widx - WW'(4)))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy <= 1'b0;
      rd_ch   <= '0;
      widx    <= '0;
      o_valid <= 1'b0;
      o_keep  <= '0;
      o_last  <= 1'b0;
      sel_smp <= 1'b0;
      hdr_q   <= '0;
      for (int i = 0; i < CHANNELS; i++) seq[i] <= '0;
    end else begin
      if (o_valid && o_ready) o_valid <= 1'b0;
      if (handover) begin
        rd_busy <= 1'b1;
        rd_ch   <= '0;
        widx    <= '0;
      end else if (rd_busy) begin
        if (!ch_on) begin
          // Disabled channel: no packet.
          if (rd_ch == CW'(CHANNELS - 1)) rd_busy <= 1'b0;
          else                            rd_ch   <= rd_ch + 1'b1;
        end else if (load) begin
          o_valid <= 1'b1;
          o_keep  <= 4'b1111;
          o_last  <= 1'b0;
          sel_smp <= 1'b0;
          unique case (widx)
            WW'(0): hdr_q <= {RTP_BYTE0, 1'b0, payload_type, seq[rd_ch]};
            WW'(1): hdr_q <= rd_ts;
            WW'(2): hdr_q <= {ssrc_base, gch};
            WW'(3): hdr_q <= pl_header;
            WW'(NWORDS - 1): begin
              hdr_q  <= '0;
              hdr_q[24 + FTR_ADC_ERR] <= rd_err[rd_ch];
              hdr_q[24 + FTR_MISSING] <= rd_miss[rd_ch];
              hdr_q[24 + FTR_OVERRUN] <= rd_ovr;
              o_keep <= 4'b1000;
              o_last <= 1'b1;
            end
            default: sel_smp <= 1'b1;
          endcase
          if (widx == WW'(NWORDS - 1)) begin
            widx       <= '0;
            seq[rd_ch] <= seq[rd_ch] + 16'd1;
            if (rd_ch == CW'(CHANNELS - 1)) rd_busy <= 1'b0;
            else                            rd_ch   <= rd_ch + 1'b1;
          end else widx <= widx + 1'b1;
        end
      end
    end
  end

  assign o_data = sel_smp ? smp_q : hdr_q;
endmodule
