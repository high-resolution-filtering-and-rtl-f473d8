// rtp_packetizer_tb: end-to-end check of the RTP packetizer of one board.
//
// The testbench opens a sampling period every FRAME_CYC cycles (frame
// pulse, timestamp = period index, auxiliary byte = a function of the
// index) and writes one sample per channel during each period. A reference
// model builds every expected packet word (RTP byte, payload type,
// per-channel sequence number, timestamp of the first sample, SSRC, payload
// header, samples with their auxiliary byte, footer) and the checker
// compares the output stream word by word, including keep and last.
// Provoked on purpose: disabled channels (no packet), a missing sample and an
// ADC error (footer bits), and a long output stall that makes a block arrive
// while the previous one is still being sent (block dropped, overrun pulse,
// overrun flag in the next footers, sequence numbers not advanced). The
// latency from the closing SYNC to the first word of a block is checked.
module rtp_packetizer_tb;
  import bidaq_pkg::*;
  localparam int CH = 12, N = 4, BID = 2, FRAME_CYC = 400, BLOCKS = 7;
  localparam logic [CH-1:0] EN = 12'b1111_0111_0111;   // channels 3 and 7 off
  localparam int MISS_BLK = 1, MISS_CH = 5, ERR_BLK = 1, ERR_CH = 1, STALL_BLK = 3;

  logic clk = 0, rst_n = 0, run = 0, frame = 0;
  logic [31:0] timestamp = 0;
  logic [7:0] aux = 0;
  logic wr_valid = 0, wr_err = 0;
  logic [3:0] wr_ch = 0;
  logic [23:0] wr_data = 0;
  logic [23:0] ssrc_base = 24'hB1DA90;
  logic [6:0] payload_type = 7'd96;
  logic [31:0] pl_header = 32'h01_0009C4;
  logic o_valid, o_ready = 1, o_last, overrun;
  logic [31:0] o_data;
  logic [3:0] o_keep;
  int checks = 0, failures = 0;

  typedef struct { logic [31:0] w; logic [3:0] keep; bit last; bit care; } exp_t;
  exp_t q[$];
  int unsigned seq [CH];
  int overruns = 0, words = 0, dropped = 0, stall = 0;
  bit  pend_ovr = 0;
  longint t_close = 0;
  bit  want_lat = 0;

  always #5 clk = ~clk;
  rtp_packetizer #(.CHANNELS(CH), .SAMPLES_PER_PACKET(N), .BOARD_ID(BID)) dut (.*, .ch_enable(EN));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [7:0] aux_of(int k); return 8'(k * 37 + 5); endfunction

  // Expected packets of block b (periods b*N .. b*N+N-1).
  task automatic expect_block(int b);
    for (int ch = 0; ch < CH; ch++) if (EN[ch]) begin
      logic [7:0] ftr;
      q.push_back('{{8'h80, 1'b0, payload_type, 16'(seq[ch])}, 4'hF, 0, 1});
      q.push_back('{32'(b * N), 4'hF, 0, 1});
      q.push_back('{{ssrc_base, 8'(BID * CH + ch)}, 4'hF, 0, 1});
      q.push_back('{pl_header, 4'hF, 0, 1});
      for (int i = 0; i < N; i++) begin
        automatic int k = b * N + i;
        automatic bit miss = (b == MISS_BLK && ch == MISS_CH && i == 2);
        q.push_back('{{bidaq_tb_pkg::adc_value(BID, ch, k), aux_of(k)}, 4'hF, 0, !miss});
      end
      ftr = '0;
      ftr[FTR_ADC_ERR] = (b == ERR_BLK && ch == ERR_CH);
      ftr[FTR_MISSING] = (b == MISS_BLK && ch == MISS_CH);
      ftr[FTR_OVERRUN] = pend_ovr;
      q.push_back('{{ftr, 24'd0}, 4'b1000, 1, 1});
      seq[ch]++;
    end
    pend_ovr = 0;
  endtask

  // Output checker
  always @(posedge clk) if (rst_n) begin
    if (overrun) overruns++;
    if (stall > 0) begin o_ready <= 0; stall--; end
    else o_ready <= ($urandom_range(0, 4) != 0);
    if (o_valid && want_lat) begin
      // first word within a few cycles of the closing SYNC
      check($time - t_close <= 40, $sformatf("block latency %0d", $time - t_close));
      want_lat = 0;
    end
    if (o_valid && o_ready) begin
      words++;
      if (q.size() == 0) check(0, "unexpected word");
      else begin
        automatic exp_t e = q.pop_front();
        if (e.care) check(o_data == e.w, $sformatf("word %0d: %h exp %h", words, o_data, e.w));
        check(o_keep == e.keep && o_last == e.last, $sformatf("keep/last word %0d", words));
      end
    end
  end

  initial begin
    for (int c = 0; c < CH; c++) seq[c] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1; run <= 1;
    repeat (5) @(posedge clk);
    for (int k = 0; k <= BLOCKS * N; k++) begin
      // SYNC of period k; it closes block k/N - 1 when k is a multiple of N
      @(posedge clk);
      frame <= 1; timestamp <= 32'(k); aux <= aux_of(k);
      if (k > 0 && k % N == 0) begin
        automatic int b = k / N - 1;
        if (q.size() != 0) begin
          dropped++;           // previous block still being sent
          pend_ovr = 1;
        end else begin
          expect_block(b);
          t_close = $time;
          want_lat = 1;
        end
        if (b == STALL_BLK - 1) stall = 3 * FRAME_CYC * N / 2;   // stall while block 2 is sent
      end
      @(posedge clk);
      frame <= 0;
      if (k == BLOCKS * N) break;
      repeat (20) @(posedge clk);
      for (int ch = 0; ch < CH; ch++) begin
        if (k / N == MISS_BLK && ch == MISS_CH && k % N == 2) continue;
        @(posedge clk);
        wr_valid <= 1; wr_ch <= 4'(ch);
        wr_data <= bidaq_tb_pkg::adc_value(BID, ch, k);
        wr_err <= (k / N == ERR_BLK && ch == ERR_CH && k % N == 1);
        @(posedge clk);
        wr_valid <= 0; wr_err <= 0;
        repeat ($urandom_range(0, 4)) @(posedge clk);
      end
      repeat (FRAME_CYC - 120) @(posedge clk);
    end
    repeat (4 * FRAME_CYC) @(posedge clk);
    check(q.size() == 0, $sformatf("%0d words never sent", q.size()));
    check(dropped == 1 && overruns == 1, $sformatf("dropped %0d overrun pulses %0d", dropped, overruns));
    check(words == (BLOCKS - 1) * 10 * (N + 5), $sformatf("words %0d", words));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((BLOCKS + 3) * N * FRAME_CYC * 2) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
