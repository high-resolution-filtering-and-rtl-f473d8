// rtp_stream_checker: testbench monitor for the merged RTP packet stream of
// one FPGA module.
//
// It collects each packet (o_last closes it) and checks it against what the
// configuration and the ADC models imply: length SAMPLES+5 words, RTP byte
// 0x80 and payload type, SSRC = {ssrc_base, channel} of an enabled channel,
// payload header = {format, board period}, per-SSRC sequence numbers that
// start at 0 and advance by one, timestamps that start at 0 and advance by
// SAMPLES (by more only when the footer reports a dropped block), every
// sample equal to the ADC model's value for that conversion (unless the
// footer reports a missing sample), the auxiliary byte equal to one of the
// two GPIO input values the test applies, and the footer's keep and unused
// bits. It counts packets and each footer flag for the test to judge.
module rtp_stream_checker
  import bidaq_pkg::*;
#(
  parameter int NB = 2,
  parameter int ADCS = 6,
  parameter int SAMPLES = 4
) (
  input logic                   clk,
  input logic                   rst_n,
  input logic                   o_valid,
  input logic                   o_ready,
  input logic [31:0]            o_data,
  input logic [3:0]             o_keep,
  input logic                   o_last,
  input logic [NB*2*ADCS-1:0]   ch_en,
  input logic [NB-1:0][23:0]    period,
  input logic [23:0]            ssrc_base,
  input logic [6:0]             pt,
  input logic [7:0]             fmt,
  input logic [7:0]             aux_a,
  input logic [7:0]             aux_b
);
  localparam int CHB = 2 * ADCS, NCH = NB * CHB;
  int checks = 0, failures = 0;
  int packets = 0, err_flags = 0, miss_flags = 0, ovr_flags = 0, ts_gaps = 0;
  int aux_a_seen = 0, aux_b_seen = 0;
  int pkts_of [NCH];
  int last_seq [NCH], last_ts [NCH];
  logic [31:0] buff [$];

  initial for (int i = 0; i < NCH; i++) begin pkts_of[i] = 0; last_seq[i] = -1; last_ts[i] = -1; end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %m %s", what); end
  endtask

  task automatic judge(logic [3:0] last_keep);
    int g, b, c, ts, sq;
    logic [7:0] ftr;
    check(buff.size() == SAMPLES + 5, $sformatf("packet length %0d", buff.size()));
    if (buff.size() != SAMPLES + 5) return;
    packets++;
    check(buff[0][31:24] == 8'h80 && buff[0][23] == 0 && buff[0][22:16] == pt, "RTP byte / payload type");
    check(buff[2][31:8] == ssrc_base, "SSRC base");
    g = int'(buff[2][7:0]);
    check(g < NCH, $sformatf("channel id %0d", g));
    if (g >= NCH) return;
    check(ch_en[g], $sformatf("packet from disabled channel %0d", g));
    b = g / CHB; c = g % CHB;
    pkts_of[g]++;
    check(buff[3] == {fmt, period[b]}, "payload header");
    ftr = buff[SAMPLES + 4][31:24];
    check(buff[SAMPLES + 4][23:0] == 0 && ftr[7:3] == 0 && last_keep == 4'b1000, "footer format");
    if (ftr[FTR_ADC_ERR]) err_flags++;
    if (ftr[FTR_MISSING]) miss_flags++;
    if (ftr[FTR_OVERRUN]) ovr_flags++;
    sq = int'(buff[0][15:0]);
    ts = int'(buff[1]);
    check(sq == ((last_seq[g] + 1) & 16'hFFFF), $sformatf("ch %0d seq %0d after %0d", g, sq, last_seq[g]));
    check(ts % SAMPLES == 0, "timestamp alignment");
    if (ftr[FTR_OVERRUN]) begin
      check(ts > last_ts[g] + SAMPLES, "timestamp jumps after a dropped block");
      ts_gaps++;
    end else check(ts == last_ts[g] + SAMPLES || (last_ts[g] < 0 && ts == 0),
                   $sformatf("ch %0d timestamp %0d after %0d", g, ts, last_ts[g]));
    last_seq[g] = sq;
    last_ts[g]  = ts;
    if (!ftr[FTR_MISSING]) begin
      for (int i = 0; i < SAMPLES; i++) begin
        automatic logic [23:0] e = bidaq_tb_pkg::adc_value(b * ADCS + c / 2, c % 2, ts + i);
        automatic logic [7:0]  a = buff[4 + i][7:0];
        check(buff[4 + i][31:8] == e, $sformatf("ch %0d sample %0d: %h exp %h", g, ts + i, buff[4 + i][31:8], e));
        check(a == aux_a || a == aux_b, $sformatf("aux byte %h", a));
        if (a == aux_a) aux_a_seen++;
        if (a == aux_b && aux_b != aux_a) aux_b_seen++;
      end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (o_valid && o_ready) begin
      buff.push_back(o_data);
      if (!o_last) check(o_keep == 4'hF, "keep of inner word");
      else begin
        judge(o_keep);
        buff.delete();
      end
    end
  end
endmodule
