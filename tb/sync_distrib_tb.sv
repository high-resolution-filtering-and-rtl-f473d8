// sync_distrib_tb: two instances wired as on the backplane, one master and
// one slave. The master's reference clock must have period REF_DIV and be
// enabled only on the master; the wired-AND start line must be pulled for
// START_LEN cycles after the master's start command and produce exactly one
// start_pulse in each instance, on the same cycle, within 4 cycles of the
// line's falling edge; ref_tick must pulse once
// per reference period in both, on the same cycles. A start command given
// to the slave must do nothing. In a second phase both instances are slaves
// and the lines come from an external device: a reference clock of 73 ns
// period (about 13.7 MHz, unrelated to the system clock) and a 200 ns start
// pulse; each instance must give one ref_tick per external rising edge and
// one start_pulse.
module sync_distrib_tb;
  localparam int DIV = 8, SLEN = 16;
  logic clk = 0, rst_n = 0;
  logic m_start_cmd = 0, s_start_cmd = 0;
  logic m_ref_out, m_ref_oe, s_ref_out, s_ref_oe;
  logic m_pull, s_pull, m_tick, s_tick, m_sp, s_sp;
  logic ref_line, start_line;
  int checks = 0, failures = 0;
  int m_ticks = 0, s_ticks = 0, m_starts = 0, s_starts = 0, pull_cycles = 0;
  int last_tick = -1, cyc = 0, fall_cyc = -1;
  logic line_q = 1;
  logic m_master = 1, ext_on = 0, ext_ref = 0, ext_pull = 0;
  int ext_edges = 0, ext_ticks = 0, ext_starts = 0;

  always #5 clk = ~clk;

  // Backplane: the driven reference clock, and an open-drain start line.
  assign ref_line   = m_ref_oe ? m_ref_out : (s_ref_oe ? s_ref_out : ext_ref);
  assign start_line = ~(m_pull | s_pull | ext_pull);

  // External reference, free running when enabled
  always begin
    #36.5 if (ext_on) begin ext_ref = ~ext_ref; if (ext_ref) ext_edges++; end
  end

  sync_distrib #(.REF_DIV(DIV), .START_LEN(SLEN)) u_m (
    .clk, .rst_n, .is_master(m_master), .start_cmd(m_start_cmd),
    .ref_clk_in(ref_line), .ref_clk_out(m_ref_out), .ref_clk_oe(m_ref_oe),
    .start_line, .start_pull(m_pull), .ref_tick(m_tick), .start_pulse(m_sp));
  sync_distrib #(.REF_DIV(DIV), .START_LEN(SLEN)) u_s (
    .clk, .rst_n, .is_master(1'b0), .start_cmd(s_start_cmd),
    .ref_clk_in(ref_line), .ref_clk_out(s_ref_out), .ref_clk_oe(s_ref_oe),
    .start_line, .start_pull(s_pull), .ref_tick(s_tick), .start_pulse(s_sp));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    check(m_tick == s_tick && m_sp == s_sp, "master and slave see the same edges");
    if (m_tick && ext_on) ext_ticks++;
    if (m_sp && ext_on) ext_starts++;
    if (m_tick && !ext_on) begin
      if (last_tick >= 0) check(cyc - last_tick == DIV, $sformatf("tick spacing %0d", cyc - last_tick));
      last_tick = cyc;
      m_ticks++;
    end
    if (s_tick) s_ticks++;
    line_q <= start_line;
    if (line_q && !start_line) fall_cyc = cyc;
    if (m_sp && !ext_on) begin
      m_starts++;
      check(fall_cyc >= 0 && cyc - fall_cyc <= 4, $sformatf("start pulse %0d cycles after the line fell", cyc - fall_cyc));
    end
    if (s_sp) s_starts++;
    if (!start_line) pull_cycles++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (100) @(posedge clk);
    check(m_ref_oe == 1 && s_ref_oe == 0, "only the master drives the reference");
    check(m_ticks >= 11 && m_ticks <= 13, $sformatf("ticks %0d", m_ticks));
    s_start_cmd <= 1; @(posedge clk); s_start_cmd <= 0;
    repeat (40) @(posedge clk);
    check(m_starts == 0 && pull_cycles == 0, "slave start command ignored");
    m_start_cmd <= 1; @(posedge clk); m_start_cmd <= 0;
    repeat (60) @(posedge clk);
    check(pull_cycles == SLEN, $sformatf("start line low %0d cycles", pull_cycles));
    check(m_starts == 1 && s_starts == 1, $sformatf("start pulses %0d %0d", m_starts, s_starts));
    check(s_ticks == m_ticks, "slave tick count");
    // external source
    m_master <= 0;
    repeat (20) @(posedge clk);
    check(m_ref_oe == 0 && s_ref_oe == 0, "no module drives the reference as slaves");
    ext_on = 1;
    repeat (300) @(posedge clk);
    #13 ext_pull = 1;
    #200 ext_pull = 0;
    repeat (300) @(posedge clk);
    ext_on = 0;
    repeat (10) @(posedge clk);
    check(ext_edges > 70 && ext_ticks == ext_edges,
          $sformatf("external reference: %0d edges, %0d ticks", ext_edges, ext_ticks));
    check(ext_starts == 1 && m_starts == 1, $sformatf("external start: %0d pulses", ext_starts));
    check(s_ticks == m_ticks + ext_ticks, "both slaves tick alike");
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
