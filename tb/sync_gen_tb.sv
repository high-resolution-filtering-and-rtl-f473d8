// sync_gen_tb: checks the board SYNC generator.
//
// Reference ticks come every 8 clk cycles. After start, frames must follow
// every `period` ticks exactly, sample_cnt must count 0, 1, 2, ..., the
// SYNC low time must be SYNC_LOW ticks and every frame pulse must coincide
// with a rising SYNC edge. Then run is dropped (no frames), restarted with
// a new period (count restarts at 0, new spacing).
module sync_gen_tb;
  logic clk = 0, rst_n = 0, run = 0, start = 0, ref_tick = 0;
  logic [23:0] period = 24'd10;
  logic sync_n, frame;
  logic [31:0] sample_cnt;
  int checks = 0, failures = 0;
  int cyc = 0, last_frame = -1, frames = 0, low_start = 0;
  int unsigned exp_cnt = 0;
  logic sync_q = 1;

  always #5 clk = ~clk;
  sync_gen #(.PERIOD_W(24), .SYNC_LOW(2)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    ref_tick <= (cyc % 8 == 0);
    sync_q <= sync_n;
    if (sync_q && !sync_n) low_start = cyc;
    if (!sync_q && sync_n && run) check(cyc - low_start >= 8 && cyc - low_start <= 16,
                                 $sformatf("sync low time %0d", cyc - low_start));
    if (frame) begin
      check(!sync_q && sync_n, "frame at sync rising edge");
      check(sample_cnt == exp_cnt, $sformatf("sample_cnt %0d exp %0d", sample_cnt, exp_cnt));
      if (last_frame >= 0)
        check(cyc - last_frame == int'(period) * 8, $sformatf("frame spacing %0d", cyc - last_frame));
      last_frame = cyc;
      exp_cnt++;
      frames++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1; run <= 1;
    repeat (20) @(posedge clk);
    check(sync_n == 1 && frames == 0, "idle before start");
    start <= 1; @(posedge clk); start <= 0;
    repeat (10 * 80 + 40) @(posedge clk);
    check(frames == 11, $sformatf("frames %0d", frames));
    run <= 0;
    repeat (3) @(posedge clk);
    frames = 0;
    repeat (400) @(posedge clk);
    check(frames == 0 && sync_n == 1, "stopped");
    period <= 24'd25; run <= 1; last_frame = -1; exp_cnt = 0;
    repeat (5) @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    repeat (25 * 8 * 4 + 40) @(posedge clk);
    check(frames == 5, $sformatf("frames after restart %0d", frames));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
