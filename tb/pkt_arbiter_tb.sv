// pkt_arbiter_tb: four packet sources with random lengths and gaps, random
// output back-pressure. Every word is tagged {source, packet, word}; the
// checker requires packets to arrive whole (no interleaving), each source's
// packets and words in order, keep and last passed through, and all packets
// delivered. A phase with every source always ready checks that grants
// rotate 0, 1, 2, 3, 0, ... while every source still has packets to send.
module pkt_arbiter_tb;
  localparam int N = 4, PKTS = 30;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] i_valid, i_ready, i_last;
  logic [N-1:0][31:0] i_data;
  logic [N-1:0][3:0] i_keep;
  logic o_valid, o_ready = 0, o_last;
  logic [31:0] o_data;
  logic [3:0] o_keep;
  int checks = 0, failures = 0;
  int pkt_no [N], wrd_no [N], len [N], exp_pkt [N], exp_wrd [N];
  bit gappy = 1;
  int cur_src = -1, last_src = -1, delivered = 0, rotations = 0;

  always #5 clk = ~clk;
  pkt_arbiter #(.N(N)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Sources
  for (genvar s = 0; s < N; s++) begin : g_src
    always @(posedge clk) begin
      if (!rst_n) begin
        i_valid[s] <= 0; pkt_no[s] = 0; wrd_no[s] = 0; len[s] = 1 + $urandom_range(0, 6);
      end else begin
        if (i_valid[s] && i_ready[s]) begin
          if (i_last[s]) begin
            pkt_no[s]++; wrd_no[s] = 0; len[s] = 1 + $urandom_range(0, 6);
          end else wrd_no[s]++;
          i_valid[s] <= 0;
        end
        if ((!i_valid[s] || i_ready[s]) && pkt_no[s] < PKTS && (!gappy || $urandom_range(0, 2) == 0)) begin
          i_valid[s] <= 1;
          i_data[s]  <= {8'(s), 12'(pkt_no[s]), 12'(wrd_no[s])};
          i_last[s]  <= (wrd_no[s] == len[s] - 1);
          i_keep[s]  <= (wrd_no[s] == len[s] - 1) ? 4'b1000 : 4'b1111;
        end
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    o_ready <= gappy ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (o_valid && o_ready) begin
      automatic int s = int'(o_data[31:24]);
      automatic bit all_busy;
      if (cur_src < 0) begin
        all_busy = 1;
        for (int k = 0; k < N; k++) if (pkt_no[k] >= PKTS - 1) all_busy = 0;
        cur_src = s;
        if (!gappy && last_src >= 0 && all_busy && delivered > N * PKTS / 2 + N) begin
          check(s == (last_src + 1) % N, $sformatf("rotation %0d after %0d", s, last_src));
          rotations++;
        end
      end
      check(s == cur_src, "packet not interleaved");
      check(int'(o_data[23:12]) == exp_pkt[s] && int'(o_data[11:0]) == exp_wrd[s],
            $sformatf("order src %0d", s));
      check(o_keep == (o_last ? 4'b1000 : 4'b1111), "keep");
      exp_wrd[s]++;
      if (o_last) begin
        exp_pkt[s]++; exp_wrd[s] = 0; last_src = cur_src; cur_src = -1; delivered++;
      end
    end
  end

  initial begin
    for (int s = 0; s < N; s++) begin exp_pkt[s] = 0; exp_wrd[s] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (delivered == N * PKTS / 2);
    @(negedge clk); gappy = 0;
    wait (delivered == N * PKTS);
    repeat (10) @(posedge clk);
    check(delivered == N * PKTS, "all packets delivered");
    check(rotations > 10, $sformatf("rotations seen %0d", rotations));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog delivered=%0d", delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
