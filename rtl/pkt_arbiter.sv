// pkt_arbiter: merges the packet streams of the boards read by one FPGA
// module into the single stream handed to the UDP/Ethernet side.
//
// Whole packets are passed: once an input is granted it keeps the output
// until the word with i_last has been transferred, then the grant moves
// round robin to the next input with a word waiting, starting after the one
// just served. Output is combinational from the granted input (no added
// latency); i_ready is high only for the granted input. Merging per packet,
// round robin, is this design's choice. An assertion checks that the output
// holds its word while o_ready is low.
module pkt_arbiter #(
  parameter int unsigned N = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        i_valid,
  output logic [N-1:0]        i_ready,
  input  logic [N-1:0][31:0]  i_data,
  input  logic [N-1:0][3:0]   i_keep,
  input  logic [N-1:0]        i_last,
  output logic                o_valid,
  input  logic                o_ready,
  output logic [31:0]         o_data,
  output logic [3:0]          o_keep,
  output logic                o_last
);
  localparam int unsigned GW = (N > 1) ? $clog2(N) : 1;

  logic          busy;
  logic [GW-1:0] grant, last_grant, pick;
  logic          found;

  // Next requester after last_grant, round robin.
  always_comb begin
    pick  = last_grant;
    found = 1'b0;
    for (int k = 1; k <= N; k++) begin
      logic [GW-1:0] idx;
      idx = GW'((32'(last_grant) + 32'(k)) % N);
      if (!found && i_valid[idx]) begin
        pick  = GW'(idx);
        found = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      grant      <= '0;
      last_grant <= GW'(N - 1);
    end else if (!busy) begin
      if (found) begin
        busy  <= 1'b1;
        grant <= pick;
      end
    end else if (o_valid && o_ready && o_last) begin
      busy       <= 1'b0;
      last_grant <= grant;
    end
  end

  always_comb begin
    i_ready = '0;
    o_valid = busy && i_valid[grant];
    o_data  = i_data[grant];
    o_keep  = i_keep[grant];
    o_last  = i_last[grant];
    if (busy) i_ready[grant] = o_ready;
  end

  // Stream rule: a word offered and not taken stays the same.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (o_valid && !o_ready) |=> (o_valid && $stable(o_data) && $stable(o_last));
  endproperty
  a_hold: assert property (p_hold) else $error("pkt_arbiter: output changed while stalled");
endmodule
