// gpio_port: the module's general purpose IO port (8 bits by default).
//
// Every bit can be enabled and set as output or input. Output bits drive
// out_val onto the pad (to trigger a pulser, for example); input bits are
// passed through a two-flop synchronizer and appear on in_val, from where
// the acquisition path latches them at each SYNC so that they stay aligned
// with the samples (muon-veto flags, for example). Disabled bits are not
// driven and read as 0, and an output bit reads as 0 on in_val. The per-bit
// enable/direction follow the paper; synchronizer and read-as-0 are this
// design's choices. in_val lags the pad by two clk cycles.
module gpio_port #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] enable,
  input  logic [W-1:0] dir_out,
  input  logic [W-1:0] out_val,
  input  logic [W-1:0] pad_i,
  output logic [W-1:0] pad_o,
  output logic [W-1:0] pad_oe,
  output logic [W-1:0] in_val
);
  logic [W-1:0] s1, s2;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) {s2, s1} <= '0;
    else        {s2, s1} <= {s1, pad_i};

  always_comb begin
    pad_oe = enable & dir_out;
    pad_o  = out_val & pad_oe;
    in_val = s2 & enable & ~dir_out;
  end
endmodule
