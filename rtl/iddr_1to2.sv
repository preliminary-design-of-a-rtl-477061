// Input DDR capture, 1:2, for the lanes of one ADC.
//
// The ADC drives each of its lanes at double data rate: one sample bit on
// the rising edge of its data clock and the next sample's bit on the falling
// edge. This block catches each lane on both edges and hands both bits out
// together on the following rising edge, so the logic after it sees two
// samples per clock at half the sample rate (500 MHz for 1 GSPS). It
// behaves like a 7-series IDDR in SAME_EDGE_PIPELINED mode.
//
// Interface: d[N_LANES] in; q_rise is the bit caught on the rising edge
// (the earlier sample), q_fall the bit caught on the falling edge after it.
// Timing: a rising-edge bit appears on q_rise one full clock later, the
// falling-edge bit half a clock after its edge, both valid from the same
// rising edge.
//
// The 15 lanes and the 1:2 ratio follow the readout's block diagram; the
// edge-to-sample order is this design's choice.
module iddr_1to2 #(
  parameter int unsigned N_LANES = 15
) (
  input  logic               clk,
  input  logic [N_LANES-1:0] d,
  output logic [N_LANES-1:0] q_rise,
  output logic [N_LANES-1:0] q_fall
);

  logic [N_LANES-1:0] rise_r, fall_r;

  always_ff @(posedge clk) rise_r <= d;
  always_ff @(negedge clk) fall_r <= d;

  always_ff @(posedge clk) begin
    q_rise <= rise_r;
    q_fall <= fall_r;
  end

endmodule
