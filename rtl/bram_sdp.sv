// Simple dual-port block RAM: one write port, one synchronous read port.
//
// Two of these per channel form the ping-pong pair that holds waveform
// records: the ping-pong logic writes one while the DMA engine reads the
// other. A write lands at the end of the cycle; rdata shows the word at
// raddr one cycle after raddr is presented (read-before-write if both
// ports name the same word). Contents are not reset. The size (512 x 64
// bits, one record of 301 words) is this design's choice.
module bram_sdp #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
