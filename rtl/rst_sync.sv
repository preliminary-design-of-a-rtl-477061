// Reset synchroniser: asynchronous assertion, release on the second rising
// edge of `clk` after rst_n goes high. Used for the ADC clock domains,
// whose clocks are independent of the logic clock.
module rst_sync (
  input  logic clk,
  input  logic rst_n,
  output logic rst_n_out
);
  logic meta;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {rst_n_out, meta} <= 2'b00;
    else        {rst_n_out, meta} <= {meta, 1'b1};
  end
endmodule
