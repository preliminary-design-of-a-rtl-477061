// Programmable-logic readout of a two-channel 1 GSPS, 14-bit FADC board.
//
// Two identical chains (channel_readout) take the DDR lanes of the two
// ADCs, trigger on threshold crossings, keep 1200-sample records in a
// ping-pong pair of block RAMs per channel and copy each record into a
// ring in processor memory, channel 0 through one AXI3 port (S_AXI_HP0 on
// the processor side), channel 1 through another (S_AXI_HP2). The triggers
// of the two channels can be linked so that a crossing on either records
// both. One SPI master writes the two clock-synthesiser PLLs and the DAC.
// Software drives everything through the AXI4-Lite register bank
// (reg_bank, map in readout_pkg) and learns of new records from irq or the
// record counters.
//
// Clocks: adc_clk[i] is ADC i's data clock (half the sample rate); clk is
// the logic clock (a quarter of the sample rate, 250 MHz), which also
// clocks the register port and both AXI3 ports. rst_n is asynchronous,
// active low; each ADC domain gets a synchronised copy. A 48-bit counter
// on clk stamps each record.
//
// The chains, the per-channel BRAM pair and DMA, the link between the
// triggers and the SPI configuration follow the readout's block diagram
// and description; the register bank, the memory ring, the record format
// and the single logic clock are this design's choice.
module readout_top
  import readout_pkg::*;
#(
  parameter int unsigned RECORD_WORDS = 300,  // 1200 samples = 1.2 us
  parameter int unsigned PRE_WORDS    = 50,   // 200 samples before the trigger
  parameter int unsigned N_SLOTS      = 256   // records per channel ring
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [1:0]          adc_clk,
  input  logic [N_LANES-1:0]  adc_lanes [2],
  input  axil_req_t           s_axil_req,
  output axil_rsp_t           s_axil_rsp,
  output axi_w_req_t          hp_req [2],
  input  axi_w_rsp_t          hp_rsp [2],
  output logic                spi_sclk,
  output logic                spi_mosi,
  output logic [1:0]          pll_le,
  output logic                dac_sync_n,
  output logic                irq
);

  logic [1:0]          run, negative, hit, ovf, ovf_m, ovf_s;
  logic                link;
  logic [ADC_BITS-1:0] thr [2];
  logic [31:0]         base [2], host_count [2], wr_count [2], lost [2];
  logic [31:0]         records [2], bresp_err [2];
  logic                spi_start, spi_busy;
  logic [1:0]          spi_target;
  logic [23:0]         spi_data;
  logic [TS_W-1:0]     timestamp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) timestamp <= '0;
    else        timestamp <= timestamp + 1'b1;
  end

  // FIFO overflow flags come from the ADC clock domains
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {ovf_s, ovf_m} <= '0;
    else        {ovf_s, ovf_m} <= {ovf_m, ovf};
  end

  reg_bank u_regs (
    .clk(clk), .rst_n(rst_n), .axil_req(s_axil_req), .axil_rsp(s_axil_rsp),
    .run(run), .link(link), .negative(negative), .thr(thr), .base(base),
    .host_count(host_count), .spi_start(spi_start), .spi_target(spi_target),
    .spi_data(spi_data), .wr_count(wr_count), .lost(lost),
    .records(records), .bresp_err(bresp_err),
    .spi_busy(spi_busy), .fifo_overflow(ovf_s));

  for (genvar c = 0; c < 2; c++) begin : g_ch
    channel_readout #(
      .CHANNEL(c[0]), .RECORD_WORDS(RECORD_WORDS), .PRE_WORDS(PRE_WORDS), .N_SLOTS(N_SLOTS)
    ) u_ch (
      .adc_clk(adc_clk[c]), .adc_lanes(adc_lanes[c]), .clk(clk), .rst_n(rst_n),
      .run(run[c]), .threshold(thr[c]), .negative(negative[c]), .link(link),
      .partner_hit(hit[1-c]), .local_hit(hit[c]), .timestamp(timestamp),
      .base(base[c]), .host_count(host_count[c]), .wr_count(wr_count[c]),
      .lost(lost[c]), .records(records[c]), .bresp_err(bresp_err[c]),
      .fifo_overflow(ovf[c]), .axi_req(hp_req[c]), .axi_rsp(hp_rsp[c]));
  end

  spi_master #(.WORD_BITS(24), .HALF_DIV(8)) u_spi (
    .clk(clk), .rst_n(rst_n), .start(spi_start), .target(spi_target), .data(spi_data),
    .busy(spi_busy), .sclk(spi_sclk), .mosi(spi_mosi), .pll_le(pll_le),
    .dac_sync_n(dac_sync_n));

  assign irq = (wr_count[0] != host_count[0]) || (wr_count[1] != host_count[1]);

endmodule
