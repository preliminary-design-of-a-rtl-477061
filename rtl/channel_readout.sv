// Readout chain of one ADC channel, from its DDR lanes to processor memory:
//   IDDR 1:2 -> FIFO 1:2 (ADC clock -> logic clock) -> trigger ->
//   ping-pong logic -> BRAM pair -> DMA engine -> AXI3 port.
//
// Lanes 13:0 of the ADC are the sample bits and lane 14 a flag bit that is
// stored with each sample (bit 14 of its 16-bit slot). The IDDR gives two
// samples per ADC clock, the FIFO joins two such pairs into one word of
// four samples per logic clock, earliest sample in bits 15:0.
//
// local_hit/partner_hit link the triggers of the two channels (see
// trigger). Timing from a sample on the lanes to the trigger decision is
// a few ADC clocks plus the FIFO's crossing (about 5 logic clocks); records
// are then written and copied as described in pingpong_buffer and
// logic_cdma.
//
// The chain and its order follow the readout's block diagram; the lane use
// and all widths are this design's choice.
module channel_readout
  import readout_pkg::*;
#(
  parameter bit          CHANNEL      = 1'b0,
  parameter int unsigned RECORD_WORDS = 300,
  parameter int unsigned PRE_WORDS    = 50,
  parameter int unsigned N_SLOTS      = 256
) (
  input  logic                adc_clk,
  input  logic [N_LANES-1:0]  adc_lanes,
  input  logic                clk,
  input  logic                rst_n,
  input  logic                run,
  input  logic [ADC_BITS-1:0] threshold,
  input  logic                negative,
  input  logic                link,
  input  logic                partner_hit,
  output logic                local_hit,
  input  logic [TS_W-1:0]     timestamp,
  input  logic [31:0]         base,
  input  logic [31:0]         host_count,
  output logic [31:0]         wr_count,
  output logic [31:0]         lost,
  output logic [31:0]         records,
  output logic [31:0]         bresp_err,
  output logic                fifo_overflow,   // ADC clock domain, sticky
  output axi_w_req_t          axi_req,
  input  axi_w_rsp_t          axi_rsp
);

  localparam int unsigned ADDR_W = $clog2(RECORD_WORDS + 1);

  // ---------------- ADC clock domain ----------------
  logic               adc_rst_n;
  logic [N_LANES-1:0] q_rise, q_fall;

  rst_sync u_adc_rst (.clk(adc_clk), .rst_n(rst_n), .rst_n_out(adc_rst_n));

  iddr_1to2 #(.N_LANES(N_LANES)) u_iddr (
    .clk(adc_clk), .d(adc_lanes), .q_rise(q_rise), .q_fall(q_fall));

  logic [4*N_LANES-1:0] fifo_q;
  logic                 fifo_v;

  fifo_1to2 #(.IN_W(2*N_LANES), .DEPTH(16)) u_fifo (
    .wclk(adc_clk), .wrst_n(adc_rst_n), .wdata({q_fall, q_rise}), .wen(1'b1),
    .overflow(fifo_overflow),
    .rclk(clk), .rrst_n(rst_n), .rdata(fifo_q), .rvalid(fifo_v));

  // ---------------- logic clock domain ----------------
  word_t samples;
  always_comb begin
    for (int i = 0; i < SAMPLES_PER_WORD; i++)
      samples[i*SAMPLE_W +: SAMPLE_W] = {1'b0, fifo_q[i*N_LANES +: N_LANES]};
  end

  word_t      t_word;
  logic       t_valid, t_trig, t_partner;
  logic [1:0] t_pos;

  trigger u_trig (
    .clk(clk), .rst_n(rst_n), .in_word(samples), .in_valid(fifo_v),
    .threshold(threshold), .negative(negative), .share(link),
    .partner_hit(partner_hit), .local_hit(local_hit),
    .out_word(t_word), .out_valid(t_valid), .trig(t_trig),
    .trig_pos(t_pos), .trig_from_partner(t_partner));

  logic [1:0]        we;
  logic [ADDR_W-1:0] waddr, raddr;
  word_t             wdata, rdata0, rdata1;
  logic              rd_avail, rd_sel, rd_done;

  pingpong_buffer #(
    .RECORD_WORDS(RECORD_WORDS), .PRE_WORDS(PRE_WORDS),
    .DL_DEPTH(2 ** $clog2(PRE_WORDS + 1)), .ADDR_W(ADDR_W)
  ) u_pp (
    .clk(clk), .rst_n(rst_n), .enable(run), .channel(CHANNEL),
    .in_word(t_word), .in_valid(t_valid), .trig(t_trig), .trig_pos(t_pos),
    .trig_from_partner(t_partner), .timestamp(timestamp),
    .we(we), .waddr(waddr), .wdata(wdata),
    .rd_avail(rd_avail), .rd_sel(rd_sel), .rd_done(rd_done),
    .lost(lost), .records(records));

  bram_sdp #(.DEPTH(2 ** ADDR_W), .WIDTH(WORD_W)) u_bram1 (
    .clk(clk), .we(we[0]), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata0));
  bram_sdp #(.DEPTH(2 ** ADDR_W), .WIDTH(WORD_W)) u_bram2 (
    .clk(clk), .we(we[1]), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata1));

  logic_cdma #(
    .RECORD_BEATS(RECORD_WORDS + 1), .SLOT_BYTES(4096), .N_SLOTS(N_SLOTS),
    .BURST(16), .ADDR_W(ADDR_W)
  ) u_dma (
    .clk(clk), .rst_n(rst_n), .rd_avail(rd_avail), .rd_done(rd_done),
    .raddr(raddr), .rdata(rd_sel ? rdata1 : rdata0),
    .base(base), .host_count(host_count), .wr_count(wr_count), .bresp_err(bresp_err),
    .axi_req(axi_req), .axi_rsp(axi_rsp));

endmodule
