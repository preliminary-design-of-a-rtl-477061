// DMA engine: full ping-pong buffer -> processor memory over AXI3.
//
// When the ping-pong logic reports a full buffer (rd_avail) and the record
// ring in processor memory has a free slot, the engine copies the
// RECORD_BEATS 64-bit words of the buffer (header first) to
//   base + (wr_count mod N_SLOTS) * SLOT_BYTES
// through a 64-bit AXI3 write port, in INCR bursts of at most BURST beats.
// Bursts start on BURST*8-byte boundaries inside a 4 KiB-aligned slot, so
// none crosses a 4 KiB boundary. After the last write response it pulses
// rd_done (the buffer is free again) and increments wr_count. Software
// reports the records it has consumed through host_count; the engine waits
// while wr_count - host_count == N_SLOTS (ring full).
//
// Buffer reads have one cycle of latency; a two-entry queue in front of the
// W channel lets one beat go out per cycle while wready is high. Address and
// data of a burst are sent one after the other (AW, then its W beats), and
// all write responses are collected before the buffer is released.
// Error responses are counted in bresp_err.
//
// The block diagram of the readout shows one such DMA per channel, feeding
// S_AXI_HP0 and S_AXI_HP2; the ring, the slot size and the burst policy are
// this design's choice.
module logic_cdma
  import readout_pkg::*;
#(
  parameter int unsigned RECORD_BEATS = 301,
  parameter int unsigned SLOT_BYTES   = 4096,
  parameter int unsigned N_SLOTS      = 256,
  parameter int unsigned BURST        = 16,
  parameter int unsigned ADDR_W       = 9
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_avail,
  output logic              rd_done,
  output logic [ADDR_W-1:0] raddr,
  input  word_t             rdata,
  input  logic [31:0]       base,
  input  logic [31:0]       host_count,
  output logic [31:0]       wr_count,
  output logic [31:0]       bresp_err,
  output axi_w_req_t        axi_req,
  input  axi_w_rsp_t        axi_rsp
);

  localparam int unsigned NBURSTS = (RECORD_BEATS + BURST - 1) / BURST;
  localparam int unsigned SLOT_SH = $clog2(SLOT_BYTES);
  localparam int unsigned BW      = $clog2(NBURSTS + 1);

  typedef enum logic [1:0] {S_IDLE, S_AW, S_W, S_WAITB} state_t;
  state_t state;

  logic [ADDR_W-1:0] aw_beat;        // first beat of the current burst
  logic [4:0]        beat_in_burst;
  logic [4:0]        burst_len;      // beats in the current burst
  logic [BW-1:0]     b_pending;      // bursts sent, response not yet seen
  logic [BW-1:0]     aw_sent;
  logic [31:0]       slot_addr;
  logic              ring_full;
  logic [31:0]       awaddr;
  logic [3:0]        awlen;
  logic              awvalid;

  assign ring_full = (wr_count - host_count) >= 32'(N_SLOTS);
  assign slot_addr = base + ((wr_count % 32'(N_SLOTS)) << SLOT_SH);

  // ---------------- buffer fetch into a two-entry queue ----------------
  word_t             q_data [2];
  logic [1:0]        q_cnt;          // words held
  logic              q_rp, q_wp;
  logic              fetch, fetch_r; // fetch_r: rdata valid this cycle
  logic [ADDR_W-1:0] fetched;        // words requested in this record
  logic              wvalid, wlast, pop;

  assign raddr  = fetched;
  assign wvalid = (state == S_W) && (q_cnt != 2'd0);
  assign wlast  = (beat_in_burst == burst_len - 5'd1);
  assign pop    = wvalid && axi_rsp.wready;
  assign fetch  = (state != S_IDLE) && (fetched < ADDR_W'(RECORD_BEATS)) &&
                  ((q_cnt + 2'(fetch_r) - 2'(pop)) < 2'd2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fetch_r <= 1'b0;
      fetched <= '0;
      q_cnt   <= '0;
      q_rp    <= 1'b0;
      q_wp    <= 1'b0;
    end else begin
      fetch_r <= fetch;
      if (state == S_IDLE) fetched <= '0;
      else if (fetch)      fetched <= fetched + 1'b1;
      if (fetch_r) q_wp <= ~q_wp;
      if (pop)     q_rp <= ~q_rp;
      q_cnt <= q_cnt + 2'(fetch_r) - 2'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (fetch_r) q_data[q_wp] <= rdata;
  end

  // ---------------- AXI control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      aw_beat       <= '0;
      beat_in_burst <= '0;
      burst_len     <= '0;
      b_pending     <= '0;
      aw_sent       <= '0;
      wr_count      <= '0;
      bresp_err     <= '0;
      rd_done       <= 1'b0;
      awaddr        <= '0;
      awlen         <= '0;
      awvalid       <= 1'b0;
    end else begin
      rd_done <= 1'b0;
      if (axi_rsp.bvalid && axi_rsp.bresp != 2'b00) bresp_err <= bresp_err + 1'b1;
      b_pending <= b_pending + BW'(awvalid && axi_rsp.awready) - BW'(axi_rsp.bvalid);
      unique case (state)
        S_IDLE: begin
          aw_beat <= '0;
          aw_sent <= '0;
          if (rd_avail && !ring_full && !rd_done) state <= S_AW;
        end
        S_AW: begin
          if (!awvalid) begin
            awvalid <= 1'b1;
            awaddr  <= slot_addr + 32'(aw_beat) * 32'd8;
            if (32'(aw_beat) + 32'(BURST) <= 32'(RECORD_BEATS)) begin
              awlen     <= 4'(BURST - 1);
              burst_len <= 5'(BURST);
            end else begin
              awlen     <= 4'(32'(RECORD_BEATS) - 32'(aw_beat) - 32'd1);
              burst_len <= 5'(32'(RECORD_BEATS) - 32'(aw_beat));
            end
          end else if (axi_rsp.awready) begin
            awvalid       <= 1'b0;
            aw_sent       <= aw_sent + 1'b1;
            beat_in_burst <= '0;
            state         <= S_W;
          end
        end
        S_W: begin
          if (pop) begin
            beat_in_burst <= beat_in_burst + 1'b1;
            if (wlast) begin
              aw_beat <= aw_beat + ADDR_W'(burst_len);
              state   <= (aw_sent == BW'(NBURSTS)) ? S_WAITB : S_AW;
            end
          end
        end
        S_WAITB: begin
          if (b_pending == '0) begin
            rd_done  <= 1'b1;
            wr_count <= wr_count + 1'b1;
            state    <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    axi_req         = '0;
    axi_req.awaddr  = awaddr;
    axi_req.awlen   = awlen;
    axi_req.awsize  = 3'd3;       // 8 bytes per beat
    axi_req.awburst = 2'b01;      // INCR
    axi_req.awvalid = awvalid;
    axi_req.wdata   = q_data[q_rp];
    axi_req.wstrb   = 8'hFF;
    axi_req.wlast   = wlast;
    axi_req.wvalid  = wvalid;
    axi_req.bready  = 1'b1;
  end

endmodule
