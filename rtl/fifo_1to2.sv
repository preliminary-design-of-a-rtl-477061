// Dual-clock FIFO with a 1:2 width ratio.
//
// Sits between the IDDR of one ADC and its trigger. The write side runs on
// the ADC data clock and takes IN_W bits (two samples) per enabled cycle;
// pairs of writes are joined into one 2*IN_W-bit entry, the first write in
// the low half. The read side runs on the logic clock and pops an entry
// every cycle one is present, so rvalid/rdata form a stream of four-sample
// words at half the write rate (2 x 500 MHz = 4 x 250 MHz).
//
// The clock crossing uses Gray-coded pointers, each passed through two
// flip-flops in the other domain. Empty is seen on the read side at most
// three read clocks after a write; full is seen on the write side
// conservatively. A write that finds the FIFO full is dropped and sets the
// sticky overflow flag (write domain).
//
// The 1:2 ratio follows the block diagram of the readout; the depth, the
// pointer scheme and the always-pop read side are this design's choice.
module fifo_1to2 #(
  parameter int unsigned IN_W   = 30,
  parameter int unsigned DEPTH  = 16     // entries of 2*IN_W bits, power of 2
) (
  input  logic              wclk,
  input  logic              wrst_n,
  input  logic [IN_W-1:0]   wdata,
  input  logic              wen,
  output logic              overflow,

  input  logic              rclk,
  input  logic              rrst_n,
  output logic [2*IN_W-1:0] rdata,
  output logic              rvalid
);

  localparam int unsigned AW = $clog2(DEPTH);
  typedef logic [AW:0] ptr_t;

  function automatic ptr_t bin2gray(ptr_t b);
    return b ^ (b >> 1);
  endfunction

  logic [2*IN_W-1:0] mem [DEPTH];

  // ---------------- write domain ----------------
  logic            half;
  logic [IN_W-1:0] low_r;
  ptr_t            wbin, wgray, rgray_w1, rgray_w2;
  ptr_t            rbin, rgray, wgray_r1, wgray_r2;
  logic            empty;
  logic            full;

  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      half     <= 1'b0;
      low_r    <= '0;
      wbin     <= '0;
      wgray    <= '0;
      overflow <= 1'b0;
    end else if (wen) begin
      half <= ~half;
      if (!half) begin
        low_r <= wdata;
      end else if (full) begin
        overflow <= 1'b1;
      end else begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  always_ff @(posedge wclk) begin
    if (wen && half && !full) mem[wbin[AW-1:0]] <= {wdata, low_r};
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  // ---------------- read domain ----------------

  assign empty = (rgray == wgray_r2);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin   <= '0;
      rgray  <= '0;
      rvalid <= 1'b0;
    end else begin
      rvalid <= !empty;
      if (!empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

  always_ff @(posedge rclk) begin
    if (!empty) rdata <= mem[rbin[AW-1:0]];
  end

endmodule
