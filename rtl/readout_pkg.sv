// Shared constants and bus types of the two-channel FADC readout logic.
//
// The numbers that come from the readout system itself are the 14-bit
// sample, the 15 DDR lanes per ADC and the 1.2 us record (1200 samples at
// 1 GSPS). Everything else here (16-bit sample slots, 64-bit words of four
// samples, the record header, the AXI widths of the processor's
// high-performance ports) is a choice of this implementation.
package readout_pkg;

  localparam int unsigned ADC_BITS         = 14;  // vertical resolution
  localparam int unsigned N_LANES          = 15;  // DDR lanes per ADC
  localparam int unsigned SAMPLE_W         = 16;  // storage slot per sample
  localparam int unsigned SAMPLES_PER_WORD = 4;   // after the 1:2 FIFO
  localparam int unsigned WORD_W           = SAMPLE_W * SAMPLES_PER_WORD;
  localparam int unsigned TS_W             = 48;  // header timestamp

  // One stored sample: bit 14 carries the ADC's 15th lane, bit 15 is zero.
  typedef logic [WORD_W-1:0] word_t;

  // Record header, written at word 0 of every record.
  typedef struct packed {
    logic [7:0]      seq;           // record number of this channel, mod 256
    logic            channel;       // 0 or 1
    logic            from_partner;  // started by the other channel's trigger
    logic [1:0]      trig_pos;      // sample of the crossing in its word
    logic [3:0]      zero;
    logic [TS_W-1:0] timestamp;     // logic-clock ticks at the trigger word
  } header_t;

  // AXI3 write channels of a 64-bit high-performance port (master side).
  typedef struct packed {
    logic [31:0] awaddr;
    logic [3:0]  awlen;
    logic [2:0]  awsize;
    logic [1:0]  awburst;
    logic        awvalid;
    logic [63:0] wdata;
    logic [7:0]  wstrb;
    logic        wlast;
    logic        wvalid;
    logic        bready;
  } axi_w_req_t;

  typedef struct packed {
    logic       awready;
    logic       wready;
    logic [1:0] bresp;
    logic       bvalid;
  } axi_w_rsp_t;

  // AXI4-Lite register port (slave side).
  typedef struct packed {
    logic [7:0]  awaddr;
    logic        awvalid;
    logic [31:0] wdata;
    logic        wvalid;
    logic        bready;
    logic [7:0]  araddr;
    logic        arvalid;
    logic        rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic [1:0]  bresp;
    logic        bvalid;
    logic        arready;
    logic [31:0] rdata;
    logic [1:0]  rresp;
    logic        rvalid;
  } axil_rsp_t;

  // Register map of the control bank (byte addresses).
  localparam logic [7:0] REG_CTRL      = 8'h00; // [0] run ch0 [1] run ch1 [2] link triggers [3] neg ch0 [4] neg ch1
  localparam logic [7:0] REG_THR0      = 8'h04;
  localparam logic [7:0] REG_THR1      = 8'h08;
  localparam logic [7:0] REG_BASE0     = 8'h0C;
  localparam logic [7:0] REG_BASE1     = 8'h10;
  localparam logic [7:0] REG_HOST0     = 8'h14; // records consumed by software
  localparam logic [7:0] REG_HOST1     = 8'h18;
  localparam logic [7:0] REG_WCNT0     = 8'h1C; // records in memory (read only)
  localparam logic [7:0] REG_WCNT1     = 8'h20;
  localparam logic [7:0] REG_LOST0     = 8'h24; // triggers lost, both buffers full
  localparam logic [7:0] REG_LOST1     = 8'h28;
  localparam logic [7:0] REG_SPI       = 8'h2C; // write: [25:24] target [23:0] word
  localparam logic [7:0] REG_STATUS    = 8'h30; // [0] spi busy [1] fifo0 ovf [2] fifo1 ovf
  localparam logic [7:0] REG_REC0      = 8'h34; // records written to the buffers
  localparam logic [7:0] REG_REC1      = 8'h38;
  localparam logic [7:0] REG_BERR      = 8'h3C; // [15:0] ch0, [31:16] ch1 AXI error responses

endpackage
