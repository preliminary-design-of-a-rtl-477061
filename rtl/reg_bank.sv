// Control and status registers of the readout, on an AXI4-Lite slave port
// driven by the processor. The map is in readout_pkg (REG_*).
//
// A write is taken when address and data are both valid and no response
// is pending (awready = wready = 1 for that one cycle); the response
// follows one cycle later. A read returns its data one cycle after the
// address. Writing REG_SPI issues a one-cycle spi_start with the 24-bit
// word and the target in bits 25:24 (the word is dropped if the SPI master
// is busy; software polls REG_STATUS bit 0). Unknown addresses read 0 and
// ignore writes; all responses are OKAY.
//
// The register bank and its map are this design's choice: the readout's
// description only says that software on the processor runs the system.
module reg_bank
  import readout_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   axil_req,
  output axil_rsp_t   axil_rsp,
  // control
  output logic [1:0]  run,
  output logic        link,
  output logic [1:0]  negative,
  output logic [ADC_BITS-1:0] thr [2],
  output logic [31:0] base [2],
  output logic [31:0] host_count [2],
  output logic        spi_start,
  output logic [1:0]  spi_target,
  output logic [23:0] spi_data,
  // status
  input  logic [31:0] wr_count [2],
  input  logic [31:0] lost [2],
  input  logic [31:0] records [2],
  input  logic [31:0] bresp_err [2],
  input  logic        spi_busy,
  input  logic [1:0]  fifo_overflow
);

  logic        wr_go, rd_go, bvalid, rvalid;
  logic [31:0] rdata;
  assign wr_go = axil_req.awvalid && axil_req.wvalid && !bvalid;
  assign rd_go = axil_req.arvalid && !rvalid;

  always_comb begin
    axil_rsp.bvalid  = bvalid;
    axil_rsp.rvalid  = rvalid;
    axil_rsp.rdata   = rdata;
    axil_rsp.awready = wr_go;
    axil_rsp.wready  = wr_go;
    axil_rsp.arready = rd_go;
    axil_rsp.bresp   = 2'b00;
    axil_rsp.rresp   = 2'b00;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid <= 1'b0;
      rvalid <= 1'b0;
      rdata <= '0;
      run        <= '0;
      link       <= 1'b0;
      negative   <= '0;
      thr        <= '{default: '0};
      base       <= '{default: '0};
      host_count <= '{default: '0};
      spi_start  <= 1'b0;
      spi_target <= '0;
      spi_data   <= '0;
    end else begin
      spi_start <= 1'b0;
      if (bvalid && axil_req.bready) bvalid <= 1'b0;
      if (rvalid && axil_req.rready) rvalid <= 1'b0;
      if (wr_go) begin
        bvalid <= 1'b1;
        unique case (axil_req.awaddr)
          REG_CTRL: begin
            run      <= axil_req.wdata[1:0];
            link     <= axil_req.wdata[2];
            negative <= axil_req.wdata[4:3];
          end
          REG_THR0:  thr[0]        <= axil_req.wdata[ADC_BITS-1:0];
          REG_THR1:  thr[1]        <= axil_req.wdata[ADC_BITS-1:0];
          REG_BASE0: base[0]       <= axil_req.wdata;
          REG_BASE1: base[1]       <= axil_req.wdata;
          REG_HOST0: host_count[0] <= axil_req.wdata;
          REG_HOST1: host_count[1] <= axil_req.wdata;
          REG_SPI: begin
            spi_start  <= !spi_busy;
            spi_target <= axil_req.wdata[25:24];
            spi_data   <= axil_req.wdata[23:0];
          end
          default: ;
        endcase
      end
      if (rd_go) begin
        rvalid <= 1'b1;
        unique case (axil_req.araddr)
          REG_CTRL:   rdata <= {27'd0, negative, link, run};
          REG_THR0:   rdata <= 32'(thr[0]);
          REG_THR1:   rdata <= 32'(thr[1]);
          REG_BASE0:  rdata <= base[0];
          REG_BASE1:  rdata <= base[1];
          REG_HOST0:  rdata <= host_count[0];
          REG_HOST1:  rdata <= host_count[1];
          REG_WCNT0:  rdata <= wr_count[0];
          REG_WCNT1:  rdata <= wr_count[1];
          REG_LOST0:  rdata <= lost[0];
          REG_LOST1:  rdata <= lost[1];
          REG_SPI:    rdata <= {6'd0, spi_target, spi_data};
          REG_STATUS: rdata <= {29'd0, fifo_overflow, spi_busy};
          REG_REC0:   rdata <= records[0];
          REG_REC1:   rdata <= records[1];
          REG_BERR:   rdata <= {bresp_err[1][15:0], bresp_err[0][15:0]};
          default:    rdata <= '0;
        endcase
      end
    end
  end

endmodule
