// Testbench for fifo_1to2: writes a counting sequence at 500 MHz and reads
// at 250 MHz (slightly faster clock for margin); every read word must be
// the next pair {2k+1, 2k} in order, with no overflow. Then the read clock
// is stopped until the FIFO overflows, which must set the sticky flag, and
// the words read after restart must still be in order.
`timescale 1ns/1ps
module tb_fifo_1to2;
  localparam int W = 30;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0, rgate = 1;
  logic [W-1:0]   wdata;
  logic           wen, overflow, rvalid;
  logic [2*W-1:0] rdata;
  int checks = 0, failures = 0, nread = 0;
  logic [W-1:0] expect_lo;
  logic           in_order_check = 1;

  fifo_1to2 #(.IN_W(W), .DEPTH(16)) dut (
    .wclk(wclk), .wrst_n(wrst_n), .wdata(wdata), .wen(wen), .overflow(overflow),
    .rclk(rclk), .rrst_n(rrst_n), .rdata(rdata), .rvalid(rvalid));

  always #1 wclk = ~wclk;
  always #1.95 if (rgate) rclk = ~rclk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge wclk or negedge wrst_n)
    if (!wrst_n) wdata <= '0;
    else if (wen) wdata <= wdata + 1'b1;

  always @(posedge rclk) begin
    if (rvalid) begin
      nread++;
      if (in_order_check) begin
        checks++;
        if (rdata[W-1:0] !== expect_lo || rdata[2*W-1:W] !== expect_lo + 1'b1) begin
          failures++;
          if (failures < 5) $display("read %0d: %h want lo %h", nread, rdata, expect_lo);
        end
      end
      expect_lo = rdata[W-1:0] + 2;
    end
  end

  initial begin
    wen = 0; expect_lo = '0;
    #10 wrst_n = 1; rrst_n = 1;
    @(posedge wclk); #0.1 wen = 1;
    #8000;
    checks++; if (overflow) begin failures++; $display("unexpected overflow"); end
    checks++; if (nread < 1900) begin failures++; $display("too few reads %0d", nread); end
    // stop the reader: the FIFO must overflow
    in_order_check = 0;
    rgate = 0;
    #200;
    checks++; if (!overflow) begin failures++; $display("no overflow flagged"); end
    rgate = 1;
    #400;
    in_order_check = 1;     // expect_lo now follows the stream again
    nread = 0;
    #2000;
    checks++; if (nread < 400) begin failures++; $display("reads stopped after overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
