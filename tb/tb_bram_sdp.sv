// Testbench for bram_sdp: random writes and reads against a reference
// array; read data is checked one cycle after the address.
`timescale 1ns/1ps
module tb_bram_sdp;
  localparam int D = 512, W = 64;
  logic clk = 0, we;
  logic [8:0] waddr, raddr, raddr_q;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] ref_mem [D];
  logic [W-1:0] expect_q;
  logic         chk;
  int checks = 0, failures = 0;

  bram_sdp #(.DEPTH(D), .WIDTH(W)) dut (.*);

  always #2 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0; chk = 0;
    // fill every word first
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 9'(i); wdata = {$urandom, $urandom}; ref_mem[i] = wdata;
    end
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      if (chk) begin
        checks++;
        if (rdata !== expect_q) begin failures++; if (failures < 5) $display("addr %0d got %h want %h", raddr_q, rdata, expect_q); end
      end
      we = 1'($urandom); waddr = 9'($urandom); wdata = {$urandom, $urandom};
      raddr = 9'($urandom);
      if ($urandom % 4 == 0) raddr = waddr;
      expect_q = ref_mem[raddr];           // read-before-write
      raddr_q = raddr; chk = 1;
      if (we) ref_mem[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
