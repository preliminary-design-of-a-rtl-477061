// Testbench for spi_master (HALF_DIV = 4). Device models: each PLL shifts
// MOSI on rising SCLK and loads its word on the rising edge of its LE line;
// the DAC shifts on falling SCLK while SYNC is low and loads on the rising
// edge of SYNC. Random words are sent to random targets; each must arrive
// complete (24 bits) at the right device only, and busy must last exactly
// 50 half periods per frame.
`timescale 1ns/1ps
module tb_spi_master;
  localparam int HD = 4;
  logic clk = 0, rst_n = 0, start, busy, sclk, mosi, dac_sync_n;
  logic [1:0] target, pll_le;
  logic [23:0] data;
  int checks = 0, failures = 0;

  spi_master #(.WORD_BITS(24), .HALF_DIV(HD)) dut (.*);

  always #2 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic [31:0] sh_pll, sh_dac;
  int          nb_pll, nb_dac;
  logic [23:0] got [3];
  int          got_n [3];
  int          loads [3];
  initial begin sh_pll = 0; sh_dac = 0; nb_pll = 0; nb_dac = 0; loads = '{0, 0, 0}; end

  always @(posedge sclk) begin sh_pll = {sh_pll[30:0], mosi}; nb_pll++; end
  always @(negedge sclk) if (!dac_sync_n) begin sh_dac = {sh_dac[30:0], mosi}; nb_dac++; end
  always @(negedge dac_sync_n) nb_dac = 0;
  always @(posedge pll_le[0]) begin got[0] = sh_pll[23:0]; loads[0]++; end
  always @(posedge pll_le[1]) begin got[1] = sh_pll[23:0]; loads[1]++; end
  always @(posedge dac_sync_n) if (rst_n) begin got[2] = sh_dac[23:0]; got_n[2] = nb_dac; loads[2]++; end

  int busy_cycles;
  always @(posedge clk) if (busy) busy_cycles++;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%t %s", $time, msg); end
  endtask

  initial begin
    start = 0; target = 0; data = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    for (int k = 0; k < 30; k++) begin
      int t, prev_loads [3];
      t = (k < 3) ? k : int'($urandom % 3);
      prev_loads = loads;
      @(negedge clk);
      target = 2'(t); data = 24'($urandom); start = 1;
      busy_cycles = 0;
      @(negedge clk); start = 0;
      // a start while busy is ignored
      @(negedge clk); start = 1; target = 2'((t + 1) % 3); @(negedge clk); start = 0;
      wait (!busy);
      @(negedge clk);
      check(got[t] == data, $sformatf("target %0d got %h want %h", t, got[t], data));
      check(busy_cycles == 50 * HD, $sformatf("busy %0d cycles", busy_cycles));
      for (int j = 0; j < 3; j++)
        check(loads[j] == prev_loads[j] + (j == t), $sformatf("loads of %0d: %0d", j, loads[j]));
      if (t == 2) check(got_n[2] == 24, $sformatf("DAC saw %0d bits", got_n[2]));
      check(sclk == 0 && dac_sync_n == 1 && pll_le == 0, "idle levels");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
