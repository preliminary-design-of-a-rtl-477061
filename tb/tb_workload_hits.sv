// Source-run testbench for readout_top at its default sizes: three runs in
// the manner of an alpha source, a beta source and a shielded background
// measurement, each a stream of randomly timed hits on channel 0 (with the
// trigger link on, so channel 1 records each hit too).
//
// Pulse models (this testbench's own, shaped after typical phoswich
// waveforms): a beta hit is one fast pulse; an alpha hit is a train of 3-6
// pulses spread over about 700 ns (slow ZnS:Ag light); background hits are
// beta-like with smaller amplitude and a lower rate. Hits are spaced at
// least 1.6 us apart so none falls inside a record still being written;
// then every hit must end as either a record or a lost trigger. For each
// record, the software model subtracts the mean of the pre-trigger samples
// and integrates the record (1200 samples), as the off-line analysis does;
// alpha records must integrate far above beta ones.
`timescale 1ns/1ps
module tb_workload_hits;
  import readout_pkg::*;

  localparam int RW = 300, PRE = 50, BASELINE = 2000, THR = 2400;
  localparam int HITS_PER_RUN = 150;

  logic clk = 0, rst_n = 0;
  logic [1:0] adc_clk = 2'b00;
  logic [N_LANES-1:0] adc_lanes [2];
  axil_req_t axil_req;
  axil_rsp_t axil_rsp;
  axi_w_req_t hp_req [2];
  axi_w_rsp_t hp_rsp [2];
  logic spi_sclk, spi_mosi, dac_sync_n, irq;
  logic [1:0] pll_le;
  int checks = 0, failures = 0;
  int mem_err [2], beats [2], chk_err [2];

  readout_top dut (
    .clk(clk), .rst_n(rst_n), .adc_clk(adc_clk), .adc_lanes(adc_lanes),
    .s_axil_req(axil_req), .s_axil_rsp(axil_rsp), .hp_req(hp_req), .hp_rsp(hp_rsp),
    .spi_sclk(spi_sclk), .spi_mosi(spi_mosi), .pll_le(pll_le), .dac_sync_n(dac_sync_n), .irq(irq));

  for (genvar c = 0; c < 2; c++) begin : g_mem
    axi_mem_model #(.STALL_PCT(10)) u_mem (.clk(clk), .rst_n(rst_n), .req(hp_req[c]), .rsp(hp_rsp[c]),
      .errors(mem_err[c]), .beats(beats[c]));
  end

  always #2 clk = ~clk;
  always #1 adc_clk[0] = ~adc_clk[0];
  initial begin #0.3; forever #1 adc_clk[1] = ~adc_clk[1]; end

  initial begin
    #20ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("%t FAIL %s", $time, msg); end
  endtask

  // ---------------- ADC model: sum of recent pulses ----------------
  typedef struct { longint t0; real amp; } pulse_t;
  pulse_t active [$];
  longint nsamp [2] = '{0, 0};

  function automatic int waveform(longint n);
    real v;
    v = BASELINE + int'($urandom % 41) - 20;
    foreach (active[i]) begin
      longint d = n - active[i].t0;
      if (d >= 0 && d < 3)        v += active[i].amp * (d + 1) / 3.0;
      else if (d >= 3 && d < 200) v += active[i].amp * $exp(-(d - 2) / 8.0);
    end
    return int'(v);
  endfunction

  for (genvar c = 0; c < 2; c++) begin : g_adc
    initial begin
      adc_lanes[c] = '0;
      forever begin
        @(adc_clk[c]);
        #0.25;
        adc_lanes[c] = {1'b0, 14'(waveform(nsamp[c]))};
        nsamp[c]++;
        if (c == 0) while (active.size() > 0 && nsamp[0] - active[0].t0 > 400) void'(active.pop_front());
      end
    end
  end

  // kind: 0 beta, 1 alpha, 2 background
  task automatic hit(int kind);
    longint t = nsamp[0] + 5;
    if (kind == 1) begin
      int np = 3 + int'($urandom % 4);
      active.push_back('{t, 2500.0 + ($urandom % 1000)});
      for (int i = 1; i < np; i++)
        active.push_back('{t + 40 + longint'($urandom % 660), 900.0 + ($urandom % 1200)});
      active.sort() with (item.t0);
    end else begin
      active.push_back('{t, (kind == 0 ? 1500.0 : 700.0) + ($urandom % 800)});
    end
  endtask

  // ---------------- software model ----------------
  task automatic axil_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    axil_req.awaddr = a; axil_req.awvalid = 1; axil_req.wdata = d; axil_req.wvalid = 1;
    do @(posedge clk); while (!axil_rsp.awready);
    #0.1 axil_req.awvalid = 0; axil_req.wvalid = 0; axil_req.bready = 1;
    do @(posedge clk); while (!axil_rsp.bvalid);
    #0.1 axil_req.bready = 0;
  endtask

  task automatic axil_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    axil_req.araddr = a; axil_req.arvalid = 1;
    do @(posedge clk); while (!axil_rsp.arready);
    #0.1 axil_req.arvalid = 0; axil_req.rready = 1;
    do @(posedge clk); while (!axil_rsp.rvalid);
    d = axil_rsp.rdata;
    #0.1 axil_req.rready = 0;
  endtask

  localparam logic [31:0] BASE [2] = '{32'h1000_0000, 32'h2000_0000};
  logic [31:0] host [2] = '{0, 0};
  int n_rec [2] = '{0, 0};
  real integ_sum [3] = '{0.0, 0.0, 0.0};
  real integ_min [3] = '{1e18, 1e18, 1e18};
  real integ_max [3] = '{0.0, 0.0, 0.0};
  int  integ_n [3] = '{0, 0, 0};

  function automatic logic [63:0] mem_rd(int c, logic [31:0] a);
    return (c == 0) ? g_mem[0].u_mem.read64(a) : g_mem[1].u_mem.read64(a);
  endfunction

  task automatic collect(int kind);
    logic [31:0] w;
    for (int c = 0; c < 2; c++) begin
      axil_read(c == 0 ? REG_WCNT0 : REG_WCNT1, w);
      while (host[c] != w) begin
        logic [31:0] a0;
        header_t h;
        real base_avg, integ;
        logic [13:0] s [RW*4];
        a0 = BASE[c] + 32'((host[c] % 256) * 4096);
        h = header_t'(mem_rd(c, a0));
        for (int k = 0; k < RW; k++) begin
          logic [63:0] d = mem_rd(c, a0 + 32'((k + 1) * 8));
          for (int i = 0; i < 4; i++) s[k*4 + i] = d[i*16 +: 14];
        end
        check(h.seq == 8'(host[c]) && h.channel == 1'(c), $sformatf("ch%0d header seq %0d", c, h.seq));
        check(h.from_partner == 1'(c), $sformatf("ch%0d partner flag", c));
        if (c == 0) begin
          int pos = PRE*4 + int'(h.trig_pos);
          check(s[pos] > 14'(THR) && s[pos-1] <= 14'(THR), $sformatf("rec %0d: no crossing at %0d", host[c], pos));
        end
        base_avg = 0.0;
        for (int i = 0; i < 150; i++) base_avg += s[i];
        base_avg /= 150.0;
        integ = 0.0;
        for (int i = 0; i < RW*4; i++) integ += s[i] - base_avg;
        if (c == 0) begin
          integ_sum[kind] += integ; integ_n[kind]++;
          if (integ < integ_min[kind]) integ_min[kind] = integ;
          if (integ > integ_max[kind]) integ_max[kind] = integ;
        end
        host[c]++;
        n_rec[c]++;
        axil_write(c == 0 ? REG_HOST0 : REG_HOST1, host[c]);
      end
    end
  endtask

  string run_name [3] = '{"beta (Sr/Y-90-like)", "alpha (Am-241-like)", "background"};
  logic [31:0] rd;
  initial begin
    axil_req = '0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    axil_write(REG_BASE0, BASE[0]);
    axil_write(REG_BASE1, BASE[1]);
    axil_write(REG_THR0, THR);
    axil_write(REG_THR1, 14'h3FFF);          // channel 1 only follows the link
    axil_write(REG_CTRL, 32'b00111);
    #1us;
    for (int run = 0; run < 3; run++) begin
      int rec0, lost0;
      logic [31:0] lost_before;
      axil_read(REG_LOST0, lost_before);
      rec0 = n_rec[0];
      for (int k = 0; k < HITS_PER_RUN; k++) begin
        hit(run == 0 ? 0 : run == 1 ? 1 : 2);
        #((1600 + ($urandom % (run == 2 ? 8000 : 3000))) * 1ns);
        if (k % 4 == 3) collect(run);
      end
      #3us;
      collect(run);
      axil_read(REG_LOST0, rd);
      lost0 = int'(rd - lost_before);
      check(n_rec[0] - rec0 + lost0 == HITS_PER_RUN,
            $sformatf("%s: %0d records + %0d lost != %0d hits", run_name[run], n_rec[0] - rec0, lost0, HITS_PER_RUN));
      check(n_rec[1] == n_rec[0], $sformatf("linked channel recorded %0d of %0d", n_rec[1], n_rec[0]));
      $display("%s: %0d hits, %0d records, %0d lost, integral mean %0.0f min %0.0f max %0.0f", run_name[run],
               HITS_PER_RUN, n_rec[0] - rec0, lost0, integ_sum[run] / integ_n[run], integ_min[run], integ_max[run]);
    end
    check(integ_min[1] > integ_max[0] && integ_min[1] > integ_max[2], "alpha integrals overlap beta ones");
    check(mem_err[0] + mem_err[1] == 0, "AXI errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
