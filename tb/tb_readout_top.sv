// End-to-end testbench of readout_top at its default sizes (1200-sample
// records, 200 pre-trigger samples, 256-slot rings).
//
// Two ADC models produce a noisy baseline with programmed pulses and drive
// the 15 DDR lanes on both edges of their 500 MHz data clocks; every sample
// is logged. Two memory models take the AXI3 writes of the two DMA
// engines, and a software model configures and polls the logic through the
// AXI4-Lite register port. Each record found in memory is checked against
// the logged samples (1200 consecutive samples, the crossing at the
// header's position in the trigger word, 200 samples before it) and its
// header. Scenario: SPI writes to both PLLs and the DAC; one pulse on each
// channel with the trigger link off; a pulse on channel 0 only with the
// link on (both channels must record, channel 1 flagged as partner
// triggered); then a burst of closely spaced pulses that outruns the DMA
// engine so both ping-pong buffers fill and triggers are lost; a negative
// pulse with channel 1 set to negative polarity (a positive one must not
// trigger it); finally software stops consuming, so the 256-slot ring in
// memory fills, the DMA must stall and further triggers are lost, until
// software drains the ring.
`timescale 1ns/1ps
module tb_readout_top;
  import readout_pkg::*;

  localparam int RW = 300, PRE = 50;
  localparam int BASELINE = 2000, THR = 2600, THR_NEG = 1400;

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
    axi_mem_model #(.STALL_PCT(35)) u_mem (.clk(clk), .rst_n(rst_n), .req(hp_req[c]), .rsp(hp_rsp[c]),
      .errors(mem_err[c]), .beats(beats[c]));
    axi_w_checker u_chk (.clk(clk), .rst_n(rst_n), .req(hp_req[c]), .rsp(hp_rsp[c]), .errors(chk_err[c]));
  end

  always #2 clk = ~clk;                   // 250 MHz logic clock
  always #1 adc_clk[0] = ~adc_clk[0];     // 500 MHz, DDR -> 1 GSPS
  initial begin #0.3; forever #1 adc_clk[1] = ~adc_clk[1]; end

  initial begin
    #2ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("%t FAIL(%0d) %s", $time, failures, msg); end
  endtask

  // ---------------- ADC models ----------------
  logic [15:0] slog [2][$];     // every sample driven, as stored: {0, flag, code}
  longint pulses [2][$];        // start sample index of each pulse
  real    psign [2][$];         // +1 positive pulse, -1 negative pulse
  longint nsamp [2] = '{0, 0};

  function automatic int waveform(int c, longint n);
    real v;
    v = BASELINE + int'($urandom % 41) - 20;
    foreach (pulses[c][i]) begin
      longint d = n - pulses[c][i];
      if (d >= 0 && d < 4)        v += psign[c][i] * 1800.0 * (d + 1) / 4.0;
      else if (d >= 4 && d < 400) v += psign[c][i] * 1800.0 * $exp(-(d - 3) / 20.0);
    end
    return int'(v);
  endfunction

  for (genvar c = 0; c < 2; c++) begin : g_adc
    initial begin
      adc_lanes[c] = '0;
      forever begin
        @(adc_clk[c]);
        #0.25;
        begin
          int code; logic flag;
          code = waveform(c, nsamp[c]);
          flag = (nsamp[c] % 97) == 5;
          adc_lanes[c] = {flag, 14'(code)};
          slog[c].push_back({1'b0, flag, 14'(code)});
          nsamp[c]++;
          while (pulses[c].size() > 0 && nsamp[c] - pulses[c][0] > 500) begin
            void'(pulses[c].pop_front()); void'(psign[c].pop_front());
          end
        end
      end
    end
  end

  task automatic pulse(int c, bit neg = 0);
    pulses[c].push_back(nsamp[c] + 10);
    psign[c].push_back(neg ? -1.0 : 1.0);
  endtask

  // ---------------- SPI device models ----------------
  logic [31:0] sh_pll = 0, sh_dac = 0;
  logic [23:0] spi_got [3];
  int spi_loads [3] = '{0, 0, 0};
  always @(posedge spi_sclk) sh_pll = {sh_pll[30:0], spi_mosi};
  always @(negedge spi_sclk) if (!dac_sync_n) sh_dac = {sh_dac[30:0], spi_mosi};
  always @(posedge pll_le[0]) begin spi_got[0] = sh_pll[23:0]; spi_loads[0]++; end
  always @(posedge pll_le[1]) begin spi_got[1] = sh_pll[23:0]; spi_loads[1]++; end
  always @(posedge dac_sync_n) if (rst_n) begin spi_got[2] = sh_dac[23:0]; spi_loads[2]++; end

  // ---------------- software model ----------------
  task automatic axil_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    axil_req.awaddr = a; axil_req.awvalid = 1; axil_req.wdata = d; axil_req.wvalid = 1;
    do @(posedge clk); while (!axil_rsp.awready);
    #0.1 axil_req.awvalid = 0; axil_req.wvalid = 0;
    axil_req.bready = 1;
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

  // mechanism counters
  int n_rec [2] = '{0, 0};
  int n_partner = 0, n_local = 0, n_switch = 0, n_lost = 0, n_spi = 0, n_neg = 0, n_ring_full = 0;
  logic [31:0] host [2] = '{0, 0};
  localparam logic [31:0] BASE [2] = '{32'h1000_0000, 32'h2000_0000};

  // ping-pong buffer switches seen inside channel 0
  logic prev_wsel = 0;
  always @(posedge clk) begin
    if (dut.g_ch[0].u_ch.u_pp.wsel != prev_wsel) n_switch++;
    prev_wsel = dut.g_ch[0].u_ch.u_pp.wsel;
  end

  // Check record `r` of channel `c` in memory; returns the header.
  logic neg_mode [2] = '{0, 0};
  bit   full_check = 1;            // match records against the sample log
  task automatic check_record(int c, int r, output header_t h);
    logic [31:0] a0;
    logic [15:0] s [RW*4];
    int start, pos, found;
    a0 = BASE[c] + 32'((r % 256) * 4096);
    h  = header_t'(g_mem[0].u_mem.read64(0));
    if (c == 0) h = header_t'(g_mem[0].u_mem.read64(a0));
    else        h = header_t'(g_mem[1].u_mem.read64(a0));
    for (int w = 0; w < RW; w++) begin
      logic [63:0] d;
      if (c == 0) d = g_mem[0].u_mem.read64(a0 + 32'((w + 1) * 8));
      else        d = g_mem[1].u_mem.read64(a0 + 32'((w + 1) * 8));
      for (int i = 0; i < 4; i++) s[w*4 + i] = d[i*16 +: 16];
    end
    check(h.channel == 1'(c) && h.seq == 8'(r), $sformatf("ch%0d rec %0d header seq %0d ch %0d", c, r, h.seq, h.channel));
    // find the record in the sample log
    found = -1;
    if (full_check) for (int n = 0; n + RW*4 <= slog[c].size() && found < 0; n++) begin
      bit m = 1;
      for (int i = 0; i < 16 && m; i++) if (slog[c][n+i] != s[i]) m = 0;
      if (m) found = n;
    end
    if (full_check) check(found >= 0, $sformatf("ch%0d rec %0d not found in the sample stream", c, r));
    if (found >= 0) begin
      int bad = 0;
      for (int i = 0; i < RW*4; i++) if (slog[c][found+i] != s[i]) bad++;
      check(bad == 0, $sformatf("ch%0d rec %0d: %0d samples differ", c, r, bad));
    end
    // the crossing: at PRE*4 + trig_pos for a local trigger
    pos = PRE*4 + int'(h.trig_pos);
    if (!h.from_partner && neg_mode[c])
      check(s[pos][13:0] < 14'(THR_NEG) && s[pos-1][13:0] >= 14'(THR_NEG),
            $sformatf("ch%0d rec %0d: no negative crossing at %0d (%0d, %0d)", c, r, pos, s[pos-1][13:0], s[pos][13:0]));
    else if (!h.from_partner)
      check(s[pos][13:0] > 14'(THR) && s[pos-1][13:0] <= 14'(THR),
            $sformatf("ch%0d rec %0d: no crossing at %0d (%0d, %0d)", c, r, pos, s[pos-1][13:0], s[pos][13:0]));
    // pre-trigger samples sit on the baseline
    check(s[10][13:0] < 14'(THR) && s[10][13:0] > 14'(THR_NEG), $sformatf("ch%0d rec %0d pre-trigger not baseline", c, r));
  endtask

  // software: pick up every new record, check it, hand the slot back
  task automatic collect(int c);
    logic [31:0] w;
    header_t h;
    axil_read(c == 0 ? REG_WCNT0 : REG_WCNT1, w);
    while (host[c] != w) begin
      check_record(c, int'(host[c]), h);
      if (h.from_partner) n_partner++; else n_local++;
      host[c]++;
      n_rec[c]++;
      axil_write(c == 0 ? REG_HOST0 : REG_HOST1, host[c]);
    end
  endtask

  task automatic wait_ns(int t);
    #(t * 1ns);
  endtask

  logic [31:0] rd;
  initial begin
    axil_req = '0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    // ---- configuration ----
    axil_write(REG_BASE0, BASE[0]);
    axil_write(REG_BASE1, BASE[1]);
    axil_write(REG_THR0, THR);
    axil_write(REG_THR1, THR);
    axil_read(REG_THR1, rd);
    check(rd == THR, "threshold readback");
    for (int t = 0; t < 3; t++) begin
      logic [23:0] word;
      word = 24'h40_0000 + 24'(t * 24'h1111 + 5);
      axil_write(REG_SPI, {6'd0, 2'(t), word});
      do axil_read(REG_STATUS, rd); while (rd[0]);
      check(spi_got[t] == word && spi_loads[t] == 1, $sformatf("SPI target %0d got %h", t, spi_got[t]));
      n_spi++;
    end
    axil_write(REG_CTRL, 32'b00011);           // run both, link off
    wait_ns(1000);                              // let the pre-trigger history fill
    // ---- one pulse per channel, link off ----
    pulse(0); wait_ns(3000); pulse(1); wait_ns(4000);
    collect(0); collect(1);
    check(n_rec[0] == 1 && n_rec[1] == 1, $sformatf("records without link: %0d %0d", n_rec[0], n_rec[1]));
    check(irq == 0, "irq still raised after collecting");
    // ---- link on: pulse on channel 0 only ----
    axil_write(REG_CTRL, 32'b00111);
    pulse(0); wait_ns(4000);
    check(irq == 1, "irq not raised for new records");
    collect(0); collect(1);
    check(n_rec[0] == 2 && n_rec[1] == 2, $sformatf("records with link: %0d %0d", n_rec[0], n_rec[1]));
    check(n_partner == 1, $sformatf("partner-triggered records %0d", n_partner));
    axil_write(REG_CTRL, 32'b00011);
    // ---- burst faster than the DMA: both buffers fill, triggers are lost ----
    for (int k = 0; k < 8; k++) begin pulse(0); wait_ns(1300); end
    wait_ns(8000);
    collect(0); collect(1);
    axil_read(REG_LOST0, rd); n_lost = int'(rd);
    check(n_lost > 0, "no trigger was lost in the burst");
    check(n_rec[0] - 2 + n_lost == 8, $sformatf("burst: %0d records + %0d lost != 8", n_rec[0] - 2, n_lost));
    axil_read(REG_REC0, rd);
    check(rd == 32'(n_rec[0]), $sformatf("record counter %0d", rd));
    // ---- negative polarity on channel 1 ----
    // reconfigure with the channel stopped, so the change itself cannot trigger
    axil_write(REG_CTRL, 32'b00001);
    axil_write(REG_THR1, THR_NEG);
    axil_write(REG_CTRL, 32'b10001);
    wait_ns(100);
    axil_write(REG_CTRL, 32'b10011);
    neg_mode[1] = 1;
    pulse(1, 0); wait_ns(3000);            // positive pulse: must not trigger
    pulse(1, 1); wait_ns(5000);            // negative pulse: one record
    collect(1);
    check(n_rec[1] == 3, $sformatf("negative polarity: %0d records on ch1", n_rec[1]));
    n_neg = n_rec[1] - 2;
    // ---- software stops consuming: the 256-slot ring fills, the DMA stalls ----
    begin
      logic [31:0] w0, l0, w1, l1;
      int n_hits = 300;
      full_check = 0;
      axil_read(REG_WCNT0, w0);
      axil_read(REG_LOST0, l0);
      for (int k = 0; k < n_hits; k++) begin pulse(0); wait_ns(2500); end
      wait_ns(5000);
      axil_read(REG_WCNT0, w1);
      check(w1 - host[0] == 256, $sformatf("ring not full: %0d records waiting", w1 - host[0]));
      check(irq == 1, "irq low with a full ring");
      wait_ns(2000);
      axil_read(REG_WCNT0, rd);
      check(rd == w1, "DMA wrote into a full ring");
      n_ring_full++;
      collect(0);                           // frees the ring; the two buffered records follow
      wait_ns(4000);
      collect(0);
      axil_read(REG_WCNT0, w1);
      axil_read(REG_LOST0, l1);
      check((w1 - w0) + (l1 - l0) == 32'(n_hits), $sformatf("ring run: %0d records + %0d lost != %0d", w1 - w0, l1 - l0, n_hits));
      check(w1 - w0 == 258, $sformatf("ring run: %0d records, want 256 in the ring + 2 buffered", w1 - w0));
      n_lost = int'(l1);
      full_check = 1;
    end
    axil_read(REG_STATUS, rd);
    check(rd[2:1] == 2'b00, "FIFO overflow");
    check(mem_err[0] + mem_err[1] + chk_err[0] + chk_err[1] == 0, "AXI protocol errors");
    // ---- every mechanism happened ----
    check(n_local >= 4, $sformatf("local triggers %0d", n_local));
    check(n_partner >= 1, "trigger link never used");
    check(n_switch >= 3, $sformatf("ping-pong switches %0d", n_switch));
    check(n_lost >= 1, "lost-trigger path never used");
    check(n_spi == 3, "SPI writes");
    check(n_neg == 1, "negative-polarity trigger never used");
    check(n_ring_full == 1, "ring-full stall never happened");
    $display("records ch0 %0d ch1 %0d; local %0d, partner %0d, negative %0d, buffer switches %0d, lost %0d, ring full %0d, SPI %0d",
             n_rec[0], n_rec[1], n_local, n_partner, n_neg, n_switch, n_lost, n_ring_full, n_spi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
