// Testbench for pingpong_buffer (short records: 20 words, 5 pre-trigger).
// The input stream is a counter (word n holds n), so every record must hold
// words t-5 .. t+14 for a trigger on word t, at addresses 1..20, with the
// header at address 0. The two buffers are modelled as arrays written
// through we/waddr/wdata; a reader stands in for the DMA engine and checks
// each full buffer before releasing it. Covered: triggers ignored before
// the delay line is primed, during a record and while disabled; alternation
// of the buffers; a trigger lost while both buffers are full.
`timescale 1ns/1ps
module tb_pingpong_buffer;
  import readout_pkg::*;
  localparam int RW = 20, PRE = 5, AW = 5;
  logic clk = 0, rst_n = 0;
  logic enable, in_valid, trig, trig_from_partner, rd_avail, rd_sel, rd_done;
  word_t in_word, wdata;
  logic [1:0] trig_pos, we;
  logic [TS_W-1:0] timestamp;
  logic [AW-1:0] waddr;
  logic [31:0] lost, records;
  word_t buf_mem [2][2**AW];
  int checks = 0, failures = 0;
  logic hold_reader = 0;
  int n_alt = 0, n_lost = 0, last_sel = -1;

  pingpong_buffer #(.RECORD_WORDS(RW), .PRE_WORDS(PRE), .DL_DEPTH(8), .ADDR_W(AW)) dut (
    .clk(clk), .rst_n(rst_n), .enable(enable), .channel(1'b1), .in_word(in_word),
    .in_valid(in_valid), .trig(trig), .trig_pos(trig_pos), .trig_from_partner(trig_from_partner),
    .timestamp(timestamp), .we(we), .waddr(waddr), .wdata(wdata),
    .rd_avail(rd_avail), .rd_sel(rd_sel), .rd_done(rd_done), .lost(lost), .records(records));

  always #2 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always_ff @(posedge clk) begin
    if (we[0]) buf_mem[0][waddr] <= wdata;
    if (we[1]) buf_mem[1][waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) timestamp <= '0; else timestamp <= timestamp + 1'b1;

  // expected records, in trigger order
  int exp_t[$]; logic [1:0] exp_pos[$]; logic [TS_W-1:0] exp_ts[$];
  int n_rec = 0;
  logic [TS_W-1:0] dbg_ts;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("%t %s", $time, msg); end
  endtask

  // reader
  initial begin
    rd_done = 0;
    forever begin
      @(negedge clk);
      if (rd_avail && !hold_reader) begin
        header_t h;
        int t;
        repeat ($urandom % 3) @(negedge clk);
        h = header_t'(buf_mem[rd_sel][0]);
        if (exp_t.size() == 0) begin check(0, "record without trigger"); continue; end
        t = exp_t.pop_front();
        dbg_ts = exp_ts[0];
        check(h.seq == 8'(n_rec) && h.channel == 1'b1 && h.trig_pos == exp_pos.pop_front()
              && h.timestamp == exp_ts.pop_front(), $sformatf("header seq %0d/%0d pos %0d ts %0d exp %0d", h.seq, n_rec, h.trig_pos, h.timestamp, dbg_ts));
        for (int a = 1; a <= RW; a++)
          check(buf_mem[rd_sel][a] == word_t'(t - PRE + a - 1),
                $sformatf("rec %0d addr %0d = %0d want %0d", n_rec, a, buf_mem[rd_sel][a], t - PRE + a - 1));
        if (last_sel >= 0 && last_sel != int'(rd_sel)) n_alt++;
        last_sel = rd_sel;
        n_rec++;
        rd_done = 1; @(negedge clk); rd_done = 0;
      end
    end
  end

  int n = 0;
  int busy_until = -1;      // last word index of the record being written
  task automatic send(bit t, bit expect_rec = 0);
    @(negedge clk);
    if (expect_rec) begin
      exp_t.push_back(n); exp_pos.push_back(2'(n % 4)); exp_ts.push_back(timestamp + 1);
    end
    in_valid = 1; in_word = word_t'(n); trig = t; trig_pos = 2'(n % 4);
    @(posedge clk); #0.1;
    in_valid = 0; trig = 0;
    n++;
  endtask

  initial begin
    enable = 0; in_valid = 0; trig = 0; trig_pos = 0; trig_from_partner = 0; in_word = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // trigger before the delay line is primed: ignored
    send(0); send(1); for (int i = 0; i < 10; i++) send(0);
    // disabled: ignored
    send(1); for (int i = 0; i < 30; i++) send(0);
    enable = 1;
    for (int r = 0; r < 6; r++) begin
      send(1, 1);
      for (int i = 0; i < 8; i++) send(i == 3);     // trigger inside the record: ignored
      for (int i = 0; i < 40; i++) begin
        if ($urandom % 3 == 0) @(negedge clk);       // gaps in the stream
        send(0);
      end
    end
    // both buffers full: third trigger is lost
    hold_reader = 1;
    for (int r = 0; r < 3; r++) begin
      send(1, r < 2);
      for (int i = 0; i < 30; i++) send(0);
    end
    check(lost == 1, $sformatf("lost = %0d", lost));
    hold_reader = 0;
    repeat (50) @(negedge clk);
    for (int i = 0; i < 30; i++) send(0);
    repeat (50) @(negedge clk);
    check(n_rec == 8 && records == 8, $sformatf("records %0d/%0d", n_rec, records));
    check(n_alt >= 7, $sformatf("buffer alternations %0d", n_alt));
    $display("records %0d, alternations %0d, lost %0d", n_rec, n_alt, lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
