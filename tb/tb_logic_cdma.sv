// Testbench for logic_cdma with 37-word records (bursts of 16, 16 and 5
// beats) and a ring of 4 slots. A buffer model supplies a record whose
// word a of record r is {r, a} (one-cycle read latency); a memory model
// with random stalls takes the AXI writes; a protocol checker watches the
// port. Software is modelled as not consuming for a while, so the ring
// fills and the engine must stall, then consuming everything. Every record
// must land complete in its slot, base + (r mod 4) * 4096, and the copy
// time of a record is checked against the ideal of one beat per cycle.
`timescale 1ns/1ps
module tb_logic_cdma;
  import readout_pkg::*;
  localparam int RB = 37, NS = 4, AW = 6, NREC = 10;
  localparam logic [31:0] BASE = 32'h1000_0000;
  logic clk = 0, rst_n = 0;
  logic rd_avail, rd_done;
  logic [AW-1:0] raddr;
  word_t rdata;
  logic [31:0] host_count, wr_count, bresp_err;
  axi_w_req_t axi_req;
  axi_w_rsp_t axi_rsp;
  int checks = 0, failures = 0, mem_err, beats, chk_err;
  int rec = 0;             // record presented by the buffer model
  int stalls = 0;

  logic_cdma #(.RECORD_BEATS(RB), .SLOT_BYTES(4096), .N_SLOTS(NS), .BURST(16), .ADDR_W(AW)) dut (
    .clk(clk), .rst_n(rst_n), .rd_avail(rd_avail), .rd_done(rd_done), .raddr(raddr), .rdata(rdata),
    .base(BASE), .host_count(host_count), .wr_count(wr_count), .bresp_err(bresp_err),
    .axi_req(axi_req), .axi_rsp(axi_rsp));
  axi_mem_model #(.STALL_PCT(20)) u_mem (.clk(clk), .rst_n(rst_n), .req(axi_req), .rsp(axi_rsp), .errors(mem_err), .beats(beats));
  axi_w_checker u_chk (.clk(clk), .rst_n(rst_n), .req(axi_req), .rsp(axi_rsp), .errors(chk_err));

  always #2 clk = ~clk;
  initial begin #400000; failures++; $display("wd: wr %0d rec %0d beats %0d state %0d err %0d %0d", wr_count, rec, beats, dut.state, mem_err, chk_err); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always_ff @(posedge clk) rdata <= {32'(rec), 32'(raddr)};

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%t %s", $time, msg); end
  endtask

  // buffer model: always a record waiting until NREC are done
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rec <= 0;
    else if (rd_done) rec <= rec + 1;
  assign rd_avail = (rec < NREC);

  always @(posedge clk) if (rst_n && rd_avail && wr_count - host_count == NS) stalls++;

  int t_start, t_len;
  initial begin
    host_count = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // software does not consume: ring of 4 fills, engine must wait
    wait (wr_count == NS);
    repeat (200) @(negedge clk);
    check(wr_count == NS && rec == NS, $sformatf("ring full not respected: %0d", wr_count));
    fork forever begin @(negedge clk); host_count = wr_count; end join_none  // consume as they arrive
    wait (wr_count == NREC);
    repeat (20) @(negedge clk);
    // contents
    for (int r = 0; r < NREC; r++)
      for (int a = 0; a < RB; a++) begin
        logic [31:0] addr;
        addr = BASE + 32'((r % NS) * 4096 + a * 8);
        if (r >= NREC - NS || r < NS) ;
        if (r >= NREC - NS)
          check(u_mem.read64(addr) == {32'(r), 32'(a)},
                $sformatf("rec %0d word %0d = %h", r, a, u_mem.read64(addr)));
      end
    check(beats == NREC * RB, $sformatf("beats %0d", beats));
    check(mem_err == 0 && chk_err == 0 && bresp_err == 0, $sformatf("protocol errors %0d %0d", mem_err, chk_err));
    check(stalls > 100, "ring-full stall not seen");
    $display("beats %0d, ring-full stall cycles %0d", beats, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // copy time of one record with a memory that never stalls is checked in
  // a second instance
  logic rd_avail2, rd_done2; logic [AW-1:0] raddr2; word_t rdata2;
  logic [31:0] wr2, err2; axi_w_req_t req2; axi_w_rsp_t rsp2; int e2, b2;
  logic [31:0] zero32 = 0;
  logic_cdma #(.RECORD_BEATS(RB), .SLOT_BYTES(4096), .N_SLOTS(NS), .BURST(16), .ADDR_W(AW)) dut2 (
    .clk(clk), .rst_n(rst_n), .rd_avail(rd_avail2), .rd_done(rd_done2), .raddr(raddr2), .rdata(rdata2),
    .base(zero32), .host_count(zero32), .wr_count(wr2), .bresp_err(err2), .axi_req(req2), .axi_rsp(rsp2));
  axi_mem_model #(.STALL_PCT(0)) u_mem2 (.clk(clk), .rst_n(rst_n), .req(req2), .rsp(rsp2), .errors(e2), .beats(b2));
  always_ff @(posedge clk) rdata2 <= {32'd0, 32'(raddr2)};
  initial begin
    rd_avail2 = 0;
    wait (rst_n);
    repeat (10) @(negedge clk);
    rd_avail2 = 1; t_start = $time;
    @(negedge clk); rd_avail2 = 0;
    wait (rd_done2);
    t_len = ($time - t_start) / 4;
    // 37 beats + per burst: AW issue and handshake (2) + refill, + B wait (~6)
    check(t_len >= RB && t_len <= RB + 3 * 4 + 10, $sformatf("record copy took %0d cycles", t_len));
    $display("one record (%0d beats) copied in %0d cycles", RB, t_len);
  end
endmodule
