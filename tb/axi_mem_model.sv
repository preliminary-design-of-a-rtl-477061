// Behavioural model of the processor-side memory behind an AXI3 write port.
// Accepts one address at a time (random awready delay), takes the W beats
// of the oldest accepted burst with random wready stalls, checks WLAST on
// the burst's last beat, stores the data in an associative array indexed
// by byte address and returns an OKAY response a few cycles later. Counts
// protocol faults it sees in `errors` and beats written in `beats`.
module axi_mem_model
  import readout_pkg::*;
#(
  parameter int STALL_PCT = 30
) (
  input  logic       clk,
  input  logic       rst_n,
  input  axi_w_req_t req,
  output axi_w_rsp_t rsp,
  output int         errors,
  output int         beats
);
  logic [63:0] mem [logic [31:0]];
  logic [31:0] aq_addr [$];
  int          aq_len [$];
  int          b_due [$];
  logic [31:0] cur_addr;
  int          cur_left = 0;
  int          cyc = 0;

  initial begin errors = 0; beats = 0; end

  function automatic logic [63:0] read64(logic [31:0] a);
    return mem.exists(a) ? mem[a] : 64'hDEAD_DEAD_DEAD_DEAD;
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (!rst_n) begin
      rsp <= '0;
    end else begin
      // address channel
      if (req.awvalid && rsp.awready) begin
        aq_addr.push_back(req.awaddr);
        aq_len.push_back(int'(req.awlen) + 1);
      end
      // data channel
      if (req.wvalid && rsp.wready) begin
        if (cur_left == 0) begin
          if (aq_addr.size() == 0) errors++;
          else begin cur_addr = aq_addr.pop_front(); cur_left = aq_len.pop_front(); end
        end
        mem[cur_addr] = req.wdata;
        beats++;
        cur_addr += 8;
        cur_left--;
        if (req.wlast != (cur_left == 0)) errors++;
        if (cur_left == 0) b_due.push_back(cyc + 2 + $urandom % 4);
      end
      // response channel
      if (rsp.bvalid && req.bready) rsp.bvalid <= 1'b0;
      else if (!rsp.bvalid && b_due.size() > 0 && b_due[0] <= cyc) begin
        void'(b_due.pop_front());
        rsp.bvalid <= 1'b1;
        rsp.bresp  <= 2'b00;
      end
      rsp.awready <= ($urandom % 100) >= STALL_PCT && aq_addr.size() < 2;
      rsp.wready  <= ($urandom % 100) >= STALL_PCT;
    end
  end
endmodule
