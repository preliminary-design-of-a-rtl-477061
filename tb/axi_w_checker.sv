// Protocol checker for one AXI3 write port (master side signals in req,
// slave side in rsp). Concurrent assertions: a raised AWVALID or WVALID
// stays raised, with its payload unchanged, until the handshake; bursts
// are INCR with 8-byte beats and never cross a 4 KiB boundary. Counts
// assertion failures in `errors`.
module axi_w_checker
  import readout_pkg::*;
(
  input logic       clk,
  input logic       rst_n,
  input axi_w_req_t req,
  input axi_w_rsp_t rsp,
  output int        errors
);
  initial errors = 0;

  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    req.awvalid && !rsp.awready |=> req.awvalid && $stable(req.awaddr) && $stable(req.awlen))
    else errors++;

  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    req.wvalid && !rsp.wready |=> req.wvalid && $stable(req.wdata) && $stable(req.wlast))
    else errors++;

  a_aw_form: assert property (@(posedge clk) disable iff (!rst_n)
    req.awvalid |-> req.awburst == 2'b01 && req.awsize == 3'd3 &&
                    (req.awaddr[11:0] + ((32'(req.awlen) + 1) * 8)) <= 32'd4096)
    else errors++;
endmodule
