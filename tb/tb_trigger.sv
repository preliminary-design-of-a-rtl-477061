// Testbench for trigger: random four-sample words (values clustered around
// the threshold so that crossings are frequent), random gaps in in_valid,
// random partner hits and random link/polarity settings. A sample-by-sample
// reference decides the expected crossing and its position; trig,
// trig_pos, trig_from_partner and the delayed word are checked one cycle
// later, local_hit in the same cycle.
`timescale 1ns/1ps
module tb_trigger;
  import readout_pkg::*;
  logic clk = 0, rst_n = 0;
  word_t in_word, out_word;
  logic in_valid, negative, share, partner_hit, local_hit, out_valid, trig, trig_from_partner;
  logic [13:0] threshold;
  logic [1:0]  trig_pos;
  int checks = 0, failures = 0, n_trig = 0, n_partner = 0;

  trigger dut (.*);

  always #2 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic beyond(logic [13:0] s, logic [13:0] t, logic neg);
    return neg ? (s < t) : (s > t);
  endfunction

  logic   ref_prev;     // last sample of the last valid word was beyond
  logic   e_trig, e_partner, e_valid, e_hit;
  logic [1:0] e_pos;
  word_t  e_word;

  initial begin
    in_word = '0; in_valid = 0; negative = 0; share = 0; partner_hit = 0; threshold = 14'd8000;
    ref_prev = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      // check outputs of the previous cycle's input
      if (k > 0) begin
        checks++;
        if (out_valid !== e_valid || trig !== e_trig || (e_trig && (trig_pos !== e_pos ||
            trig_from_partner !== e_partner)) || (e_valid && out_word !== e_word)) begin
          failures++;
          if (failures < 6) $display("k=%0d trig %b/%b pos %0d/%0d partner %b/%b", k, trig, e_trig, trig_pos, e_pos, trig_from_partner, e_partner);
        end
      end
      if (k % 1000 == 0) begin
        negative = 1'($urandom); share = 1'($urandom);
        if (k == 1000) share = 1;
      end
      in_valid    = ($urandom % 5) != 0;
      partner_hit = ($urandom % 7) == 0;
      for (int i = 0; i < 4; i++)
        in_word[i*16 +: 16] = {2'b00, 14'(threshold - 300 + ($urandom % 600))};
      // reference
      e_valid = in_valid; e_word = in_word; e_hit = 0; e_pos = 0;
      begin
        logic p; p = ref_prev;
        for (int i = 0; i < 4; i++) begin
          logic b; b = beyond(in_word[i*16 +: 14], threshold, negative);
          if (b && !p && !e_hit) begin e_hit = 1; e_pos = 2'(i); end
          p = b;
        end
        if (in_valid) ref_prev = p;
      end
      e_hit     = e_hit && in_valid;
      e_trig    = e_hit || (share && partner_hit && in_valid);
      e_partner = !e_hit && share && partner_hit && in_valid;
      #0.5;
      checks++;
      if (local_hit !== e_hit) begin failures++; if (failures < 6) $display("k=%0d local_hit %b want %b", k, local_hit, e_hit); end
      if (e_trig) n_trig++;
      if (e_partner) n_partner++;
    end
    checks++; if (n_trig < 100 || n_partner < 10) begin failures++; $display("too few triggers %0d %0d", n_trig, n_partner); end
    $display("triggers %0d, from partner %0d", n_trig, n_partner);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
