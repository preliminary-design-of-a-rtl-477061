// Testbench for iddr_1to2: drives a new random lane word before every
// rising and every falling edge and checks that each rising/falling pair
// comes out together, rising-edge bits on q_rise, one clock later.
`timescale 1ns/1ps
module tb_iddr_1to2;
  localparam int N = 15;
  logic clk = 1'b0;
  logic [N-1:0] d, q_rise, q_fall;
  logic [N-1:0] a_prev, b_prev, a, b;
  int checks = 0, failures = 0;

  iddr_1to2 #(.N_LANES(N)) dut (.clk(clk), .d(d), .q_rise(q_rise), .q_fall(q_fall));

  always #1 clk = ~clk;   // 500 MHz

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0;
    for (int k = 0; k < 500; k++) begin
      a = N'($urandom); b = N'($urandom);
      @(negedge clk); #0.3 d = a;     // caught by the next rising edge
      @(posedge clk); #0.3 d = b;     // caught by the next falling edge
      if (k > 0) begin
        checks++;
        if (q_rise !== a_prev || q_fall !== b_prev) begin
          failures++;
          if (failures < 5) $display("k=%0d got %h/%h want %h/%h", k, q_rise, q_fall, a_prev, b_prev);
        end
      end
      a_prev = a; b_prev = b;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
