// Write-only serial configuration master for the board's clock PLLs and DAC.
//
// One SCLK/MOSI pair is shared by three devices: target 0 and 1 are the
// two ADF4360-7 clock synthesisers (one per ADC), target 2 is the AD5686
// DAC. A one-cycle `start` with `target` and a 24-bit `data` word sends the
// word MSB first; `busy` stays high until the frame and its trailing gap
// are over (start is ignored while busy).
//
// Framing per device (taken from the parts' data sheets):
//   PLL: SCLK idles low, each bit is set up half an SCLK period before the
//        rising edge that shifts it in; after the 24th bit the target's
//        pll_le line pulses high for half a period to load the register.
//   DAC: SCLK idles high, dac_sync_n goes low half a period before the
//        first falling edge, bits are taken on falling edges, and
//        dac_sync_n returns high after the 24th bit.
// SCLK half period is HALF_DIV logic clocks (15.6 MHz for 250 MHz and 8).
//
// That the logic configures the PLLs and the DAC over SPI follows the
// readout system; the sharing of one bus, the divider and the interface
// are this design's choice.
module spi_master #(
  parameter int unsigned WORD_BITS = 24,
  parameter int unsigned HALF_DIV  = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [1:0]           target,
  input  logic [WORD_BITS-1:0] data,
  output logic                 busy,
  output logic                 sclk,
  output logic                 mosi,
  output logic [1:0]           pll_le,
  output logic                 dac_sync_n
);

  typedef enum logic [2:0] {IDLE, SETUP, CAPTURE, LAUNCH, LOAD, GAP} state_t;
  state_t state;

  logic [WORD_BITS-1:0]         shreg;
  logic [$clog2(WORD_BITS)-1:0] nbit;
  logic [$clog2(HALF_DIV)-1:0]  tick;
  logic [1:0]                   tgt;
  logic                         idle_level, half_done;

  assign idle_level = (tgt == 2'd2);              // DAC: SCLK idles high
  assign half_done  = (tick == ($bits(tick))'(HALF_DIV - 1));
  assign busy       = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      shreg      <= '0;
      nbit       <= '0;
      tick       <= '0;
      tgt        <= '0;
      sclk       <= 1'b0;
      mosi       <= 1'b0;
      pll_le     <= '0;
      dac_sync_n <= 1'b1;
    end else begin
      tick <= half_done ? '0 : tick + 1'b1;
      unique case (state)
        IDLE: begin
          tick <= '0;
          if (start && target != 2'd3) begin
            tgt        <= target;
            sclk       <= (target == 2'd2);
            shreg      <= data;
            mosi       <= data[WORD_BITS-1];
            nbit       <= '0;
            dac_sync_n <= (target != 2'd2);
            state      <= SETUP;
          end
        end
        SETUP, LAUNCH: if (half_done) begin
          sclk  <= ~idle_level;                    // capture edge
          state <= CAPTURE;
        end
        CAPTURE: if (half_done) begin
          sclk <= idle_level;                      // launch edge
          if (nbit == ($bits(nbit))'(WORD_BITS - 1)) begin
            state <= LOAD;
            if (tgt == 2'd2) dac_sync_n <= 1'b1;
            else             pll_le[tgt[0]] <= 1'b1;
          end else begin
            nbit  <= nbit + 1'b1;
            shreg <= shreg << 1;
            mosi  <= shreg[WORD_BITS-2];
            state <= LAUNCH;
          end
        end
        LOAD: if (half_done) begin
          pll_le <= '0;
          mosi   <= 1'b0;
          state  <= GAP;
        end
        GAP: if (half_done) begin
          sclk  <= 1'b0;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
