// Leading-edge threshold trigger for one channel, with a link to the other.
//
// Every valid word carries four samples (earliest in bits 15:0). A sample
// is "beyond" the threshold when its 14-bit code is above it, or below it
// when `negative` is set. A crossing is a sample beyond the threshold whose
// predecessor (the previous sample, across word boundaries) is not. A word
// holding a crossing raises local_hit at once (combinationally, for the
// other channel) and, one clock later, trig together with that same word on
// out_word. trig_pos gives the index of the first crossing in the word.
// With `share` set, the other channel's local_hit also triggers this
// channel (trig_from_partner then tells that only the partner crossed);
// both channels run on the same logic clock.
//
// Timing: out_word/out_valid/trig are the input delayed by one clock.
//
// The readout's block diagram shows one trigger per channel and a link
// between the two; the crossing rule, the polarity bit and the link enable
// are this design's choice.
module trigger
  import readout_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  word_t               in_word,
  input  logic                in_valid,
  input  logic [ADC_BITS-1:0] threshold,
  input  logic                negative,
  input  logic                share,
  input  logic                partner_hit,
  output logic                local_hit,
  output word_t               out_word,
  output logic                out_valid,
  output logic                trig,
  output logic [1:0]          trig_pos,
  output logic                trig_from_partner
);

  logic [SAMPLES_PER_WORD-1:0] beyond;
  logic                        prev_beyond;
  logic [1:0]                  first;

  always_comb begin
    logic [ADC_BITS-1:0]         s;
    logic [SAMPLES_PER_WORD-1:0] prev_s;
    beyond    = '0;
    first     = '0;
    local_hit = 1'b0;
    for (int i = 0; i < SAMPLES_PER_WORD; i++) begin
      s         = in_word[i*SAMPLE_W +: ADC_BITS];
      beyond[i] = negative ? (s < threshold) : (s > threshold);
    end
    prev_s = {beyond[SAMPLES_PER_WORD-2:0], prev_beyond};
    // Scan from the latest sample down so the earliest crossing wins.
    for (int i = SAMPLES_PER_WORD - 1; i >= 0; i--) begin
      if (beyond[i] && !prev_s[i]) begin
        first     = 2'(i);
        local_hit = in_valid;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_beyond       <= 1'b0;
      out_word          <= '0;
      out_valid         <= 1'b0;
      trig              <= 1'b0;
      trig_pos          <= '0;
      trig_from_partner <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_word    <= in_word;
        prev_beyond <= beyond[SAMPLES_PER_WORD-1];
      end
      trig              <= local_hit || (share && partner_hit && in_valid);
      trig_pos          <= local_hit ? first : 2'd0;
      trig_from_partner <= !local_hit && share && partner_hit && in_valid;
    end
  end

endmodule
