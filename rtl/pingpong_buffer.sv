// Ping-pong record writer for one channel.
//
// The sample stream (one four-sample word per valid cycle) runs through a
// delay line of PRE_WORDS words, so that a record can start PRE_WORDS
// words before its trigger. On a trigger, the writer copies RECORD_WORDS
// delayed words into the free buffer of the pair at addresses 1 ..
// RECORD_WORDS, then writes the header (readout_pkg::header_t) at address
// 0, marks that buffer full and moves to the other buffer. The DMA engine
// reads full buffers in the order they were filled (rd_avail / rd_sel) and
// returns each with a one-cycle rd_done. So one buffer fills while the
// other drains, and the only dead time between records is the header
// cycle -- unless the DMA falls behind: a trigger that finds its buffer
// still full is dropped and counted in `lost`.
//
// Triggers are taken only in the idle state, only while `enable` is high,
// and only after PRE_WORDS words have entered the delay line since reset,
// so that no record holds stale history. A trigger during a record is
// ignored.
//
// Timing: the trigger word lands at record address PRE_WORDS+1; the record
// takes RECORD_WORDS valid cycles plus one cycle for the header. The
// delay line is a small RAM read one cycle after it is written.
//
// The two buffers and the ping-pong switching follow the readout system;
// record length 1200 samples is its 1.2 us hit window at 1 GSPS; the
// pre-trigger length and the header are this design's choice.
module pingpong_buffer
  import readout_pkg::*;
#(
  parameter int unsigned RECORD_WORDS = 300,
  parameter int unsigned PRE_WORDS    = 50,
  parameter int unsigned DL_DEPTH     = 64,  // power of 2, > PRE_WORDS
  parameter int unsigned ADDR_W       = 9    // 2**ADDR_W > RECORD_WORDS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic              channel,
  input  word_t             in_word,
  input  logic              in_valid,
  input  logic              trig,
  input  logic [1:0]        trig_pos,
  input  logic              trig_from_partner,
  input  logic [TS_W-1:0]   timestamp,
  // write ports of the two buffers
  output logic [1:0]        we,
  output logic [ADDR_W-1:0] waddr,
  output word_t             wdata,
  // to the DMA engine
  output logic              rd_avail,
  output logic              rd_sel,
  input  logic              rd_done,
  // statistics
  output logic [31:0]       lost,
  output logic [31:0]       records
);

  localparam int unsigned DLW = $clog2(DL_DEPTH);

  // ---------------- pre-trigger delay line ----------------
  word_t            dl_mem [DL_DEPTH];
  logic [DLW-1:0]   dl_wp;
  word_t            dl_out;
  logic             dl_valid;
  logic             dl_trig, dl_from_partner;
  logic [1:0]       dl_pos;
  logic [$clog2(PRE_WORDS+1)-1:0] history;
  logic             primed;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      dl_mem[dl_wp] <= in_word;
      dl_out        <= dl_mem[dl_wp - DLW'(PRE_WORDS)];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dl_wp           <= '0;
      dl_valid        <= 1'b0;
      dl_trig         <= 1'b0;
      dl_pos          <= '0;
      dl_from_partner <= 1'b0;
      history         <= '0;
      primed          <= 1'b0;
    end else begin
      dl_valid        <= in_valid;
      dl_trig         <= in_valid && trig && primed;
      dl_pos          <= trig_pos;
      dl_from_partner <= trig_from_partner;
      if (in_valid) begin
        dl_wp <= dl_wp + 1'b1;
        if (!primed) begin
          history <= history + 1'b1;
          if (history == ($bits(history))'(PRE_WORDS - 1)) primed <= 1'b1;
        end
      end
    end
  end

  // ---------------- record writer ----------------
  typedef enum logic [1:0] {W_IDLE, W_REC, W_HDR} wstate_t;
  wstate_t         wstate;
  logic [1:0]      full;
  logic            wsel;
  logic [ADDR_W-1:0] cnt;
  header_t         hdr;
  logic [7:0]      seq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wstate  <= W_IDLE;
      full    <= '0;
      wsel    <= 1'b0;
      rd_sel  <= 1'b0;
      cnt     <= '0;
      hdr     <= '0;
      seq     <= '0;
      lost    <= '0;
      records <= '0;
      we      <= '0;
      waddr   <= '0;
      wdata   <= '0;
    end else begin
      we <= '0;
      if (rd_done) begin
        full[rd_sel] <= 1'b0;
        rd_sel       <= ~rd_sel;
      end
      unique case (wstate)
        W_IDLE: begin
          if (dl_valid && dl_trig && enable) begin
            if (full[wsel]) begin
              lost <= lost + 1'b1;
            end else begin
              // first word of the record is already on dl_out
              we[wsel] <= 1'b1;
              waddr    <= ADDR_W'(1);
              wdata    <= dl_out;
              cnt      <= ADDR_W'(1);
              hdr      <= '{seq: seq, channel: channel, from_partner: dl_from_partner,
                            trig_pos: dl_pos, zero: '0, timestamp: timestamp};
              wstate   <= W_REC;
            end
          end
        end
        W_REC: begin
          if (dl_valid) begin
            if (cnt == ADDR_W'(RECORD_WORDS)) begin
              we[wsel] <= 1'b1;
              waddr    <= '0;
              wdata    <= hdr;
              wstate   <= W_HDR;
            end else begin
              we[wsel] <= 1'b1;
              waddr    <= cnt + 1'b1;
              wdata    <= dl_out;
              cnt      <= cnt + 1'b1;
            end
          end
        end
        W_HDR: begin
          full[wsel] <= 1'b1;
          wsel       <= ~wsel;
          seq        <= seq + 1'b1;
          records    <= records + 1'b1;
          wstate     <= W_IDLE;
        end
        default: wstate <= W_IDLE;
      endcase
    end
  end

  assign rd_avail = full[rd_sel];

endmodule
