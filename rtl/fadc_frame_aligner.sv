// fadc_frame_aligner: word alignment and sample extraction for one FADC lane.
//
// The multi-gigabit receiver delivers the converter's serial stream as
// WORD_W-bit parallel words whose boundaries are at an unknown bit offset from
// the converter's frames. At start-up (and after `resync`) the converter sends
// a fixed training word. The aligner looks at the WORD_W-bit window at offset
// `slip` inside {previous word, current word} (bits arrive MSB first); on a mismatch it moves the
// window one bit, on LOCK_CNT matches in a row it declares lock and freezes the
// offset. In lock, every aligned frame is passed through a self-synchronous
// descrambler (polynomial 1 + x^14 + x^15, bits taken MSB first) and the low
// SAMPLE_W bits are the sample. The raw aligned word is also output for the
// PRBS bit-error-rate checker.
//
// Timing: one frame per clock (one sample per 4 ns at 250 MS/s). `sample_valid`
// rises on the second aligned frame after lock, because the descrambler needs
// 15 bits of history. All outputs are registered.
//
// The paper gives the function: a synchronisation procedure that finds frame
// alignment, then decoding of consecutive frames into 12-bit samples, with a
// custom scrambled frame format on one of the two converters. The training
// word, the lock count, the frame layout (sample in the low 12 bits, the top
// four bits unused) and the scrambler polynomial are this design's choices;
// the JESD204 8B/10B format of the other converter is not built.
module fadc_frame_aligner #(
  parameter int unsigned         WORD_W    = 16,
  parameter int unsigned         SAMPLE_W  = 12,
  parameter logic [WORD_W-1:0]   TRAIN     = 16'hF0CA,
  parameter int unsigned         LOCK_CNT  = 8,
  parameter bit                  SCRAMBLE  = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                resync,        // restart the alignment search
  input  logic [WORD_W-1:0]   rx_word,       // unaligned receiver word
  output logic                locked,
  output logic [$clog2(WORD_W)-1:0] slip,    // bit offset found
  output logic [WORD_W-1:0]   aligned_word,  // raw aligned frame (for PRBS check)
  output logic                aligned_valid,
  output logic [SAMPLE_W-1:0] sample,
  output logic                sample_valid
);

  logic [WORD_W-1:0]   prev_word;
  logic [2*WORD_W-1:0] pair;
  logic [WORD_W-1:0]   window;
  logic [$clog2(LOCK_CNT+1)-1:0] match_cnt;
  logic [14:0]         scr_hist;
  logic [14:0]         scr_hist_nxt;
  logic [WORD_W-1:0]   descr;
  logic                hist_ok;

  assign pair   = {prev_word, rx_word};   // older word in the upper half
  assign window = WORD_W'(pair >> slip);

  // Self-synchronous descrambler: out = in ^ in[-14] ^ in[-15].
  always_comb begin
    scr_hist_nxt = scr_hist;
    descr        = '0;
    for (int i = WORD_W - 1; i >= 0; i--) begin
      descr[i]     = window[i] ^ scr_hist_nxt[13] ^ scr_hist_nxt[14];
      scr_hist_nxt = {scr_hist_nxt[13:0], window[i]};
    end
    if (!SCRAMBLE) descr = window;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_word     <= '0;
      slip          <= '0;
      match_cnt     <= '0;
      locked        <= 1'b0;
      scr_hist      <= '0;
      hist_ok       <= 1'b0;
      aligned_word  <= '0;
      aligned_valid <= 1'b0;
      sample        <= '0;
      sample_valid  <= 1'b0;
    end else begin
      prev_word <= rx_word;
      if (resync) begin
        locked        <= 1'b0;
        match_cnt     <= '0;
        hist_ok       <= 1'b0;
        aligned_valid <= 1'b0;
        sample_valid  <= 1'b0;
      end else if (!locked) begin
        aligned_valid <= 1'b0;
        sample_valid  <= 1'b0;
        if (window == TRAIN) begin
          if (int'(match_cnt) == LOCK_CNT - 1) begin
            locked    <= 1'b1;
            match_cnt <= '0;
          end else begin
            match_cnt <= match_cnt + 1'b1;
          end
        end else begin
          match_cnt <= '0;
          slip      <= (int'(slip) == WORD_W - 1) ? '0 : slip + 1'b1;
        end
      end else begin
        scr_hist      <= scr_hist_nxt;
        hist_ok       <= 1'b1;
        aligned_word  <= window;
        aligned_valid <= 1'b1;
        sample        <= descr[SAMPLE_W-1:0];
        sample_valid  <= hist_ok || !SCRAMBLE;
      end
    end
  end

endmodule
