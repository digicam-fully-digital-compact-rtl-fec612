// prbs_ber_checker: bit-error-rate measurement on a converter test pattern.
//
// For link testing the converter replaces its samples with a pseudo-random
// binary sequence. The checker is self-synchronising: each received bit is
// compared with the bit the PRBS recurrence predicts from the previous
// received bits (PRBS-9, x^9 + x^5 + 1, i.e. b[n] = b[n-9] ^ b[n-5]), so no
// seed has to be agreed. Words are consumed MSB first, WORD_W bits per valid
// word. `bit_count` counts checked bits and `err_count` mismatching bits; both
// saturate and are cleared by `clear`. A single flipped bit on the line is
// counted three times (once itself and once in each of the two predictions it
// feeds), as usual for a self-synchronising checker. The first 9 bits after
// reset or `clear` only fill the history and are not counted.
//
// Timing: one word per clock, counters updated one clock after the word.
//
// The paper states only that the read-out implements BER measurement with PRBS
// patterns transmitted by the converters; the PRBS order and counter widths are
// this design's choices.
module prbs_ber_checker #(
  parameter int unsigned WORD_W = 16,
  parameter int unsigned CNT_W  = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [WORD_W-1:0] word,
  input  logic              word_valid,
  output logic [CNT_W-1:0]  bit_count,
  output logic [CNT_W-1:0]  err_count
);

  logic [8:0]  hist, hist_nxt;
  logic [4:0]  fill, fill_nxt;                 // history bits gathered (max 9)
  logic [$clog2(WORD_W+1)-1:0] n_err, n_chk;

  always_comb begin
    hist_nxt = hist;
    fill_nxt = fill;
    n_err    = '0;
    n_chk    = '0;
    for (int i = WORD_W - 1; i >= 0; i--) begin
      if (fill_nxt == 5'd9) begin
        n_chk = n_chk + 1'b1;
        if (word[i] != (hist_nxt[8] ^ hist_nxt[4])) n_err = n_err + 1'b1;
      end else begin
        fill_nxt = fill_nxt + 1'b1;
      end
      hist_nxt = {hist_nxt[7:0], word[i]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist      <= '0;
      fill      <= '0;
      bit_count <= '0;
      err_count <= '0;
    end else if (clear) begin
      hist      <= '0;
      fill      <= '0;
      bit_count <= '0;
      err_count <= '0;
    end else if (word_valid) begin
      hist <= hist_nxt;
      fill <= fill_nxt;
      if (bit_count <= {CNT_W{1'b1}} - CNT_W'(n_chk)) bit_count <= bit_count + CNT_W'(n_chk);
      else                                             bit_count <= '1;
      if (err_count <= {CNT_W{1'b1}} - CNT_W'(n_err)) err_count <= err_count + CNT_W'(n_err);
      else                                             err_count <= '1;
    end
  end

endmodule
