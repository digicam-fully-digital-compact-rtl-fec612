// adc_board: FPGA datapath of one DigiCam ADC board.
//
// Each of the CH pixels arrives from its flash ADC as a serial lane,
// deserialised by the FPGA transceiver into WORD_W-bit words (`rx_word`). Per
// lane a frame aligner finds the frame boundary and extracts 12-bit samples,
// and a PRBS checker measures the bit error rate when the converters send
// their test pattern (`prbs_mode`). Once every lane is locked, all samples of
// a clock are written together into the ring buffer and also reduced to
// CH/3 triplet L0 values, sent on every clock to the trigger board. On the
// L1 trigger from the trigger board the ring buffer copies out a programmable
// block, which is packed into an event and queued in the read-out buffer for
// the board's read-out link.
//
// Channel bonding: in the clock in which `bond_req` is high (the common sync
// of the crate) the board sets `l0_marker` beside its L0 word, so that the
// trigger board can measure this link's latency.
//
// Timing: samples appear two clocks after their frame; L0 values one clock
// later. `ber_sel` picks the channel whose BER counters are shown.
//
// The division into aligner, ring buffer, L0, read-out buffer follows the
// paper's description of the ADC board; the marker, the common write enable
// and the status outputs are this design's choices.
module adc_board
  import digicam_pkg::*;
#(
  parameter int unsigned CH         = N_CHANNELS,
  parameter int unsigned WORD_W     = 16,
  parameter int unsigned DEPTH      = RING_DEPTH,
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [7:0]                   board_id,
  // transceiver words from the converters
  input  logic [CH-1:0][WORD_W-1:0]    rx_word,
  input  logic                         resync,
  output logic [CH-1:0]                locked,
  // bit error rate test
  input  logic                         prbs_mode,
  input  logic                         ber_clear,
  input  logic [$clog2(CH)-1:0]        ber_sel,
  output logic [47:0]                  ber_bits,
  output logic [47:0]                  ber_errors,
  // L0 trigger data to the trigger board
  input  logic [SAMPLE_W-1:0]          baseline,
  input  logic [2:0]                   l0_shift,
  input  logic                         bond_req,
  output logic [(CH/3)*L0_W-1:0]       l0,
  output logic                         l0_valid,
  output logic                         l0_marker,
  // L1 trigger and read-out
  input  logic                         trigger,
  input  logic [$clog2(DEPTH)-1:0]     pre_trig,
  input  logic [$clog2(DEPTH):0]       blk_len,
  output axis_beat_t                   ro_beat,
  output logic                         ro_valid,
  input  logic                         ro_ready,
  output logic [15:0]                  drop_count
);

  logic [CH-1:0][WORD_W-1:0]   aligned;
  logic [CH-1:0]               aligned_valid;
  logic [CH-1:0][SAMPLE_W-1:0] samples;
  logic [CH-1:0]               sample_valid;
  logic [CH-1:0][47:0]         bits, errs;
  logic                        all_valid;

  for (genvar ch = 0; ch < int'(CH); ch++) begin : g_lane
    logic [$clog2(WORD_W)-1:0] slip;
    fadc_frame_aligner #(.WORD_W(WORD_W), .SAMPLE_W(SAMPLE_W)) u_align (
      .clk, .rst_n, .resync,
      .rx_word      (rx_word[ch]),
      .locked       (locked[ch]),
      .slip         (slip),
      .aligned_word (aligned[ch]),
      .aligned_valid(aligned_valid[ch]),
      .sample       (samples[ch]),
      .sample_valid (sample_valid[ch])
    );
    prbs_ber_checker #(.WORD_W(WORD_W), .CNT_W(48)) u_ber (
      .clk, .rst_n,
      .clear      (ber_clear),
      .word       (aligned[ch]),
      .word_valid (aligned_valid[ch] && prbs_mode),
      .bit_count  (bits[ch]),
      .err_count  (errs[ch])
    );
  end

  assign ber_bits   = bits[ber_sel];
  assign ber_errors = errs[ber_sel];
  assign all_valid  = (&sample_valid) && !prbs_mode;

  // L0 triplets
  l0_triplet #(.CH(CH), .SAMPLE_W(SAMPLE_W), .L0_W(L0_W)) u_l0 (
    .clk, .rst_n,
    .samples  (samples),
    .in_valid (all_valid),
    .baseline (baseline),
    .shift    (l0_shift),
    .l0       (l0),
    .l0_valid (l0_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) l0_marker <= 1'b0;
    else        l0_marker <= bond_req;
  end

  // ring buffer, packetizer, read-out buffer
  logic [CH*SAMPLE_W-1:0] blk_data;
  logic                   blk_valid, blk_last, blk_ready, busy;
  logic [31:0]            blk_stamp;
  axis_beat_t             pk_beat;
  logic                   pk_valid, pk_ready;
  logic [$clog2(FIFO_DEPTH):0] fifo_level;

  ring_buffer #(.CH(CH), .SAMPLE_W(SAMPLE_W), .DEPTH(DEPTH), .TS_W(32)) u_ring (
    .clk, .rst_n,
    .wr_data   (samples),
    .wr_en     (all_valid),
    .trigger   (trigger),
    .pre_trig  (pre_trig),
    .blk_len   (blk_len),
    .out_data  (blk_data),
    .out_valid (blk_valid),
    .out_last  (blk_last),
    .out_ready (blk_ready),
    .out_stamp (blk_stamp),
    .busy      (busy),
    .drop_count(drop_count)
  );

  event_packetizer #(.CH(CH), .SAMPLE_W(SAMPLE_W), .TS_W(32)) u_pack (
    .clk, .rst_n,
    .board_id (board_id),
    .in_data  (blk_data),
    .in_valid (blk_valid),
    .in_last  (blk_last),
    .in_stamp (blk_stamp),
    .in_ready (blk_ready),
    .m_beat   (pk_beat),
    .m_valid  (pk_valid),
    .m_ready  (pk_ready)
  );

  readout_buffer #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .s_beat  (pk_beat),
    .s_valid (pk_valid),
    .s_ready (pk_ready),
    .m_beat  (ro_beat),
    .m_valid (ro_valid),
    .m_ready (ro_ready),
    .level   (fifo_level)
  );

endmodule
