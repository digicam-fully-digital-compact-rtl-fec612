// digicam_crate: one DigiCam microcrate, nine ADC boards and a trigger board.
//
// This is the read-out and trigger electronics of one third of the camera
// (432 pixels). Each ADC board turns 48 converter lanes into samples, keeps
// them in its ring buffer and sends 16 L0 triplet values per clock over the
// backplane to the trigger board. The trigger board equalizes the latency of
// those lanes and of the overlap lanes from the two neighbouring crates,
// computes the 7- or 19-triplet patch trigger and returns the L1 decision to
// all ADC boards, whose triggered blocks come back over the backplane as
// read-out streams and leave the crate through one 10GbE stream.
//
// The backplane (a star with the trigger board at its centre) is modelled as
// direct wires; its slow-control lines and the common clock are not. The
// transceivers, converters, Ethernet cores, processor and flash chip are
// outside this RTL: their signals are ports. `bond_start` plays the part of
// the crate's common sync: it starts the bonding measurement on the trigger
// board and makes every ADC board send its marker in the same clock.
//
// Timing: one clock = one sample period (4 ns at 250 MS/s). From a sample
// entering `rx_word` to `l1`: 2 (aligner) + 1 (L0) + 64 (equalized link) + 3
// (patch trigger) clocks after bonding. The trigger reaches the ring buffers in
// the next clock; `pre_trig` must cover that latency to centre the block.
module digicam_crate
  import digicam_pkg::*;
#(
  parameter int unsigned N_BOARDS = N_ADC_BOARDS,
  parameter int unsigned CH       = N_CHANNELS,
  parameter int unsigned WORD_W   = 16,
  parameter int unsigned DEPTH    = RING_DEPTH,
  parameter int unsigned TARGET   = TRIG_DELAY
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  // converter lanes, per board and channel
  input  logic [N_BOARDS-1:0][CH-1:0][WORD_W-1:0]      rx_word,
  input  logic                                         resync,
  output logic [N_BOARDS-1:0][CH-1:0]                  locked,
  // bit error rate test (same settings on all boards, counters of board ber_board)
  input  logic                                         prbs_mode,
  input  logic                                         ber_clear,
  input  logic [$clog2(N_BOARDS)-1:0]                  ber_board,
  input  logic [$clog2(CH)-1:0]                        ber_sel,
  output logic [47:0]                                  ber_bits,
  output logic [47:0]                                  ber_errors,
  // L0 / L1 trigger settings
  input  logic [SAMPLE_W-1:0]                          baseline,
  input  logic [2:0]                                   l0_shift,
  input  logic                                         bond_start,
  output logic                                         bonded,
  output logic                                         bond_error,
  input  logic                                         trig_enable,
  input  patch_mode_e                                  mode,
  input  logic [L0_W+4:0]                              threshold,
  output logic                                         l1,
  output logic [LOCAL_SIDE*LOCAL_SIDE-1:0]             hit_map,
  // Camera Link trigger exchange with the neighbouring crates
  input  logic [N_NB_LANES-1:0][NB_TRIPLETS*L0_W-1:0]  nb_in,
  input  logic [N_NB_LANES-1:0]                        nb_marker,
  output logic [N_BOARDS-1:0][(CH/3)*L0_W-1:0]         cl_l0,
  // read-out block settings and 10GbE output stream
  input  logic [$clog2(DEPTH)-1:0]                     pre_trig,
  input  logic [$clog2(DEPTH):0]                       blk_len,
  output axis_beat_t                                   eth_beat,
  output logic                                         eth_valid,
  input  logic                                         eth_ready,
  output logic [N_BOARDS-1:0][15:0]                    drop_count,
  // trigger board configuration flash
  input  logic                                         fl_pg_we,
  input  logic [7:0]                                   fl_pg_addr,
  input  logic [7:0]                                   fl_pg_data,
  input  logic                                         fl_start,
  input  logic                                         fl_op,
  input  logic [31:0]                                  fl_addr,
  input  logic [8:0]                                   fl_len,
  output logic                                         fl_busy,
  output logic                                         fl_done,
  output logic                                         fl_prot_err,
  output logic                                         fl_cs_n,
  output logic                                         fl_sck,
  output logic [3:0]                                   fl_dq_o,
  output logic [3:0]                                   fl_dq_oe,
  input  logic [3:0]                                   fl_dq_i
);

  logic [N_BOARDS-1:0][(CH/3)*L0_W-1:0] l0;
  logic [N_BOARDS-1:0]                  l0_valid, l0_marker;
  logic [N_BOARDS-1:0][47:0]            bits, errs;
  axis_beat_t [N_BOARDS-1:0]            ro_beat;
  logic [N_BOARDS-1:0]                  ro_valid, ro_ready;

  for (genvar b = 0; b < int'(N_BOARDS); b++) begin : g_adc
    adc_board #(.CH(CH), .WORD_W(WORD_W), .DEPTH(DEPTH)) u_adc (
      .clk, .rst_n,
      .board_id   (8'(b)),
      .rx_word    (rx_word[b]),
      .resync     (resync),
      .locked     (locked[b]),
      .prbs_mode  (prbs_mode),
      .ber_clear  (ber_clear),
      .ber_sel    (ber_sel),
      .ber_bits   (bits[b]),
      .ber_errors (errs[b]),
      .baseline   (baseline),
      .l0_shift   (l0_shift),
      .bond_req   (bond_start),
      .l0         (l0[b]),
      .l0_valid   (l0_valid[b]),
      .l0_marker  (l0_marker[b]),
      .trigger    (l1),
      .pre_trig   (pre_trig),
      .blk_len    (blk_len),
      .ro_beat    (ro_beat[b]),
      .ro_valid   (ro_valid[b]),
      .ro_ready   (ro_ready[b]),
      .drop_count (drop_count[b])
    );
  end

  assign ber_bits   = bits[ber_board];
  assign ber_errors = errs[ber_board];

  trigger_board #(.N_BOARDS(N_BOARDS), .N_TRI(CH/3), .TARGET(TARGET)) u_trg (
    .clk, .rst_n,
    .l0_in       (l0),
    .l0_marker   (l0_marker),
    .nb_in       (nb_in),
    .nb_marker   (nb_marker),
    .cl_l0       (cl_l0),
    .bond_start  (bond_start),
    .bonded      (bonded),
    .bond_error  (bond_error),
    .trig_enable (trig_enable && (&l0_valid)),
    .mode        (mode),
    .threshold   (threshold),
    .l1          (l1),
    .hit_map     (hit_map),
    .ro_beat     (ro_beat),
    .ro_valid    (ro_valid),
    .ro_ready    (ro_ready),
    .eth_beat    (eth_beat),
    .eth_valid   (eth_valid),
    .eth_ready   (eth_ready),
    .fl_pg_we, .fl_pg_addr, .fl_pg_data, .fl_start, .fl_op, .fl_addr, .fl_len,
    .fl_busy, .fl_done, .fl_prot_err, .fl_cs_n, .fl_sck, .fl_dq_o, .fl_dq_oe, .fl_dq_i
  );

endmodule
