// trigger_board: FPGA datapath of the DigiCam trigger board of one crate.
//
// The board receives, on every clock, the L0 triplet values of its N_BOARDS
// ADC boards (one lane per board, 16 triplets) and the overlap triplets sent by
// the neighbouring crates (N_NB lanes). Both groups pass through delay
// equalizers, bonded together at start-up, so that every lane reaches the
// trigger with the same fixed latency (TARGET clocks after it was sent). The
// equalized lanes are placed on the 16 x 16 trigger area:
//   ADC board b, triplet t -> row 2 + 4*(b/3) + t/4, col 2 + 4*(b%3) + t%4
//   neighbour lane 0 triplet k (k < 28) -> row 14 + k/14, col 2 + k%14
//   neighbour lane 1 triplet k (k < 24) -> row 2 + k/2,  col 14 + k%2
//   all other cells are phantom and read as 0.
// The patch trigger forms the L1 decision, which is sent to all ADC boards of
// the crate once bonding is done and `trig_enable` is set. The raw local L0
// lanes are also sent on to the neighbouring crates over the Camera Link
// (`cl_l0`). The nine read-out streams are funnelled round-robin into the one
// 10GbE output stream. A quad-SPI flash writer serves reconfiguration.
//
// Timing: `l1` is high TARGET + 3 clocks after the ADC boards sent the L0
// values that caused it.
//
// The board's tasks (L1 from local and neighbour L0, distribution of the
// decision, collection of event data, 10GbE link) are the paper's; the area
// placement and the lane grouping are this design's choices.
module trigger_board
  import digicam_pkg::*;
#(
  parameter int unsigned N_BOARDS = N_ADC_BOARDS,
  parameter int unsigned N_TRI    = N_TRIPLETS,
  parameter int unsigned N_NB     = N_NB_LANES,
  parameter int unsigned NB_TRI   = NB_TRIPLETS,
  parameter int unsigned TARGET   = TRIG_DELAY,
  parameter int unsigned EQ_DEPTH = 128
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // L0 lanes from the ADC boards (backplane)
  input  logic [N_BOARDS-1:0][N_TRI*L0_W-1:0]  l0_in,
  input  logic [N_BOARDS-1:0]                  l0_marker,
  // overlap lanes from the neighbouring crates (Camera Link)
  input  logic [N_NB-1:0][NB_TRI*L0_W-1:0]     nb_in,
  input  logic [N_NB-1:0]                      nb_marker,
  output logic [N_BOARDS-1:0][N_TRI*L0_W-1:0]  cl_l0,
  // bonding and trigger control
  input  logic                                 bond_start,
  output logic                                 bonded,
  output logic                                 bond_error,
  input  logic                                 trig_enable,
  input  patch_mode_e                          mode,
  input  logic [L0_W+4:0]                      threshold,
  output logic                                 l1,
  output logic [LOCAL_SIDE*LOCAL_SIDE-1:0]     hit_map,
  // read-out streams from the ADC boards and 10GbE output
  input  axis_beat_t [N_BOARDS-1:0]            ro_beat,
  input  logic       [N_BOARDS-1:0]            ro_valid,
  output logic       [N_BOARDS-1:0]            ro_ready,
  output axis_beat_t                           eth_beat,
  output logic                                 eth_valid,
  input  logic                                 eth_ready,
  // configuration flash
  input  logic                                 fl_pg_we,
  input  logic [7:0]                           fl_pg_addr,
  input  logic [7:0]                           fl_pg_data,
  input  logic                                 fl_start,
  input  logic                                 fl_op,
  input  logic [31:0]                          fl_addr,
  input  logic [8:0]                           fl_len,
  output logic                                 fl_busy,
  output logic                                 fl_done,
  output logic                                 fl_prot_err,
  output logic                                 fl_cs_n,
  output logic                                 fl_sck,
  output logic [3:0]                           fl_dq_o,
  output logic [3:0]                           fl_dq_oe,
  input  logic [3:0]                           fl_dq_i
);

  localparam int unsigned EQ_AW = $clog2(EQ_DEPTH);

  logic [N_BOARDS-1:0][N_TRI*L0_W-1:0]  loc_eq;
  logic [N_NB-1:0][NB_TRI*L0_W-1:0]     nb_eq;
  logic                                 loc_bonded, nb_bonded, loc_err, nb_err;
  logic [N_BOARDS-1:0][EQ_AW-1:0]       loc_lat;
  logic [N_NB-1:0][EQ_AW-1:0]           nb_lat;
  logic [GRID*GRID-1:0][L0_W-1:0]       area;
  logic                                 l1_raw, l1_valid;

  delay_equalizer #(.LANES(N_BOARDS), .W(N_TRI*L0_W), .TARGET(TARGET), .DEPTH(EQ_DEPTH)) u_eq_loc (
    .clk, .rst_n, .bond_start,
    .in_data    (l0_in),
    .lane_marker(l0_marker),
    .out_data   (loc_eq),
    .bonded     (loc_bonded),
    .bond_error (loc_err),
    .latency    (loc_lat)
  );

  delay_equalizer #(.LANES(N_NB), .W(NB_TRI*L0_W), .TARGET(TARGET), .DEPTH(EQ_DEPTH)) u_eq_nb (
    .clk, .rst_n, .bond_start,
    .in_data    (nb_in),
    .lane_marker(nb_marker),
    .out_data   (nb_eq),
    .bonded     (nb_bonded),
    .bond_error (nb_err),
    .latency    (nb_lat)
  );

  assign bonded     = loc_bonded && nb_bonded;
  assign bond_error = loc_err || nb_err;

  // trigger area assembly
  always_comb begin
    area = '0;
    for (int b = 0; b < int'(N_BOARDS); b++)
      for (int t = 0; t < int'(N_TRI); t++)
        area[(GRID_OFS + BOARD_SIDE*(b/3) + t/BOARD_SIDE)*GRID
             + GRID_OFS + BOARD_SIDE*(b%3) + t%BOARD_SIDE] = loc_eq[b][t*L0_W +: L0_W];
    for (int k = 0; k < 28; k++)
      area[(14 + k/14)*GRID + 2 + k%14] = nb_eq[0][k*L0_W +: L0_W];
    for (int k = 0; k < 24; k++)
      area[(2 + k/2)*GRID + 14 + k%2] = nb_eq[N_NB-1][k*L0_W +: L0_W];
  end

  trigger_patch_sum #(.N(GRID), .OFS(GRID_OFS), .LOC(LOCAL_SIDE), .VAL_W(L0_W)) u_trig (
    .clk, .rst_n,
    .area       (area),
    .area_valid (1'b1),
    .mode       (mode),
    .threshold  (threshold),
    .hit        (hit_map),
    .l1         (l1_raw),
    .out_valid  (l1_valid)
  );

  assign l1 = l1_raw && l1_valid && bonded && trig_enable;

  // onward copy of the local L0 lanes to the neighbouring crates
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cl_l0 <= '0;
    else        cl_l0 <= l0_in;
  end

  logic [$clog2(N_BOARDS)-1:0] grant;
  readout_arbiter #(.N(N_BOARDS)) u_arb (
    .clk, .rst_n,
    .s_beat  (ro_beat),
    .s_valid (ro_valid),
    .s_ready (ro_ready),
    .m_beat  (eth_beat),
    .m_valid (eth_valid),
    .m_ready (eth_ready),
    .grant   (grant)
  );

  qspi_flash_writer u_flash (
    .clk, .rst_n,
    .pg_we   (fl_pg_we),
    .pg_addr (fl_pg_addr),
    .pg_data (fl_pg_data),
    .start   (fl_start),
    .op      (fl_op),
    .addr    (fl_addr),
    .len     (fl_len),
    .busy    (fl_busy),
    .done    (fl_done),
    .prot_err(fl_prot_err),
    .cs_n    (fl_cs_n),
    .sck     (fl_sck),
    .dq_o    (fl_dq_o),
    .dq_oe   (fl_dq_oe),
    .dq_i    (fl_dq_i)
  );

endmodule
