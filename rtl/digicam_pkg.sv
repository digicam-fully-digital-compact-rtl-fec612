// digicam_pkg: constants and types shared by the DigiCam read-out and trigger
// logic of one microcrate.
//
// A microcrate holds nine ADC boards and one trigger board. Each ADC board
// digitises 48 pixels (12-bit samples at 250 MS/s) and groups them into 16
// trigger triplets. The trigger board works on a 16 x 16 triplet area: the 144
// local triplets of its nine ADC boards, a border of triplets copied from the
// neighbouring crates and a zero-filled ("phantom") rim. These numbers follow
// the paper. The widths of the L0 value, of the AXI-stream readout word and the
// placement of the blocks on the area are this design's own choices.
package digicam_pkg;

  // Crate organisation (paper: 9 ADC boards, 48 channels per board, 16 triplets).
  localparam int unsigned N_ADC_BOARDS    = 9;
  localparam int unsigned N_CHANNELS      = 48;
  localparam int unsigned SAMPLE_W        = 12;
  localparam int unsigned N_TRIPLETS      = N_CHANNELS / 3;   // 16 per board

  // Trigger area (paper: 256 triplets, 144 local).
  localparam int unsigned GRID            = 16;               // 16 x 16 = 256
  localparam int unsigned GRID_OFS        = 2;                // phantom rim rows/cols 0..1
  localparam int unsigned LOCAL_SIDE      = 12;               // 12 x 12 = 144
  localparam int unsigned BOARD_SIDE      = 4;                // 4 x 4 triplets per ADC board

  // Neighbour (overlap) data: rows 14..15 x cols 2..15 (28) from the crate
  // below, rows 2..13 x cols 14..15 (24) from the crate to the right.
  localparam int unsigned N_NB_LANES      = 2;
  localparam int unsigned NB_TRIPLETS     = 28;

  // L0 value of one triplet (own choice: 4 x 8 Gb/s per ADC board carry
  // 128 bits per 4 ns sample period = 8 bits for each of 16 triplets).
  localparam int unsigned L0_W            = 8;

  // Readout word (own choice: 64-bit AXI stream; 48 x 12 bits = 9 words).
  localparam int unsigned AXIS_W          = 64;

  // Trigger latency target (paper: e.g. 256 ns = 64 sample periods).
  localparam int unsigned TRIG_DELAY      = 64;

  // Ring buffer depth (paper: up to 1024 samples, 4 us).
  localparam int unsigned RING_DEPTH      = 1024;

  typedef enum logic {PATCH7 = 1'b0, PATCH19 = 1'b1} patch_mode_e;

  typedef struct packed {
    logic [AXIS_W-1:0] tdata;
    logic              tlast;
  } axis_beat_t;

endpackage
