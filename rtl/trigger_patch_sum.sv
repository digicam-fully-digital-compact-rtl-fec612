// trigger_patch_sum: systolic 7- or 19-triplet patch trigger of one crate.
//
// The input is the trigger board's calculation area, a GRID x GRID rhombus of
// hexagonal triplet cells, each holding an L0 value: the 12 x 12 local cells at
// rows/cols 2..13, cells at rows 14..15 and cols 14..15 copied from the
// neighbouring crates, and a zero ("phantom") rim at rows/cols 0..1. For every
// local cell taken as a patch centre the block sums the L0 values of the
// patch: the centre and its 6 neighbours (mode PATCH7) or the centre and its
// two rings, 19 cells (mode PATCH19). A patch whose sum exceeds `threshold`
// sets its bit in `hit`; `l1` is the OR of all hits.
//
// Hexagonal neighbourhood in (row, col) cells, rows counted downwards, each
// row shifted half a cell to the left of the row above: the neighbours of
// (r,c) are (r,c+-1), (r-1,c), (r-1,c+1), (r+1,c-1), (r+1,c). A 19-patch
// covers offsets with |dr|<=2, |dc|<=2, |dr+dc|<=2.
//
// Structure (a three-stage pipeline, all cells in parallel, a new area every
// clock): stage 1 forms horizontal run sums of 2..5 cells in every row; stage
// 2 adds the runs of the patch's rows (3 runs for PATCH7, 5 for PATCH19);
// stage 3 compares with the threshold. Latency: `hit`/`l1` belong to the
// area presented LATENCY = 3 clocks earlier.
//
// From the paper: the systolic structure, 7/19-triplet patches, a threshold on
// the patch sum, the 256-cell area with local, overlap and phantom parts,
// centres only in the 144 local cells. The exact placement of the areas, the
// hexagon orientation and the three-stage split are this design's reading.
module trigger_patch_sum
  import digicam_pkg::*;
#(
  parameter int unsigned N     = 16,   // area side
  parameter int unsigned OFS   = 2,    // first local row/col
  parameter int unsigned LOC   = 12,   // local side
  parameter int unsigned VAL_W = 8,
  parameter int unsigned SUM_W = VAL_W + 5
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N*N-1:0][VAL_W-1:0]     area,       // cell (r,c) at index r*N+c
  input  logic                          area_valid,
  input  patch_mode_e                   mode,
  input  logic [SUM_W-1:0]              threshold,
  output logic [LOC*LOC-1:0]            hit,        // centre (i,j) at i*LOC+j
  output logic                          l1,
  output logic                          out_valid
);

  localparam int unsigned LATENCY = 3;

  // stage 1: horizontal run sums, index r*N+c
  logic [N*N-1:0][SUM_W-1:0] run2, run3, run4, run5;
  logic [N*N-1:0][SUM_W-1:0] run2_q, run3_q, run4_q, run5_q;
  logic [LOC*LOC-1:0][SUM_W-1:0] psum, psum_q;
  logic [1:0] vld;
  patch_mode_e mode_q;

  function automatic logic [SUM_W-1:0] val_at(input logic [N*N-1:0][VAL_W-1:0] a,
                                            input int r, input int c);
    if (r < 0 || r >= int'(N) || c < 0 || c >= int'(N)) return '0;
    return SUM_W'(a[r*N + c]);
  endfunction

  always_comb begin
    for (int r = 0; r < int'(N); r++) begin
      for (int c = 0; c < int'(N); c++) begin
        run2[r*N+c] = val_at(area, r, c) + val_at(area, r, c+1);              // c..c+1
        run3[r*N+c] = val_at(area, r, c-1) + val_at(area, r, c) + val_at(area, r, c+1);
        run4[r*N+c] = run3[r*N+c] + val_at(area, r, c+2);                   // c-1..c+2
        run5[r*N+c] = run4[r*N+c] + val_at(area, r, c-2);                   // c-2..c+2
      end
    end
  end

  function automatic logic [SUM_W-1:0] at(input logic [N*N-1:0][SUM_W-1:0] s,
                                          input int r, input int c);
    if (r < 0 || r >= int'(N) || c < 0 || c >= int'(N)) return '0;
    return s[r*N + c];
  endfunction

  // stage 2: patch sums for the local centres
  always_comb begin
    for (int i = 0; i < int'(LOC); i++) begin
      for (int j = 0; j < int'(LOC); j++) begin
        int r, c;
        r = i + int'(OFS);
        c = j + int'(OFS);
        if (mode_q == PATCH7)
          psum[i*LOC+j] = at(run2_q, r-1, c)        // (r-1, c..c+1)
                        + at(run3_q, r,   c)        // (r,   c-1..c+1)
                        + at(run2_q, r+1, c-1);     // (r+1, c-1..c)
        else
          psum[i*LOC+j] = at(run3_q, r-2, c+1)      // (r-2, c..c+2)
                        + at(run4_q, r-1, c)        // (r-1, c-1..c+2)
                        + at(run5_q, r,   c)        // (r,   c-2..c+2)
                        + at(run4_q, r+1, c-1)      // (r+1, c-2..c+1)
                        + at(run3_q, r+2, c-1);     // (r+2, c-2..c)
      end
    end
  end

  // stage 3 comparison
  logic [LOC*LOC-1:0] over;
  always_comb begin
    for (int k = 0; k < int'(LOC*LOC); k++) over[k] = (psum_q[k] > threshold);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run2_q    <= '0;
      run3_q    <= '0;
      run4_q    <= '0;
      run5_q    <= '0;
      psum_q    <= '0;
      hit       <= '0;
      l1        <= 1'b0;
      vld       <= '0;
      mode_q    <= PATCH7;
      out_valid <= 1'b0;
    end else begin
      // stage 1
      run2_q <= run2;
      run3_q <= run3;
      run4_q <= run4;
      run5_q <= run5;
      mode_q <= mode;
      // stage 2
      psum_q <= psum;
      // stage 3
      hit       <= over;
      l1        <= |over;
      vld       <= {vld[0], area_valid};
      out_valid <= vld[1];
    end
  end

endmodule
