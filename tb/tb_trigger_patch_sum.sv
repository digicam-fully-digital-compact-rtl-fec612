// tb_trigger_patch_sum: patch sums checked against hexagonal distance.
//
// Random areas (sparse and dense, with clusters) stream in one per clock with
// the mode switching between 7- and 19-triplet patches. The reference sums,
// for every local centre, all cells within hexagonal distance 1 (PATCH7) or 2
// (PATCH19), distance (|dr| + |dc| + |dr+dc|)/2, and compares with the
// threshold. `hit` and `l1` must match three clocks later.
module tb_trigger_patch_sum;
  import digicam_pkg::*;
  localparam int N = 16, OFS = 2, LOC = 12, LAT = 3, NA = 60;
  logic clk = 0, rst_n = 0;
  logic [N*N-1:0][7:0] area;
  logic area_valid;
  patch_mode_e mode;
  logic [12:0] threshold;
  logic [LOC*LOC-1:0] hit;
  logic l1, out_valid;
  int checks = 0, failures = 0;
  int n7 = 0, n19 = 0, nl1 = 0;

  trigger_patch_sum dut (.*);
  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N*N-1:0][7:0] areas [NA];
  patch_mode_e         modes [NA];
  logic [12:0]         thr   [NA];

  function automatic logic [LOC*LOC-1:0] ref_hits(input logic [N*N-1:0][7:0] a,
                                                 input patch_mode_e m, input logic [12:0] th);
    logic [LOC*LOC-1:0] h = '0;
    int rad = (m == PATCH7) ? 1 : 2;
    for (int i = 0; i < LOC; i++)
      for (int j = 0; j < LOC; j++) begin
        int s = 0;
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++) begin
            int dr = r - (i + OFS), dc = c - (j + OFS), sm = dr + dc;
            if (((dr < 0 ? -dr : dr) + (dc < 0 ? -dc : dc) + (sm < 0 ? -sm : sm)) / 2 <= rad)
              s += a[r*N + c];
          end
        h[i*LOC + j] = (s > th);
      end
    return h;
  endfunction

  initial begin
    for (int k = 0; k < NA; k++) begin
      for (int x = 0; x < N*N; x++)
        areas[k][x] = (k % 3 == 0) ? 8'($urandom_range(40)) : ($urandom_range(9) == 0 ? 8'($urandom) : 8'd0);
      if (k % 4 == 1) begin         // a bright cluster somewhere, also on the border
        int r0, c0;
        r0 = $urandom_range(N-1); c0 = $urandom_range(N-1);
        for (int r = 0; r < N; r++) for (int c = 0; c < N; c++)
          if ((r - r0) * (r - r0) + (c - c0) * (c - c0) <= 2) areas[k][r*N + c] = 8'd200;
      end
      modes[k] = patch_mode_e'(k % 2);
      thr[k]   = (modes[k] == PATCH7) ? 13'($urandom_range(150, 700)) : 13'($urandom_range(300, 1800));
    end
    area = '0; area_valid = 0; mode = PATCH7; threshold = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    fork
      for (int k = 0; k < NA + LAT; k++) begin
        if (k < NA) begin area = areas[k]; mode = modes[k]; area_valid = 1; end
        else area_valid = 0;
        // threshold is applied at stage 3: present it two clocks later
        if (k >= LAT - 1 && k - (LAT - 1) < NA) threshold = thr[k - (LAT - 1)];
        @(posedge clk); #1;
        if (k >= LAT - 1 && k - (LAT - 1) < NA) begin
          int a;
          logic [LOC*LOC-1:0] e;
          a = k - (LAT - 1);
          e = ref_hits(areas[a], modes[a], thr[a]);
          checks++;
          if (hit !== e || l1 !== (|e) || !out_valid) begin
            failures++;
            $display("area %0d mode %0d: hit mismatch (%0d vs %0d bits) l1 %0d", a, modes[a],
                     $countones(hit), $countones(e), l1);
          end
          if (|e) begin nl1++; if (modes[a] == PATCH7) n7++; else n19++; end
        end
      end
    join
    checks++;
    if (n7 == 0 || n19 == 0 || nl1 == NA) begin failures++; $display("coverage: %0d %0d %0d", n7, n19, nl1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
