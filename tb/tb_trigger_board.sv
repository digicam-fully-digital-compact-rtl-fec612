// tb_trigger_board: bonding, equalized patch trigger and read-out funnel.
//
// The nine ADC-board lanes reach the board after 2 clocks, the two neighbour
// lanes after 30 and 45 clocks (link models). After bonding, a cluster of L0
// values is sent in one clock, split between an ADC board and the lower
// neighbour lane; only if both halves meet in the same clock does the patch
// sum pass the threshold. The bench checks that `l1` fires exactly once,
// TARGET + 2 edges after the cluster was sent, with the hit map of a
// hexagonal-distance reference, in 7- and in 19-triplet mode. It also checks
// the onward copy of the L0 lanes and that packets offered on two read-out
// ports come out of the 10GbE stream whole.
module tb_trigger_board;
  import digicam_pkg::*;
  localparam int NB = 9, TARGET = 64;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0][127:0] l0_in, cl_l0;
  logic [NB-1:0] l0_marker;
  logic [1:0][223:0] nb_in;
  logic [1:0] nb_marker;
  logic bond_start = 0, bonded, bond_error, trig_enable = 0, l1;
  patch_mode_e mode;
  logic [12:0] threshold;
  logic [143:0] hit_map;
  axis_beat_t [NB-1:0] ro_beat;
  logic [NB-1:0] ro_valid, ro_ready;
  axis_beat_t eth_beat;
  logic eth_valid, eth_ready;
  logic fl_busy, fl_done, fl_prot_err, fl_cs_n, fl_sck;
  logic [3:0] fl_dq_o, fl_dq_oe;
  int checks = 0, failures = 0;

  trigger_board dut (.*, .fl_pg_we(1'b0), .fl_pg_addr(8'd0), .fl_pg_data(8'd0), .fl_start(1'b0),
                     .fl_op(1'b0), .fl_addr(32'd0), .fl_len(9'd0), .fl_dq_i(4'd0));
  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // sources and link models
  logic [7:0] cellv [16][16];           // area to send (local and overlap cells)
  logic       send, mark;
  logic [NB-1:0][128:0] lpipe [2];
  logic [1:0][224:0]    npipe [45];
  logic [NB-1:0][127:0] l0_src;
  logic [1:0][223:0]    nb_src;
  int edge_no = 0;

  always_comb begin
    l0_src = '0; nb_src = '0;
    if (send) begin
      for (int r = 2; r < 14; r++) for (int c = 2; c < 14; c++)
        l0_src[((r-2)/4)*3 + (c-2)/4][(((r-2)%4)*4 + (c-2)%4)*8 +: 8] = cellv[r][c];
      for (int k = 0; k < 28; k++) nb_src[0][k*8 +: 8] = cellv[14 + k/14][2 + k%14];
      for (int k = 0; k < 24; k++) nb_src[1][k*8 +: 8] = cellv[2 + k/2][14 + k%2];
    end
  end

  always @(posedge clk) begin
    edge_no <= edge_no + 1;
    for (int b = 0; b < NB; b++) lpipe[0][b] <= {mark, l0_src[b]};
    lpipe[1] <= lpipe[0];
    npipe[0] <= {{mark, nb_src[1]}, {mark, nb_src[0]}};
    for (int k = 1; k < 45; k++) npipe[k] <= npipe[k-1];
  end
  always_comb begin
    for (int b = 0; b < NB; b++) begin
      l0_in[b] = lpipe[1][b][127:0]; l0_marker[b] = lpipe[1][b][128];
    end
    nb_in[0] = npipe[29][0][223:0]; nb_marker[0] = npipe[29][0][224];
    nb_in[1] = npipe[44][1][223:0]; nb_marker[1] = npipe[44][1][224];
  end

  function automatic logic [143:0] ref_hits(input patch_mode_e m, input int th);
    logic [143:0] h = '0;
    for (int i = 0; i < 12; i++) for (int j = 0; j < 12; j++) begin
      int s = 0;
      for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
        int dr = r - (i + 2), dc = c - (j + 2), sm = dr + dc;
        bit phantom = (r < 2 || c < 2);
        if (!phantom && ((dr < 0 ? -dr : dr) + (dc < 0 ? -dc : dc) + (sm < 0 ? -sm : sm)) / 2 <= (m == PATCH7 ? 1 : 2))
          s += cellv[r][c];
      end
      h[i*12 + j] = (s > th);
    end
    return h;
  endfunction

  task automatic fire(input patch_mode_e m, input int th);
    int s_edge, n_l1, l1_edge;
    logic [143:0] e, hm;
    mode = m; threshold = 13'(th);
    e = ref_hits(m, th);
    @(negedge clk); send = 1; s_edge = edge_no;
    @(negedge clk); send = 0;
    n_l1 = 0; l1_edge = -1; hm = '0;
    repeat (TARGET + 20) begin
      @(negedge clk);
      if (l1) begin n_l1++; l1_edge = edge_no - 1; hm = hit_map; end
    end
    check(n_l1 == 1, $sformatf("mode %0d: l1 fired %0d times", m, n_l1));
    check(l1_edge == s_edge + TARGET + 2, $sformatf("mode %0d: l1 after edge %0d, sent at %0d", m, l1_edge, s_edge));
    check(hm == e && (|e), $sformatf("mode %0d: hit map %0d bits, reference %0d", m, $countones(hm), $countones(e)));
  endtask

  initial begin
    for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) cellv[r][c] = '0;
    send = 0; mark = 0; mode = PATCH7; threshold = 13'd650; eth_ready = 1;
    ro_beat = '0; ro_valid = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (50) @(posedge clk);
    // bonding
    @(negedge clk); mark = 1; bond_start = 1;
    @(negedge clk); mark = 0; bond_start = 0;
    repeat (60) @(posedge clk); #1;
    check(bonded && !bond_error, "bonded");
    check(dut.u_eq_nb.latency[0] == 7'd30 && dut.u_eq_nb.latency[1] == 7'd45 && dut.u_eq_loc.latency[4] == 7'd2,
          "measured link latencies");
    trig_enable = 1;
    // cluster around local cell (13,5), two of its cells in the lower overlap rows
    foreach (cellv[r, c]) begin
      int dr, dc, sm;
      dr = r - 13; dc = c - 5; sm = dr + dc;
      if (((dr < 0 ? -dr : dr) + (dc < 0 ? -dc : dc) + (sm < 0 ? -sm : sm)) / 2 <= 1) cellv[r][c] = 8'd100;
    end
    fire(PATCH7, 650);
    check(ref_hits(PATCH7, 650) == (144'b1 << 135), "reference: single patch at (13,5)");
    fire(PATCH19, 650);
    // add a bright cell on the right overlap columns
    cellv[6][15] = 8'd250; cellv[7][14] = 8'd250;
    fire(PATCH19, 480);
    // onward copy
    @(negedge clk);
    begin
      logic [NB-1:0][127:0] l0_prev;
      l0_prev = l0_in;
      @(negedge clk);
      check(cl_l0 == l0_prev, "Camera Link copy of L0 lanes");
    end
    // read-out: two packets on ports 2 and 7
    begin
      int got2 = 0, got7 = 0, words = 0;
      ro_valid[2] = 1; ro_beat[2] = '{tdata: 64'h2222, tlast: 1'b0};
      ro_valid[7] = 1; ro_beat[7] = '{tdata: 64'h7777, tlast: 1'b1};
      for (int c = 0; c < 20; c++) begin
        @(posedge clk);
        if (eth_valid && eth_ready) begin
          words++;
          if (eth_beat.tdata == 64'h2222) got2++;
          if (eth_beat.tdata == 64'h7777) got7++;
        end
        #1;
        if (ro_valid[2] && got2 == 1) ro_beat[2].tlast = 1'b1;
        if (got2 == 2) ro_valid[2] = 0;
        if (got7 == 1) ro_valid[7] = 0;
      end
      check(got2 == 2 && got7 == 1 && words == 3, $sformatf("eth words %0d (%0d from 2, %0d from 7)", words, got2, got7));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
