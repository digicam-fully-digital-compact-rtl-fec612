// tb_digicam_crate: a full microcrate (9 ADC boards x 48 lanes, trigger board)
// at its default sizes, from converter lanes to the 10GbE stream.
//
// 432 lane models send training frames, then pixel samples: a pedestal of
// about 1000 counts with small variations, and at chosen frames a "shower" of
// bright pixels. The neighbour-crate lanes arrive through 20- and 35-clock
// links and carry nothing but their bonding markers. The bench:
//   - waits for every lane to lock, then bonds the trigger lanes;
//   - sends a 3-triplet shower in 7-triplet mode: L1 must fire once, a fixed
//     70 clocks after the shower frame was sent, and every ADC board must
//     deliver through the 10GbE stream, in round-robin board order, a packet
//     holding the programmed block (16 samples from 80 before the trigger);
//   - sends a second shower while the boards are still reading out, which
//     every board must drop and count;
//   - switches to 19-triplet mode and sends a 5-triplet line that only a
//     19-triplet patch can see (the threshold is above any 7-patch sum);
//   - holds the 10GbE ready low at random throughout (back-pressure);
//   - switches the lanes to PRBS and measures the BER of one lane with two
//     injected bit errors;
//   - erases and programs a multi-boot page of the trigger board's flash and
//     has a golden-area write refused.
// Each of these mechanisms is counted; one that never happened is a failure.
module tb_digicam_crate;
  import digicam_pkg::*;
  localparam int NBRD = 9, CH = 48, PRE = 80, LEN = 16;
  localparam logic [31:0] MB = 32'h0155_0000;

  logic clk = 0, rst_n = 0;
  logic [NBRD-1:0][CH-1:0][15:0] rx_word;
  logic resync = 0, prbs_mode = 0, ber_clear = 0, bond_start = 0, trig_enable = 0;
  logic [NBRD-1:0][CH-1:0] locked;
  logic [3:0] ber_board;
  logic [5:0] ber_sel;
  logic [47:0] ber_bits, ber_errors;
  logic [11:0] baseline;
  logic [2:0] l0_shift;
  logic bonded, bond_error, l1;
  patch_mode_e mode;
  logic [12:0] threshold;
  logic [143:0] hit_map;
  logic [1:0][223:0] nb_in;
  logic [1:0] nb_marker;
  logic [NBRD-1:0][127:0] cl_l0;
  logic [9:0] pre_trig;
  logic [10:0] blk_len;
  axis_beat_t eth_beat;
  logic eth_valid, eth_ready;
  logic [NBRD-1:0][15:0] drop_count;
  logic fl_pg_we = 0, fl_start = 0, fl_op = 0;
  logic [7:0] fl_pg_addr = 0, fl_pg_data = 0;
  logic [31:0] fl_addr = 0;
  logic [8:0] fl_len = 0;
  logic fl_busy, fl_done, fl_prot_err, fl_cs_n, fl_sck;
  logic [3:0] fl_dq_o, fl_dq_oe, fl_dq_i;
  int checks = 0, failures = 0;

  digicam_crate dut (.*);
  qspi_flash_model #(.BASE(MB), .SIZE(1024)) flash (
    .clk, .cs_n(fl_cs_n), .sck(fl_sck), .dq_o(fl_dq_o), .dq_oe(fl_dq_oe), .dq_i(fl_dq_i));
  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- sources
  int frame = 0;                       // frame sent at the next edge
  always @(posedge clk) frame <= frame + 1;
  int f_shower [3] = '{-1, -1, -1};    // frames of the three showers

  // triplet cell (r,c) of the trigger area holding board b, channel ch
  function automatic bit in_shower(input int k, input int b, input int ch);
    int t, r, c;
    t = ch / 3;
    r = 2 + 4 * (b / 3) + t / 4;
    c = 2 + 4 * (b % 3) + t % 4;
    if (k < 2) return r == 6 && c >= 4 && c <= 6;        // 3 triplets in a row
    return r == 9 && c >= 7 && c <= 11;                   // 5 triplets in a row
  endfunction

  function automatic logic [11:0] smp(input int b, input int ch, input int f);
    int v;
    v = 1000 + (f * 7 + ch * 13 + b * 31) % 20;
    for (int k = 0; k < 3; k++) if (f == f_shower[k] && in_shower(k, b, ch)) v += 700;
    return 12'(v);
  endfunction

  logic [1:0] lane_mode;
  logic       flip_one;                                  // bit error on board 3 lane 10
  for (genvar b = 0; b < NBRD; b++) begin : g_b
    for (genvar c = 0; c < CH; c++) begin : g_c
      fadc_lane_model #(.OFFSET((b * 7 + c * 3) % 16)) u_lane (
        .clk, .mode(lane_mode), .sample(smp(b, c, frame)),
        .flip(flip_one && b == 3 && c == 10), .rx_word(rx_word[b][c]));
    end
  end

  // neighbour links: markers only, 20 and 35 clocks
  logic [1:0] npipe [35];
  logic       nmark = 0;
  always @(posedge clk) begin
    npipe[0] <= {nmark, nmark};
    for (int k = 1; k < 35; k++) npipe[k] <= npipe[k-1];
  end
  assign nb_in     = '0;
  assign nb_marker = {npipe[34][1], npipe[19][0]};

  // ---------------------------------------------------------------- monitors
  int l1_edges [$];
  always @(negedge clk) if (rst_n && l1) l1_edges.push_back(frame - 1);   // edge just passed

  axis_beat_t words [$];
  int n_stall = 0;
  always @(posedge clk) begin
    if (rst_n && eth_valid && eth_ready) words.push_back(eth_beat);
    if (rst_n && eth_valid && !eth_ready) n_stall++;
  end
  always @(negedge clk) eth_ready = 1'($urandom_range(3) != 0);

  // parse the 10GbE words into packets and check them against the samples
  task automatic check_packets(input int evno, input int t_edge, output int n_ok, output bit order_ok);
    int pos, first;
    first = t_edge - 5 - PRE;
    pos = 0; n_ok = 0; order_ok = 1;
    for (int p = 0; p < NBRD; p++) begin
      int b;
      bit ok;
      if (pos + 1 + 9 * LEN > words.size()) break;
      b = int'(words[pos].tdata[63:56]);
      ok = (words[pos].tdata[55:32] == 24'(evno)) && !words[pos].tlast;
      if (b != p) order_ok = 0;
      for (int s = 0; s < LEN; s++) begin
        logic [575:0] w;
        for (int k = 0; k < 9; k++) w[k*64 +: 64] = words[pos + 1 + 9*s + k].tdata;
        for (int c = 0; c < CH; c++) if (w[c*12 +: 12] != smp(b, c, first + s)) ok = 0;
      end
      if (!words[pos + 9 * LEN].tlast) ok = 0;
      if (ok) n_ok++;
      else $display("packet %0d (board %0d, event %0d) wrong", p, b, evno);
      pos += 1 + 9 * LEN;
    end
    repeat (pos) void'(words.pop_front());
  endtask

  // ---------------------------------------------------------------- flash
  task automatic flash_op(input bit o, input logic [31:0] a, input int n);
    @(negedge clk);
    fl_op = o; fl_addr = a; fl_len = 9'(n); fl_start = 1;
    @(negedge clk) fl_start = 0;
    while (fl_busy) @(negedge clk);
  endtask

  // ---------------------------------------------------------------- sequence
  int n_locked_ok = 0, n_bond = 0, n_trig7 = 0, n_trig19 = 0, n_readout = 0, n_rr = 0,
      n_drop = 0, n_ber = 0, n_flash = 0, n_prot = 0;

  initial begin
    int t1, n_ok;
    bit order_ok;
    lane_mode = 2'd0; flip_one = 0; ber_board = 4'd3; ber_sel = 6'd10;
    baseline = 12'd1000; l0_shift = 3'd2; mode = PATCH7; threshold = 13'd600;
    pre_trig = 10'(PRE); blk_len = 11'(LEN);
    for (int k = 0; k < 35; k++) npipe[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (40) @(posedge clk);
    check(&locked, "all 432 lanes locked");
    if (&locked) n_locked_ok++;
    @(negedge clk) lane_mode = 2'd1;
    repeat (1100) @(posedge clk);            // fill the ring buffers once round
    // bonding: common sync to all boards and neighbour links
    @(negedge clk); bond_start = 1; nmark = 1;
    @(negedge clk); bond_start = 0; nmark = 0;
    repeat (80) @(posedge clk); #1;
    check(bonded && !bond_error, "trigger lanes bonded");
    if (bonded) n_bond++;
    trig_enable = 1;
    repeat (20) @(posedge clk);

    // shower 1, 7-triplet mode
    @(negedge clk); f_shower[0] = frame;
    repeat (100) @(posedge clk);
    // shower 2 while the boards are still busy
    @(negedge clk); f_shower[1] = frame;
    repeat (120) @(posedge clk);
    check(l1_edges.size() == 2, $sformatf("two L1 triggers (got %0d)", l1_edges.size()));
    if (l1_edges.size() >= 1) begin
      check(l1_edges[0] == f_shower[0] + 70, $sformatf("L1 %0d clocks after the shower", l1_edges[0] - f_shower[0]));
      if (l1_edges[0] == f_shower[0] + 70) n_trig7++;
      check(hit_map == '0, "hit map clear after the shower");
    end
    wait (words.size() >= NBRD * (1 + 9 * LEN));
    repeat (20) @(posedge clk);
    check(words.size() == NBRD * (1 + 9 * LEN), $sformatf("one packet per board (%0d words)", words.size()));
    check(drop_count == {NBRD{16'd1}}, "second trigger dropped on every board");
    if (drop_count == {NBRD{16'd1}}) n_drop++;
    check_packets(0, l1_edges[0] + 1, n_ok, order_ok);
    check(n_ok == NBRD, $sformatf("%0d of %0d packets correct", n_ok, NBRD));
    check(order_ok, "packets in round-robin board order");
    if (n_ok == NBRD) n_readout++;
    if (order_ok) n_rr++;

    // shower 3 in 19-triplet mode, threshold above any 7-patch sum
    @(negedge clk); mode = PATCH19; threshold = 13'd1000;
    repeat (10) @(posedge clk);
    l1_edges.delete();
    @(negedge clk); f_shower[2] = frame;
    repeat (100) @(posedge clk);
    check(l1_edges.size() == 1 && l1_edges[0] == f_shower[2] + 70, "19-triplet trigger");
    if (l1_edges.size() == 1) n_trig19++;
    wait (words.size() >= NBRD * (1 + 9 * LEN));
    repeat (20) @(posedge clk);
    if (l1_edges.size() == 1) begin
      check_packets(1, l1_edges[0] + 1, n_ok, order_ok);
      check(n_ok == NBRD && order_ok, "second event read out");
    end

    // PRBS bit error rate on board 3, lane 10
    @(negedge clk); lane_mode = 2'd2; prbs_mode = 1;
    repeat (5) @(posedge clk);
    @(negedge clk) ber_clear = 1; @(negedge clk) ber_clear = 0;
    repeat (30) @(posedge clk);
    @(negedge clk) flip_one = 1; @(negedge clk) flip_one = 0;
    repeat (30) @(posedge clk);
    @(negedge clk) flip_one = 1; @(negedge clk) flip_one = 0;
    repeat (30) @(posedge clk); #1;
    check(ber_errors == 48'd6 && ber_bits > 48'd1000, $sformatf("BER: %0d errors in %0d bits", ber_errors, ber_bits));
    if (ber_errors == 48'd6) n_ber++;
    ber_sel = 6'd11; #1;
    check(ber_errors == 48'd0, "clean lane has no errors");

    // reconfiguration flash
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); fl_pg_we = 1; fl_pg_addr = 8'(i); fl_pg_data = 8'(8'hA0 + i);
    end
    @(negedge clk) fl_pg_we = 0;
    flash_op(1'b1, MB, 0);
    flash_op(1'b0, MB + 32'h40, 16);
    begin
      bit ok = 1;
      for (int i = 0; i < 16; i++) if (flash.mem[32'h40 + i] != 8'(8'hA0 + i)) ok = 0;
      check(ok && flash.n_erase == 1 && flash.n_prog == 1, "multi-boot page written");
      if (ok) n_flash++;
    end
    @(negedge clk); fl_op = 0; fl_addr = 32'h0000_0100; fl_len = 9'd16; fl_start = 1;
    @(negedge clk) fl_start = 0;
    repeat (20) @(posedge clk); #1;
    check(n_prot == 1 && flash.n_prog == 1, "golden-area write refused");

    // mechanism coverage
    check(n_stall > 0, "10GbE back-pressure happened");
    check(n_locked_ok && n_bond && n_trig7 && n_trig19 && n_readout && n_rr && n_drop && n_ber && n_flash && n_prot,
          "every mechanism happened");
    $display("mechanisms: lock=%0d bond=%0d trig7=%0d trig19=%0d readout=%0d roundrobin=%0d drop=%0d ber=%0d flash=%0d protect=%0d stall=%0d",
             n_locked_ok, n_bond, n_trig7, n_trig19, n_readout, n_rr, n_drop, n_ber, n_flash, n_prot, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the golden-area refusal pulse is one clock long: catch it
  always @(posedge clk) if (fl_prot_err) n_prot <= n_prot + 1;
endmodule
