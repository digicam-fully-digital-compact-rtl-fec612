// tb_adc_board: one ADC board with six channels, end to end.
//
// Six lane models with different bit offsets send training frames, then
// samples that are a known function of channel and frame number. The bench
// checks that all lanes lock, that the two L0 values of every data frame are
// correct, that the bonding marker comes out one clock after `bond_req`, and
// that two triggers each produce a read-out packet whose header and samples
// are the block that starts `pre_trig` frames before the newest frame written
// (frame T-5 at trigger edge T, from the lane, aligner and ring latencies).
// It then switches the lanes to PRBS and checks the BER counters of a clean
// lane and of a lane with injected bit errors.
module tb_adc_board;
  import digicam_pkg::*;
  localparam int CH = 6, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  logic [CH-1:0][15:0] rx_word;
  logic resync = 0, prbs_mode = 0, ber_clear = 0, bond_req = 0, trigger = 0;
  logic [CH-1:0] locked;
  logic [2:0] ber_sel;
  logic [47:0] ber_bits, ber_errors;
  logic [11:0] baseline;
  logic [2:0] l0_shift;
  logic [15:0] l0;
  logic l0_valid, l0_marker;
  logic [5:0] pre_trig;
  logic [6:0] blk_len;
  axis_beat_t ro_beat;
  logic ro_valid, ro_ready;
  logic [15:0] drop_count;
  int checks = 0, failures = 0;

  adc_board #(.CH(CH), .DEPTH(DEPTH), .FIFO_DEPTH(64)) dut (.*, .board_id(8'd7));
  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int frame = 0;                       // frame sent at the next edge
  logic [1:0] mode [CH];
  logic [CH-1:0] flip;
  always @(posedge clk) frame <= frame + 1;

  function automatic logic [11:0] smp(input int ch, input int f);
    return 12'((f * 13 + ch * 301 + (f * ch) % 97) % 4096);
  endfunction

  for (genvar c = 0; c < CH; c++) begin : g_lane
    fadc_lane_model #(.OFFSET((c * 5) % 16)) u_lane (
      .clk, .mode(mode[c]), .sample(smp(c, frame)), .flip(flip[c]), .rx_word(rx_word[c]));
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // L0 monitor: after edge e, l0 belongs to frame e-4 (edge numbers = frame)
  int first_data = 1 << 30, l0_checked = 0;
  always @(negedge clk) begin
    if (rst_n && l0_valid && !prbs_mode && frame - 5 >= first_data + 2) begin
      int f;
      f = frame - 5;   // frame counter already advanced at the last edge
      for (int k = 0; k < CH/3; k++) begin
        int v;
        v = int'(smp(3*k, f)) + int'(smp(3*k+1, f)) + int'(smp(3*k+2, f)) - 3 * int'(baseline);
        v = v >>> l0_shift;
        v = v < 0 ? 0 : v > 255 ? 255 : v;
        checks++; l0_checked++;
        if (l0[k*8 +: 8] != 8'(v)) begin
          failures++;
          if (failures < 10) $display("frame %0d triplet %0d: L0 %0d expected %0d", f, k, l0[k*8 +: 8], v);
        end
      end
    end
  end

  // read-out sink
  axis_beat_t got [$];
  always @(posedge clk) if (rst_n && ro_valid && ro_ready) got.push_back(ro_beat);

  task automatic trigger_and_check(input int pre, input int len, input int evno);
    int t_edge, first;
    pre_trig = 6'(pre); blk_len = 7'(len);
    @(negedge clk);
    trigger = 1;
    t_edge = frame;                    // edge that samples the trigger
    @(negedge clk);
    trigger = 0;
    first = t_edge - 5 - pre;
    got.delete();
    repeat (len * 3 + 40) @(posedge clk);
    check(got.size() == 1 + 2 * len, $sformatf("packet of %0d words (exp %0d)", got.size(), 1 + 2 * len));
    if (got.size() == 1 + 2 * len) begin
      check(got[0].tdata[63:56] == 8'd7 && got[0].tdata[55:32] == 24'(evno), "header board/event");
      for (int s = 0; s < len; s++) begin
        logic [127:0] w;
        w = {got[1 + 2*s + 1].tdata, got[1 + 2*s].tdata};
        for (int c = 0; c < CH; c++)
          check(w[c*12 +: 12] == smp(c, first + s), $sformatf("block sample %0d ch %0d: %h exp %h", s, c, w[c*12 +: 12], smp(c, first + s)));
      end
      check(got[2 * len].tlast && !got[2 * len - 1].tlast, "tlast on last word only");
    end
  endtask

  initial begin
    for (int c = 0; c < CH; c++) mode[c] = 2'd0;
    flip = '0; ro_ready = 1; baseline = 12'd1500; l0_shift = 3'd2; ber_sel = '0;
    pre_trig = '0; blk_len = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (40) @(posedge clk);
    check(&locked, "all lanes locked");
    @(negedge clk);
    first_data = frame;
    for (int c = 0; c < CH; c++) mode[c] = 2'd1;
    repeat (100) @(posedge clk);
    // bonding marker
    @(negedge clk); bond_req = 1; @(posedge clk); #1;
    check(l0_marker, "marker one clock after bond_req");
    @(negedge clk); bond_req = 0; @(posedge clk); #1;
    check(!l0_marker, "marker for one clock only");
    trigger_and_check(10, 5, 0);
    trigger_and_check(30, 12, 1);
    check(l0_checked > 200, "L0 values checked");
    // PRBS test
    @(negedge clk);
    for (int c = 0; c < CH; c++) mode[c] = 2'd2;
    prbs_mode = 1;
    repeat (5) @(posedge clk);
    @(negedge clk) ber_clear = 1; @(negedge clk) ber_clear = 0;
    repeat (50) @(posedge clk);
    ber_sel = 3'd2;
    @(negedge clk) flip[2] = 1; @(negedge clk) flip[2] = 0;
    repeat (20) @(posedge clk);
    @(negedge clk) flip[2] = 1; @(negedge clk) flip[2] = 0;
    repeat (20) @(posedge clk); #1;
    check(ber_errors == 48'd6 && ber_bits > 48'd1000, $sformatf("BER lane 2: %0d errors in %0d bits", ber_errors, ber_bits));
    ber_sel = 3'd4; #1;
    check(ber_errors == 48'd0 && ber_bits > 48'd1000, $sformatf("BER lane 4: %0d errors in %0d bits", ber_errors, ber_bits));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
