// tb_ring_buffer: triggered block read-out from the sample ring.
//
// Two channels are written every clock with a known function of the write
// time, into a 64-deep buffer. Triggers with various pre-trigger offsets and
// block lengths are given, with the reader's ready held high or toggled at
// random. Each block must hold exactly blk_len consecutive sample times,
// starting pre_trig samples before the newest one written when the trigger
// came, with out_last on the final beat and the trigger's time stamp. With
// ready held high the block must stream at one sample per clock. A trigger
// during a read-out must be dropped and counted.
module tb_ring_buffer;
  localparam int CH = 2, SW = 12, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  logic [CH*SW-1:0] wr_data, out_data;
  logic wr_en, trigger, out_valid, out_last, out_ready, busy;
  logic [5:0] pre_trig;
  logic [6:0] blk_len;
  logic [31:0] out_stamp;
  logic [15:0] drop_count;
  int checks = 0, failures = 0;
  int t = 0;                        // number of samples written so far

  ring_buffer #(.CH(CH), .SAMPLE_W(SW), .DEPTH(DEPTH)) dut (.*);
  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [CH*SW-1:0] smp(input int time_idx);
    return {12'((time_idx * 7 + 1000) & 12'hFFF), 12'((time_idx * 3) & 12'hFFF)};
  endfunction

  // writer: a new sample every clock
  always @(posedge clk) if (rst_n && wr_en) t <= t + 1;
  assign wr_data = smp(t);

  task automatic run_block(input int pre, input int len, input bit random_ready);
    int first, got, first_cyc, last_cyc, cyc;
    // give the trigger
    pre_trig = 6'(pre); blk_len = 7'(len); trigger = 1;
    first = t - 1 - pre;         // newest sample written is t-1
    @(posedge clk); #1 trigger = 0;
    got = 0; cyc = 0; first_cyc = -1; last_cyc = -1;
    while (got < len && cyc < 2000) begin
      out_ready = random_ready ? 1'($urandom_range(1)) : 1'b1;
      #0.5;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== smp(first + got) || out_last != (got == len - 1) ||
            out_stamp != 32'(first + 1 + pre)) begin
          failures++;
          $display("pre %0d len %0d beat %0d: %h exp %h last %0d stamp %0d", pre, len, got,
                   out_data, smp(first + got), out_last, out_stamp);
        end
        if (first_cyc < 0) first_cyc = cyc;
        last_cyc = cyc;
        got++;
      end
      @(posedge clk); #1; cyc++;
    end
    out_ready = 1;
    checks++;
    if (got != len) begin failures++; $display("block of %0d gave %0d beats", len, got); end
    if (!random_ready) begin
      checks++;
      if (last_cyc - first_cyc != len - 1) begin
        failures++; $display("block of %0d took %0d clocks", len, last_cyc - first_cyc + 1);
      end
    end
    repeat (3) @(posedge clk); #1;
  endtask

  initial begin
    trigger = 0; out_ready = 1; wr_en = 0; pre_trig = '0; blk_len = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1; wr_en = 1;
    repeat (80) @(posedge clk); #1;     // wrap the ring once
    run_block(10, 20, 0);
    run_block(0, 1, 0);
    run_block(62, 30, 0);
    run_block(5, 8, 1);
    run_block(20, 16, 1);
    // trigger while busy is dropped
    pre_trig = 6'd4; blk_len = 7'd40; out_ready = 0; trigger = 1;
    @(posedge clk); #1;
    @(posedge clk); #1;                 // second trigger clock: busy
    trigger = 0;
    checks++;
    if (drop_count != 16'd1 || !busy) begin failures++; $display("drop_count %0d busy %0d", drop_count, busy); end
    out_ready = 1;
    repeat (60) @(posedge clk); #1;
    checks++;
    if (busy) begin failures++; $display("still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
