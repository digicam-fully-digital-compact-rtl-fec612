// tb_event_packetizer: packet format of a triggered block.
//
// Blocks of 1..5 random 48 x 12-bit sample times are fed in with random valid
// gaps while the output ready toggles at random. Each packet must be a header
// {board, event number, stamp} followed by 9 words per sample time holding
// the sample bits lowest channel first, with tlast only on the final word.
module tb_event_packetizer;
  import digicam_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] board_id;
  logic [575:0] in_data;
  logic in_valid, in_last, in_ready, m_valid, m_ready;
  logic [31:0] in_stamp;
  axis_beat_t m_beat;
  int checks = 0, failures = 0;

  event_packetizer dut (.*);
  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [575:0] blk [5];
  axis_beat_t exp_q [$];

  // source: presents the block sample times in order
  task automatic source(input int n);
    for (int i = 0; i < n; i++) begin
      while ($urandom_range(2) == 0) begin in_valid = 0; @(posedge clk); #1; end
      in_valid = 1; in_data = blk[i]; in_last = (i == n - 1);
      do @(posedge clk); while (!in_ready_q);
      #1;
    end
    in_valid = 0; in_last = 0;
  endtask

  logic in_ready_q;
  always @(posedge clk) in_ready_q <= 1'b0;
  always @(negedge clk) in_ready_q = in_valid && in_ready;

  initial begin
    int n_pk;
    in_valid = 0; in_last = 0; in_data = '0; board_id = 8'd5; in_stamp = '0; m_ready = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int p = 0; p < 8; p++) begin
      int n;
      n = 1 + p % 5;
      in_stamp = $urandom;
      for (int i = 0; i < n; i++)
        for (int w = 0; w < 18; w++) blk[i][w*32 +: 32] = $urandom;
      exp_q.push_back('{tdata: {8'd5, 24'(p), in_stamp}, tlast: 1'b0});
      for (int i = 0; i < n; i++)
        for (int w = 0; w < 9; w++)
          exp_q.push_back('{tdata: blk[i][w*64 +: 64], tlast: (i == n - 1 && w == 8)});
      source(n);
      wait (exp_q.size() == 0);
      @(posedge clk); #1;
    end
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sink
  always @(negedge clk) begin
    if (rst_n) begin
      if (m_valid && m_ready) begin
        checks++;
        if (exp_q.size() == 0) begin
          failures++; $display("unexpected word %h", m_beat.tdata);
        end else begin
          if (m_beat !== exp_q[0]) begin
            failures++;
            $display("word %h/%0d expected %h/%0d", m_beat.tdata, m_beat.tlast, exp_q[0].tdata, exp_q[0].tlast);
          end
          void'(exp_q.pop_front());
        end
      end
    end
  end
  always @(posedge clk) #1 m_ready = 1'($urandom_range(3) != 0);
endmodule
