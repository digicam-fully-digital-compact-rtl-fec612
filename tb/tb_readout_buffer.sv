// tb_readout_buffer: random push/pop against a reference queue.
//
// A depth-8 buffer is written and read with random valid/ready for 3000
// clocks. Every word read must be the oldest one written; `s_ready` must be
// low exactly when 8 words are held, `m_valid` exactly when none is held.
module tb_readout_buffer;
  import digicam_pkg::*;
  logic clk = 0, rst_n = 0;
  axis_beat_t s_beat, m_beat;
  logic s_valid, s_ready, m_valid, m_ready;
  logic [3:0] level;
  int checks = 0, failures = 0;
  int full_seen = 0, empty_seen = 0;

  readout_buffer #(.DEPTH(8)) dut (.*);
  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  axis_beat_t q [$];

  initial begin
    s_valid = 0; m_ready = 0; s_beat = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      bit phase_fill;
      phase_fill = (cyc / 300) % 2 == 0;
      s_valid = ($urandom_range(9) < (phase_fill ? 8 : 3));
      m_ready = ($urandom_range(9) < (phase_fill ? 3 : 8));
      s_beat.tdata = {$urandom, $urandom};
      s_beat.tlast = $urandom_range(1);
      #0.5;
      checks++;
      if (s_ready != (q.size() < 8) || m_valid != (q.size() > 0) || int'(level) != q.size()) begin
        failures++;
        $display("cyc %0d: ready %0d valid %0d level %0d, queue %0d", cyc, s_ready, m_valid, level, q.size());
      end
      if (q.size() == 8) full_seen++;
      if (q.size() == 0 && cyc > 10) empty_seen++;
      if (m_valid && m_ready) begin
        checks++;
        if (m_beat !== q[0]) begin failures++; $display("cyc %0d: read %h expected %h", cyc, m_beat, q[0]); end
        void'(q.pop_front());
      end
      if (s_valid && s_ready) q.push_back(s_beat);
      @(posedge clk); #1;
    end
    checks++;
    if (full_seen == 0 || empty_seen == 0) begin failures++; $display("buffer never filled or never drained"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
