// tb_readout_arbiter: packet-wise round-robin of three streams.
//
// Phase 1: all three sources always have packets and the sink is always
// ready; packets must come out in the order 0,1,2,0,1,2,... Phase 2: random
// packet lengths, random valid gaps and sink back-pressure. In both phases
// every packet must arrive whole and uninterrupted, each source's words in
// order, with nothing lost.
module tb_readout_arbiter;
  import digicam_pkg::*;
  localparam int N = 3, NP = 12;
  logic clk = 0, rst_n = 0;
  axis_beat_t [N-1:0] s_beat;
  logic [N-1:0] s_valid, s_ready;
  axis_beat_t m_beat;
  logic m_valid, m_ready;
  logic [1:0] grant;
  int checks = 0, failures = 0;

  readout_arbiter #(.N(N)) dut (.*);
  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // word = {source, packet, beat, length}
  int  pkt [N], beat [N], plen [N];
  bit  gaps = 0;
  int  got_pkts = 0, cur_src = -1, cur_pkt, cur_beat, last_src = N - 1, order_err = 0;
  bit  phase1 = 1;

  function automatic int len_of(input int s, input int p);
    return phase1 ? 3 : 1 + (s * 7 + p * 5) % 6;
  endfunction

  always_comb
    for (int s = 0; s < N; s++) begin
      s_beat[s].tdata = {16'(s), 16'(pkt[s]), 16'(beat[s]), 16'(len_of(s, pkt[s]))};
      s_beat[s].tlast = (beat[s] == len_of(s, pkt[s]) - 1);
    end

  always @(posedge clk) begin
    if (rst_n) begin
      for (int s = 0; s < N; s++) begin
        if (s_valid[s] && s_ready[s]) begin
          if (s_beat[s].tlast) begin pkt[s] <= pkt[s] + 1; beat[s] <= 0; end
          else beat[s] <= beat[s] + 1;
        end
      end
      if (m_valid && m_ready) begin
        int src, p, b, l;
        src = int'(m_beat.tdata[63:48]); p = int'(m_beat.tdata[47:32]);
        b = int'(m_beat.tdata[31:16]);   l = int'(m_beat.tdata[15:0]);
        checks++;
        if (cur_src < 0) begin
          if (b != 0) begin failures++; $display("packet starts at beat %0d", b); end
          if (phase1 && src != (last_src + 1) % N) begin order_err++; failures++; $display("order: %0d after %0d", src, last_src); end
          cur_src = src; cur_pkt = p; cur_beat = 0;
        end else if (src != cur_src || p != cur_pkt || b != cur_beat) begin
          failures++; $display("interleaved: src %0d pkt %0d beat %0d in packet %0d/%0d", src, p, b, cur_src, cur_pkt);
        end
        cur_beat++;
        if (m_beat.tlast != (b == l - 1)) begin failures++; $display("tlast wrong"); end
        if (m_beat.tlast) begin last_src = cur_src; cur_src = -1; got_pkts++; end
      end
    end
  end

  initial begin
    for (int s = 0; s < N; s++) begin pkt[s] = 0; beat[s] = 0; end
    s_valid = '0; m_ready = 1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    s_valid = '1;
    wait (got_pkts >= 3 * NP);
    @(negedge clk);
    s_valid = '0;
    // phase 2: wait for any open packet to finish first
    repeat (3) @(posedge clk); #1;
    phase1 = 0;
    for (int s = 0; s < N; s++) beat[s] = 0;
    for (int c = 0; c < 3000; c++) begin
      for (int s = 0; s < N; s++) begin
        // keep valid high once a packet has started (AXI rule)
        if (beat[s] != 0) s_valid[s] = 1;
        else if (!s_valid[s] || s_ready[s]) s_valid[s] = 1'($urandom_range(3) != 0) && pkt[s] < 40;
      end
      m_ready = 1'($urandom_range(3) != 0);
      @(posedge clk); #1;
    end
    checks++;
    for (int s = 0; s < N; s++)
      if (pkt[s] < 40) begin failures++; $display("source %0d sent only %0d packets", s, pkt[s]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
