// readout_arbiter: round-robin funnel of N read-out streams into one.
//
// N sources (the nine ADC-board read-out links of a crate, about 1 Gb/s each)
// offer AXI-stream packets; the single output feeds the 10 Gb/s Ethernet
// interface. Arbitration is per packet: when no packet is open the arbiter
// grants the first requesting source after the one granted last (rotating
// priority), then passes that source's words until the word with tlast has
// been accepted. Packets are therefore never interleaved, and every source
// with data waits at most N-1 packets.
//
// Timing: the data path is combinational (valid, data and ready pass straight
// through the granted port); the grant is decided in the clock before the
// first word is passed, so each packet costs one idle clock.
//
// From the paper: nine read-out sources on AXI-stream interfaces funnelled in
// round-robin arbitration mode into one channel feeding the 10GbE interface.
// Packet-granular arbitration and the one-clock grant are this design's
// choices.
module readout_arbiter
  import digicam_pkg::*;
#(
  parameter int unsigned N = 9
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  axis_beat_t [N-1:0]        s_beat,
  input  logic       [N-1:0]        s_valid,
  output logic       [N-1:0]        s_ready,
  output axis_beat_t                m_beat,
  output logic                      m_valid,
  input  logic                      m_ready,
  output logic [$clog2(N)-1:0]      grant
);

  logic                  open_pkt;
  logic [$clog2(N)-1:0]  next_grant;
  logic                  found;

  // rotating priority search starting after the last grant
  always_comb begin
    next_grant = grant;
    found      = 1'b0;
    for (int k = 1; k <= int'(N); k++) begin
      int idx;
      idx = (int'(grant) + k) % int'(N);
      if (!found && s_valid[idx]) begin
        next_grant = $clog2(N)'(idx);
        found      = 1'b1;
      end
    end
  end

  always_comb begin
    s_ready = '0;
    m_beat  = s_beat[grant];
    m_valid = open_pkt && s_valid[grant];
    if (open_pkt) s_ready[grant] = m_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_pkt <= 1'b0;
      grant    <= $clog2(N)'(N - 1);
    end else if (!open_pkt) begin
      if (found) begin
        grant    <= next_grant;
        open_pkt <= 1'b1;
      end
    end else if (m_valid && m_ready && m_beat.tlast) begin
      open_pkt <= 1'b0;
    end
  end

  // a granted source keeps the grant until its packet ends
  property p_hold_grant;
    @(posedge clk) disable iff (!rst_n)
      (open_pkt && !(m_valid && m_ready && m_beat.tlast)) |=> (open_pkt && $stable(grant));
  endproperty
  a_hold_grant: assert property (p_hold_grant);

endmodule
