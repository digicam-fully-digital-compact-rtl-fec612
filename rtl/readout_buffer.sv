// readout_buffer: first-in first-out store between an event source and its
// read-out link.
//
// Holds up to DEPTH AXI-stream words (data plus tlast) so that a triggered
// block can leave the ring buffer at the FPGA clock rate and drain at the
// slower rate of the 1 Gb/s board read-out link. A standard valid/ready FIFO:
// a word is written when `s_valid && s_ready`, read when `m_valid && m_ready`;
// `s_ready` is low when full and `m_valid` low when empty. The memory is an
// array with one write and one registered-address read per clock.
//
// Timing: a word written into an empty FIFO can be read on the next clock.
// `level` gives the number of words held.
//
// The paper only names the read-out buffer; its depth and the FIFO form are
// this design's choices.
module readout_buffer
  import digicam_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  axis_beat_t               s_beat,
  input  logic                     s_valid,
  output logic                     s_ready,
  output axis_beat_t               m_beat,
  output logic                     m_valid,
  input  logic                     m_ready,
  output logic [$clog2(DEPTH):0]   level
);

  localparam int unsigned AW = $clog2(DEPTH);

  axis_beat_t    mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          push, pop;

  assign s_ready = (level != (AW+1)'(DEPTH));
  assign m_valid = (level != '0);
  assign push    = s_valid && s_ready;
  assign pop     = m_valid && m_ready;
  assign m_beat  = mem[rptr];

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= s_beat;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      level <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
      level <= level + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

endmodule
