// ring_buffer: per-channel sample history with triggered block read-out.
//
// All CH channels of an ADC board are written together, one SAMPLE_W-bit
// sample per channel per sample clock, into a circular memory DEPTH samples
// deep (one memory word holds one sample time of all channels). When the L1
// trigger arrives the buffer copies out a block of `blk_len` consecutive
// sample times that starts `pre_trig` samples before the newest one written,
// so both the size of the block and its position relative to the trigger are
// run-time registers. The block leaves on a valid/ready stream, one sample
// time per beat, with `out_last` on the final beat and the trigger's sample
// time stamp beside it. Writing never stops while a block is read.
//
// Timing: the memory is read synchronously; a beat appears one clock after it
// is fetched and holds until `out_ready`. A trigger that arrives while a block
// is still being read is not accepted and is counted in `drop_count`.
// The read must stay ahead of the write pointer wrapping round: with one beat
// every R clocks, pre_trig + (R-1)*blk_len must not exceed DEPTH - 2.
//
// From the paper: ring buffers of up to 1024 samples (4 us at 250 MS/s), a
// block of consecutive samples sent to the read-out buffer on a positive
// trigger decision, programmable block size and position. The single shared
// write pointer, the time stamp and dropping triggers while busy are this
// design's choices.
module ring_buffer #(
  parameter int unsigned CH       = 48,
  parameter int unsigned SAMPLE_W = 12,
  parameter int unsigned DEPTH    = 1024,
  parameter int unsigned TS_W     = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // sample input (all channels at once)
  input  logic [CH*SAMPLE_W-1:0]     wr_data,
  input  logic                       wr_en,
  // read-out control
  input  logic                       trigger,
  input  logic [$clog2(DEPTH)-1:0]   pre_trig,   // samples before the trigger
  input  logic [$clog2(DEPTH):0]     blk_len,    // samples in the block (1..DEPTH)
  // block output
  output logic [CH*SAMPLE_W-1:0]     out_data,
  output logic                       out_valid,
  output logic                       out_last,
  input  logic                       out_ready,
  output logic [TS_W-1:0]            out_stamp,  // sample time of the trigger
  output logic                       busy,
  output logic [15:0]                drop_count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [CH*SAMPLE_W-1:0] mem [DEPTH];
  logic [AW-1:0]          wptr, rptr;
  logic [AW:0]            remaining;
  logic [TS_W-1:0]        now;
  logic                   advance;

  // The newest written sample sits at wptr-1.
  always_ff @(posedge clk) begin
    if (wr_en) mem[wptr] <= wr_data;
  end

  assign advance = busy && (remaining != '0) && (!out_valid || out_ready);

  always_ff @(posedge clk) begin
    if (advance) out_data <= mem[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      now        <= '0;
      remaining  <= '0;
      busy       <= 1'b0;
      out_valid  <= 1'b0;
      out_last   <= 1'b0;
      out_stamp  <= '0;
      drop_count <= '0;
    end else begin
      if (wr_en) begin
        wptr <= wptr + 1'b1;
        now  <= now + 1'b1;
      end
      if (advance) begin
        rptr      <= rptr + 1'b1;
        remaining <= remaining - 1'b1;
        out_valid <= 1'b1;
        out_last  <= (remaining == 1);
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
      // block finished once its last beat has been accepted
      if (busy && remaining == '0 && (!out_valid || out_ready)) begin
        busy     <= 1'b0;
        out_last <= 1'b0;
      end
      if (trigger) begin
        if (!busy && blk_len != '0) begin
          busy      <= 1'b1;
          rptr      <= wptr - AW'(1) - pre_trig;
          remaining <= (blk_len > (AW+1)'(DEPTH)) ? (AW+1)'(DEPTH) : blk_len;
          out_stamp <= now;
        end else if (drop_count != '1) begin
          drop_count <= drop_count + 1'b1;
        end
      end
    end
  end

endmodule
