// event_packetizer: turns one ring-buffer block into an AXI-stream packet.
//
// A block from the ring buffer is a series of wide beats, each holding one
// sample time of all channels (CH x SAMPLE_W bits). The packetizer first sends
// a header word and then cuts every wide beat into WORDS = ceil(CH*SAMPLE_W /
// AXIS_W) stream words, lowest channel first, zero-padded at the top. Header
// layout: [63:56] board number, [55:32] event number (counts packets from
// reset), [31:0] trigger time stamp. `m_tlast` marks the final word of the
// packet. With the default 48 x 12 bits and 64-bit words a sample time takes
// exactly 9 words, so a block of N samples is 1 + 9N words.
//
// Timing: one stream word per clock when `m_ready` is high; the wide input
// beat is accepted together with its last stream word. Valid is never made to
// depend on ready.
//
// The paper names the read-out path (ring buffer to read-out buffer to the
// 1 Gb/s link, AXI stream towards the 10GbE funnel) but gives no event format;
// the header and word order are this design's own.
module event_packetizer
  import digicam_pkg::axis_beat_t, digicam_pkg::AXIS_W;
#(
  parameter int unsigned CH       = 48,
  parameter int unsigned SAMPLE_W = 12,
  parameter int unsigned TS_W     = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [7:0]             board_id,
  // block from the ring buffer
  input  logic [CH*SAMPLE_W-1:0] in_data,
  input  logic                   in_valid,
  input  logic                   in_last,
  input  logic [TS_W-1:0]        in_stamp,
  output logic                   in_ready,
  // AXI-stream packet
  output axis_beat_t             m_beat,
  output logic                   m_valid,
  input  logic                   m_ready
);

  localparam int unsigned WORDS = (CH*SAMPLE_W + AXIS_W - 1) / AXIS_W;
  localparam int unsigned PAD_W = WORDS * AXIS_W;

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_DATA} state_e;
  state_e                      state;
  logic [$clog2(WORDS+1)-1:0]  word_idx;
  logic [23:0]                 event_no;
  logic [PAD_W-1:0]            padded;

  assign padded = PAD_W'(in_data);

  always_comb begin
    m_valid      = 1'b0;
    m_beat.tdata = '0;
    m_beat.tlast = 1'b0;
    in_ready     = 1'b0;
    unique case (state)
      S_IDLE: ;
      S_HDR: begin
        m_valid      = 1'b1;
        m_beat.tdata = {board_id, event_no, 32'(in_stamp)};
      end
      S_DATA: begin
        m_valid      = in_valid;
        m_beat.tdata = padded[word_idx*AXIS_W +: AXIS_W];
        m_beat.tlast = in_last && (int'(word_idx) == WORDS - 1);
        in_ready     = m_ready && (int'(word_idx) == WORDS - 1);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      word_idx <= '0;
      event_no <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) state <= S_HDR;
        S_HDR: if (m_ready) begin
          state    <= S_DATA;
          word_idx <= '0;
        end
        S_DATA: if (in_valid && m_ready) begin
          if (int'(word_idx) == WORDS - 1) begin
            word_idx <= '0;
            if (in_last) begin
              state    <= S_IDLE;
              event_no <= event_no + 1'b1;
            end
          end else begin
            word_idx <= word_idx + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
