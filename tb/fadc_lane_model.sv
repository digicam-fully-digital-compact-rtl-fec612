// fadc_lane_model: behavioural model of one FADC serial lane and its receiver.
//
// In every clock the converter emits one 16-bit frame: the training word
// F0CAh (mode 0), a 12-bit sample scrambled with 1 + x^14 + x^15 over the line
// bits (mode 1), or 16 bits of PRBS-9 (mode 2). Bits go out MSB first. The
// receiver side cuts the line into 16-bit words that start OFFSET bits into a
// frame, so word boundaries do not match frame boundaries. The frame given
// before edge k is sent at edge k; the receiver word that completes it is
// presented after edge k+2, so a frame aligner reads it at edge k+3.
// `flip` inverts one line bit of the current frame. Not synthesizable.
module fadc_lane_model #(
  parameter int OFFSET = 0
) (
  input  logic        clk,
  input  logic [1:0]  mode,
  input  logic [11:0] sample,
  input  logic        flip,
  output logic [15:0] rx_word
);
  bit line [$];           // line bits not yet fully consumed, oldest first
  bit h [15];             // last 15 line bits, h[0] newest
  bit p [9];              // PRBS-9 history, p[0] newest
  int consumed = 0;

  initial begin
    for (int i = 0; i < 15; i++) h[i] = 0;
    for (int i = 0; i < 9; i++) p[i] = (i % 2 == 0);
    for (int i = 0; i < 32 - OFFSET; i++) line.push_back(0);
    rx_word = '0;
  end

  always @(posedge clk) begin
    logic [15:0] fr;
    fr = (mode == 2'd0) ? 16'hF0CA : {4'h0, sample};
    for (int j = 15; j >= 0; j--) begin
      bit b;
      if (mode == 2'd1)      b = fr[j] ^ h[13] ^ h[14];
      else if (mode == 2'd2) b = p[8] ^ p[4];
      else                   b = fr[j];
      if (flip && j == 7) b = !b;
      for (int i = 14; i > 0; i--) h[i] = h[i-1];
      h[0] = b;
      for (int i = 8; i > 0; i--) p[i] = p[i-1];
      p[0] = (mode == 2'd2) ? b ^ (flip && j == 7) : b;
      line.push_back(b);
    end
    // hand out the next 16 line bits
    for (int j = 15; j >= 0; j--) rx_word[j] <= line.pop_front();
  end
endmodule
