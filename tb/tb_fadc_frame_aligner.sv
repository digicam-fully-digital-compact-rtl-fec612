// tb_fadc_frame_aligner: checks alignment and sample extraction of one lane.
//
// A transmitter model builds the serial bit stream of a converter lane: 24
// unscrambled training frames, then random 12-bit samples, scrambled with
// 1 + x^14 + x^15 over the bits actually on the line. The stream is cut into
// receiver words at a chosen bit offset. For offsets 0, 5 and 13 the bench
// checks that the aligner locks, reports the offset, and returns every data
// sample in order, one clock after the receiver word that completes it.
module tb_fadc_frame_aligner;
  localparam int NF = 100;            // frames per run
  localparam int NT = 24;             // training frames
  localparam logic [15:0] TRAIN = 16'hF0CA;

  logic clk = 0, rst_n = 0, resync = 0;
  logic [15:0] rx_word;
  logic locked, aligned_valid, sample_valid;
  logic [3:0] slip;
  logic [15:0] aligned_word;
  logic [11:0] sample;
  int checks = 0, failures = 0;

  fadc_frame_aligner dut (.*);

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit          wire_bits [16*(NF+2)];
  logic [11:0] data [NF];

  task automatic build(input int d);
    for (int f = 0; f < NF + 2; f++) begin
      logic [15:0] fr;
      if (f < NT || f >= NF) fr = TRAIN;
      else begin
        data[f] = 12'($urandom);
        fr = {4'h0, data[f]};
      end
      for (int j = 0; j < 16; j++) begin
        int t = 16*f + j;
        bit b = fr[15-j];
        if (f >= NT && f < NF) b = b ^ wire_bits[t-14] ^ wire_bits[t-15];
        wire_bits[t] = b;
      end
    end
  endtask

  function automatic logic [15:0] rx(input int n, input int d);
    logic [15:0] w = '0;
    for (int j = 0; j < 16; j++) begin
      int t = 16*n + d + j;
      w[15-j] = (t < 16*(NF+2)) ? wire_bits[t] : 1'b0;
    end
    return w;
  endfunction

  initial begin
    int offs [3] = '{0, 5, 13};
    rx_word = '0;
    foreach (offs[i]) begin
      int d, got;
      d = offs[i];
      got = 0;
      build(d);
      rst_n = 0;
      repeat (3) @(posedge clk);
      #1 rst_n = 1;
      for (int n = 0; n < NF; n++) begin
        rx_word = rx(n, d);
        @(posedge clk);
        #1;
        if (sample_valid && n >= NT) begin
          checks++;
          got++;
          if (sample !== data[n]) begin
            failures++;
            $display("offset %0d frame %0d: sample %h expected %h", d, n, sample, data[n]);
          end
        end
      end
      checks++;
      if (!locked || slip != 4'(d) || got != NF - NT) begin
        failures++;
        $display("offset %0d: locked=%0d slip=%0d samples=%0d", d, locked, slip, got);
      end
      // resync drops lock
      resync = 1;
      @(posedge clk);
      #1 resync = 0;
      checks++;
      if (locked) begin failures++; $display("resync did not drop lock"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
