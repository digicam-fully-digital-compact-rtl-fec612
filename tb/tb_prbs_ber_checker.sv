// tb_prbs_ber_checker: checks bit and error counting on a PRBS-9 stream.
//
// The bench generates PRBS-9 (b[n] = b[n-9] ^ b[n-5]) from an arbitrary seed,
// sends it 16 bits per word (MSB first, with idle clocks in between) and
// checks that a clean stream gives no errors and the expected bit count, and
// that k isolated flipped bits give 3k counted errors.
module tb_prbs_ber_checker;
  localparam int NW = 300;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [15:0] word;
  logic word_valid;
  logic [47:0] bit_count, err_count;
  int checks = 0, failures = 0;

  prbs_ber_checker dut (.*);
  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit seq [16*NW];

  task automatic gen(input logic [8:0] seed);
    for (int n = 0; n < 16*NW; n++)
      seq[n] = (n < 9) ? seed[n] : seq[n-9] ^ seq[n-5];
  endtask

  task automatic send();
    for (int w = 0; w < NW; w++) begin
      for (int j = 0; j < 16; j++) word[15-j] = seq[16*w + j];
      word_valid = 1;
      @(posedge clk); #1;
      word_valid = 0;
      if ($urandom_range(3) == 0) begin @(posedge clk); #1; end
    end
    @(posedge clk); #1;
  endtask

  task automatic expect_counts(input longint bits, input longint errs, input string what);
    checks++;
    if (bit_count != 48'(bits) || err_count != 48'(errs)) begin
      failures++;
      $display("%s: bits %0d (exp %0d) errors %0d (exp %0d)", what, bit_count, bits, err_count, errs);
    end
  endtask

  initial begin
    word = '0; word_valid = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    gen(9'h1A5);
    send();
    expect_counts(16*NW - 9, 0, "clean");
    // flip 4 isolated bits
    clear = 1; @(posedge clk); #1 clear = 0;
    expect_counts(0, 0, "clear");
    gen(9'h07F);
    seq[100] ^= 1; seq[1001] ^= 1; seq[2500] ^= 1; seq[4000] ^= 1;
    send();
    expect_counts(16*NW - 9, 12, "four flipped bits");
    // all-ones stream is not PRBS: many errors
    clear = 1; @(posedge clk); #1 clear = 0;
    for (int n = 0; n < 16*NW; n++) seq[n] = (n % 3 == 0);
    send();
    checks++;
    if (err_count < 48'(16*NW/4)) begin failures++; $display("non-PRBS stream gave only %0d errors", err_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
