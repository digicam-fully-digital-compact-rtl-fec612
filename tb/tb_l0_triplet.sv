// tb_l0_triplet: L0 triplet values against an integer reference.
//
// Random samples, pedestals and shifts (plus corner cases: all zero, all
// full scale) are applied; each result, one clock later, must equal
// clip((s0 + s1 + s2 - 3*baseline) >> shift, 0, 255) for each triplet.
module tb_l0_triplet;
  logic clk = 0, rst_n = 0;
  logic [48*12-1:0] samples;
  logic in_valid;
  logic [11:0] baseline;
  logic [2:0] shift;
  logic [16*8-1:0] l0;
  logic l0_valid;
  int checks = 0, failures = 0;

  l0_triplet dut (.*);
  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_l0(input int a, input int b, input int c, input int base, input int sh);
    int v = a + b + c - 3*base;
    v = (v < 0) ? -((-v + (1 << sh) - 1) >> sh) : (v >> sh);   // arithmetic shift
    if (v < 0) return 0;
    if (v > 255) return 255;
    return v;
  endfunction

  initial begin
    in_valid = 0; samples = '0; baseline = '0; shift = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      for (int ch = 0; ch < 48; ch++) begin
        int v;
        v = (it == 0) ? 0 : (it == 1) ? 4095 : (it % 2) ? $urandom_range(300) + 200 : $urandom_range(4095);
        samples[ch*12 +: 12] = 12'(v);
      end
      baseline = (it < 2) ? 12'd100 : 12'($urandom_range(400));
      shift    = 3'($urandom_range(7));
      in_valid = (it % 5 != 3);
      @(posedge clk); #1;
      checks++;
      if (l0_valid != in_valid) begin failures++; $display("valid mismatch"); end
      for (int k = 0; k < 16; k++) begin
        int e;
        e = ref_l0(samples[(3*k)*12 +: 12], samples[(3*k+1)*12 +: 12], samples[(3*k+2)*12 +: 12],
                   baseline, shift);
        checks++;
        if (l0[k*8 +: 8] != 8'(e)) begin
          failures++;
          $display("it %0d triplet %0d: %0d expected %0d", it, k, l0[k*8 +: 8], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
