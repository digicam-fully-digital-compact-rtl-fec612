// l0_triplet: first-level (L0) trigger values of one ADC board.
//
// Pixels are taken three at a time (channels 3k, 3k+1, 3k+2 form triplet k).
// For every sample time the block adds the three samples, removes three times
// the programmable pedestal `baseline`, scales the result down by `shift` bits
// and clips it to an unsigned L0_W-bit value (negative sums give 0, large ones
// saturate). The N_TRI values are sent continuously to the trigger board.
//
// Timing: one result per clock, one clock after the samples; `l0_valid`
// follows `in_valid`.
//
// The paper says the ADC board computes L0 trigger signals and that a trigger
// triplet is derived from 3 detectors, and the trigger board sums L0 values
// over patches. How a triplet value is formed (pedestal, scaling, 8-bit
// clipping) is this design's assumption.
module l0_triplet #(
  parameter int unsigned CH       = 48,
  parameter int unsigned SAMPLE_W = 12,
  parameter int unsigned L0_W     = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [CH*SAMPLE_W-1:0]     samples,
  input  logic                       in_valid,
  input  logic [SAMPLE_W-1:0]        baseline,
  input  logic [2:0]                 shift,
  output logic [(CH/3)*L0_W-1:0]     l0,
  output logic                       l0_valid
);

  localparam int unsigned N_TRI = CH / 3;
  localparam int unsigned SUM_W = SAMPLE_W + 3;   // signed room for 3 x sample

  logic [(CH/3)*L0_W-1:0] l0_nxt;

  always_comb begin
    l0_nxt = '0;
    for (int k = 0; k < N_TRI; k++) begin
      logic signed [SUM_W:0] sum, s0, s1, s2, ped;
      s0  = $signed((SUM_W+1)'(samples[(3*k)*SAMPLE_W +: SAMPLE_W]));
      s1  = $signed((SUM_W+1)'(samples[(3*k+1)*SAMPLE_W +: SAMPLE_W]));
      s2  = $signed((SUM_W+1)'(samples[(3*k+2)*SAMPLE_W +: SAMPLE_W]));
      ped = $signed((SUM_W+1)'(baseline));
      sum = s0 + s1 + s2 - ped - ped - ped;
      sum = sum >>> shift;
      if (sum < 0)                          l0_nxt[k*L0_W +: L0_W] = '0;
      else if (sum > (2**L0_W - 1))         l0_nxt[k*L0_W +: L0_W] = '1;
      else                                  l0_nxt[k*L0_W +: L0_W] = L0_W'(sum);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l0       <= '0;
      l0_valid <= 1'b0;
    end else begin
      l0       <= l0_nxt;
      l0_valid <= in_valid;
    end
  end

endmodule
