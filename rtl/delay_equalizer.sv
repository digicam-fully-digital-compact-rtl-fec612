// delay_equalizer: channel bonding and delay-skew compensation of trigger lanes.
//
// Trigger data reach the trigger board over links of different latency: local
// ADC boards over one transceiver hop, neighbour-crate data over two. To make
// every lane present data from the same sampling instant, each lane is given
// an extra delay so that its total latency, from the moment the source sends a
// sample to the moment it leaves this block, is the fixed TARGET clocks.
//
// Bonding procedure: at start-up every source sends a marker (`lane_marker`
// set beside one data word) in the same clock in which `bond_start` is pulsed
// here. A counter runs from `bond_start`; the count at which a lane's marker
// arrives is that lane's link latency L. Its delay is then set to
// TARGET - 1 - L (the output register adds the last clock). `bonded` rises
// when every lane has reported; `bond_error` if a lane is later than TARGET-1
// or silent for DEPTH clocks. Before bonding lanes pass with zero extra delay.
//
// Each lane has a circular memory of DEPTH words sharing one write pointer and
// read DEPTH-independent at `wptr - delay`.
//
// Timing: `out_data` is registered; after bonding, a word sent by the source
// at clock t leaves at clock t + TARGET on every lane.
//
// From the paper: a channel bonding procedure at start-up, and a fixed total
// delay such as 256 ns (64 sample periods) for all trigger data. The marker
// mechanism and the memory form are this design's choices.
module delay_equalizer #(
  parameter int unsigned LANES  = 11,
  parameter int unsigned W      = 128,
  parameter int unsigned TARGET = 64,
  parameter int unsigned DEPTH  = 128
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         bond_start,
  input  logic [LANES-1:0][W-1:0]      in_data,
  input  logic [LANES-1:0]             lane_marker,
  output logic [LANES-1:0][W-1:0]      out_data,
  output logic                         bonded,
  output logic                         bond_error,
  output logic [LANES-1:0][$clog2(DEPTH)-1:0] latency
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]            mem [LANES][DEPTH];
  logic [AW-1:0]           wptr;
  logic [AW-1:0]           delay [LANES];
  logic [LANES-1:0]        seen;
  logic                    measuring;
  logic [AW:0]             count;

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      mem[l][wptr] <= in_data[l];
      out_data[l]  <= (delay[l] == '0) ? in_data[l] : mem[l][wptr - delay[l]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      seen       <= '0;
      measuring  <= 1'b0;
      count      <= '0;
      bonded     <= 1'b0;
      bond_error <= 1'b0;
      for (int l = 0; l < LANES; l++) begin
        delay[l]   <= '0;
        latency[l] <= '0;
      end
    end else begin
      wptr <= wptr + 1'b1;
      if (bond_start) begin
        measuring  <= 1'b1;
        count      <= '0;
        seen       <= '0;
        bonded     <= 1'b0;
        bond_error <= 1'b0;
        for (int l = 0; l < LANES; l++) begin
          // a marker in the start clock itself means zero link latency
          if (lane_marker[l]) begin
            seen[l]    <= 1'b1;
            latency[l] <= '0;
            delay[l]   <= AW'(TARGET - 1);
          end
        end
        count <= (AW+1)'(1);
      end else if (measuring) begin
        count <= count + 1'b1;
        for (int l = 0; l < LANES; l++) begin
          if (lane_marker[l] && !seen[l]) begin
            seen[l]    <= 1'b1;
            latency[l] <= AW'(count);
            if (count <= (AW+1)'(TARGET - 1)) delay[l] <= AW'((AW+1)'(TARGET - 1) - count);
            else                              bond_error <= 1'b1;
          end
        end
        if (&seen) begin
          measuring <= 1'b0;
          bonded    <= 1'b1;
        end else if (count == (AW+1)'(DEPTH)) begin
          measuring  <= 1'b0;
          bond_error <= 1'b1;
        end
      end
    end
  end

endmodule
