// tb_delay_equalizer: bonding and fixed-latency alignment of skewed lanes.
//
// Four lanes reach the block through links of 1, 3, 7 and 12 clocks (modelled
// here as shift registers). Every source sends its own time count, and all
// send the bonding marker in the clock of `bond_start`. After bonding every
// lane must report its link latency and present, in every clock, the word its
// source sent TARGET = 16 clocks earlier, so all lanes show the same count.
// A second run with a lane slower than TARGET must raise `bond_error`.
module tb_delay_equalizer;
  localparam int LANES = 4, W = 8, TARGET = 16, DEPTH = 32;
  logic clk = 0, rst_n = 0, bond_start = 0;
  logic [LANES-1:0][W-1:0] in_data, out_data;
  logic [LANES-1:0] lane_marker;
  logic bonded, bond_error;
  logic [LANES-1:0][4:0] latency;
  int checks = 0, failures = 0;

  delay_equalizer #(.LANES(LANES), .W(W), .TARGET(TARGET), .DEPTH(DEPTH)) dut (.*);
  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lat [LANES];
  int tcount = 0;                                 // source time
  logic [W:0] pipe [LANES][32];                   // {marker, data}
  logic src_marker;

  // link models: lane l sees what its source sent lat[l] clocks ago
  always @(posedge clk) begin
    tcount <= tcount + 1;
    for (int l = 0; l < LANES; l++) begin
      pipe[l][0] <= {src_marker, W'(tcount)};
      for (int k = 1; k < 32; k++) pipe[l][k] <= pipe[l][k-1];
    end
  end
  always_comb
    for (int l = 0; l < LANES; l++) begin
      logic [W:0] v;
      v = (lat[l] == 0) ? {src_marker, W'(tcount)} : pipe[l][lat[l]-1];
      lane_marker[l] = v[W];
      in_data[l]     = v[W-1:0];
    end

  task automatic bond();
    src_marker = 1; bond_start = 1;
    @(posedge clk); #1;
    src_marker = 0; bond_start = 0;
    repeat (40) @(posedge clk); #1;
  endtask

  initial begin
    lat = '{1, 3, 7, 12};
    src_marker = 0;
    for (int k = 0; k < 32; k++) for (int l = 0; l < LANES; l++) pipe[l][k] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (20) @(posedge clk); #1;
    bond();
    checks++;
    if (!bonded || bond_error) begin failures++; $display("bonded %0d error %0d", bonded, bond_error); end
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (int'(latency[l]) != lat[l]) begin failures++; $display("lane %0d latency %0d exp %0d", l, latency[l], lat[l]); end
    end
    // every lane now shows the source count of TARGET clocks ago
    for (int c = 0; c < 100; c++) begin
      @(posedge clk); #1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        // the output was loaded at the edge just passed (source count tcount-1)
        if (out_data[l] != W'(tcount - TARGET)) begin
          failures++;
          if (failures < 10) $display("lane %0d: %0d expected %0d", l, out_data[l], W'(tcount - TARGET));
        end
      end
    end
    // a lane slower than the target
    lat = '{2, 2, 20, 2};
    repeat (40) @(posedge clk); #1;
    bond();
    checks++;
    if (!bond_error) begin failures++; $display("late lane not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
