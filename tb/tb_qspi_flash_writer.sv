// tb_qspi_flash_writer: program and erase a flash model, golden-area refusal.
//
// The writer drives a behavioural quad-SPI flash. The bench erases the first
// multi-boot sector, programs a full 256-byte page and a short page into it
// and reads the model's memory back. It checks that each operation was
// preceded by WRITE ENABLE, that the writer polled the status until the
// device was ready, that a page's program command keeps chip select low for
// exactly 2 x (8 + 40 + 512) clocks (SCK at half the clock rate), and that
// operations on the golden area or past the end of the flash are refused
// without any flash activity.
module tb_qspi_flash_writer;
  localparam logic [31:0] MB = 32'h0155_0000;   // first multi-boot address
  logic clk = 0, rst_n = 0;
  logic pg_we, start, op, busy, done, prot_err, cs_n, sck;
  logic [7:0] pg_addr, pg_data;
  logic [31:0] addr;
  logic [8:0] len;
  logic [3:0] dq_o, dq_oe, dq_i;
  int checks = 0, failures = 0;

  qspi_flash_writer dut (.*);
  qspi_flash_model #(.BASE(MB), .SIZE(4096)) flash (.clk, .cs_n, .sck, .dq_o, .dq_oe, .dq_i);
  always #4 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] page [256];
  int cs_low = 0, max_cs_low = 0, cs_edges = 0;
  always @(posedge clk) begin
    if (!cs_n) cs_low <= cs_low + 1;
    else begin
      if (cs_low > max_cs_low) max_cs_low <= cs_low;
      cs_low <= 0;
    end
  end
  always @(negedge cs_n) cs_edges++;

  task automatic load(input int n, input int seed);
    for (int i = 0; i < n; i++) begin
      page[i] = 8'(i * 37 + seed);
      pg_we = 1; pg_addr = 8'(i); pg_data = page[i];
      @(posedge clk); #1;
    end
    pg_we = 0;
  endtask

  task automatic run(input bit o, input logic [31:0] a, input int n);
    op = o; addr = a; len = 9'(n); start = 1;
    @(posedge clk); #1 start = 0;
    while (busy) begin @(posedge clk); #1; end
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int edges0;
    pg_we = 0; start = 0; op = 0; addr = '0; len = '0; pg_addr = '0; pg_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // erase the first multi-boot sector
    run(1'b1, MB, 0);
    check(flash.n_erase == 1 && flash.last_erase == MB, "sector erase reached the flash");
    check(flash.n_wren == 1, "write enable before erase");
    check(flash.n_rdsr >= 3, "status polled while erasing");
    // full page
    load(256, 3);
    max_cs_low = 0;
    run(1'b0, MB + 32'h100, 256);
    check(flash.n_prog == 1 && flash.n_wren == 2, "page program with write enable");
    for (int i = 0; i < 256; i++)
      check(flash.mem[32'h100 + i] == page[i], $sformatf("byte %0d programmed", i));
    check(max_cs_low == 2 * (8 + 32 + 512), $sformatf("program command took %0d clocks", max_cs_low));
    check(flash.n_denied == 0, "no command sent while flash busy");
    // short page
    load(10, 99);
    run(1'b0, MB + 32'h200, 10);
    for (int i = 0; i < 10; i++)
      check(flash.mem[32'h200 + i] == page[i], $sformatf("short page byte %0d", i));
    check(flash.mem[32'h20A] == 8'hFF, "byte after short page untouched");
    // golden area and end of flash are refused
    edges0 = cs_edges;
    op = 0; addr = 32'h0000_1000; len = 9'd256; start = 1;
    @(posedge clk); #1 start = 0;
    check(prot_err && !busy, "golden-area program refused");
    op = 1; addr = MB - 32'd1; start = 1;
    @(posedge clk); #1 start = 0;
    check(prot_err && !busy, "golden-area erase refused");
    op = 0; addr = 32'h03FF_FF80; len = 9'd256; start = 1;
    @(posedge clk); #1 start = 0;
    check(prot_err && !busy, "program past end refused");
    repeat (10) @(posedge clk);
    check(cs_edges == edges0, "refused operations left the flash alone");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
