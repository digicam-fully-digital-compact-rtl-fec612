// qspi_flash_model: behavioural model of a quad-SPI NOR flash, for testbenches.
//
// Understands the commands the writer uses: WRITE ENABLE (06h), 4-byte QUAD
// INPUT PAGE PROGRAM (34h), 4-byte SECTOR ERASE (DCh, 64 KiB) and READ STATUS
// (05h, status bit 0 = write in progress, bit 1 = write enable latch).
// Command and address are taken from DQ0 on rising SCK, program data from
// DQ3..0 (high nibble first); status bits are driven on DQ1 and change after
// falling SCK. Programming is done when chip select rises, and the device then
// stays busy for PROG_CLKS (program) or ERASE_CLKS (erase) clocks. Only a
// small window of the memory is stored (BASE .. BASE+SIZE-1). Not synthesizable.
module qspi_flash_model #(
  parameter logic [31:0] BASE       = 32'h0155_0000,
  parameter int          SIZE       = 4096,
  parameter int          PROG_CLKS  = 300,
  parameter int          ERASE_CLKS = 900
) (
  input  logic       clk,
  input  logic       cs_n,
  input  logic       sck,
  input  logic [3:0] dq_o,
  input  logic [3:0] dq_oe,
  output logic [3:0] dq_i
);
  logic [7:0]  mem [SIZE];
  logic [7:0]  cmd;
  logic [31:0] addr;
  int          nbits, nnib, rd_idx, busy_cnt;
  logic        wel;
  logic [7:0]  pend [$];
  int          n_wren = 0, n_prog = 0, n_erase = 0, n_rdsr = 0, n_denied = 0;
  logic [31:0] last_erase = '0;
  logic [7:0]  status;
  logic [3:0]  hi_nib;

  assign status = {6'b0, wel, busy_cnt > 0};
  assign dq_i   = {2'b00, (rd_idx >= 0) ? status[3'(7 - rd_idx)] : 1'b0, 1'b0};

  initial begin
    for (int i = 0; i < SIZE; i++) mem[i] = 8'hFF;
    wel = 0; busy_cnt = 0; nbits = 0; nnib = 0; rd_idx = 0; cmd = '0; addr = '0; hi_nib = '0;
  end

  always @(posedge clk) if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;

  always @(negedge cs_n) begin
    nbits = 0; nnib = 0; rd_idx = 0; pend.delete();
  end

  always @(posedge sck) if (!cs_n) begin
    if (nbits < 8) begin
      cmd = {cmd[6:0], dq_o[0]};
      nbits++;
      if (nbits == 8 && cmd == 8'h05) begin n_rdsr++; rd_idx = -1; end
    end else if ((cmd == 8'h34 || cmd == 8'hDC) && nbits < 40) begin
      addr = {addr[30:0], dq_o[0]};
      nbits++;
    end else if (cmd == 8'h34) begin
      if (dq_oe != 4'hF) $display("flash model: data phase without quad drive");
      if (nnib % 2 == 0) hi_nib = dq_o;
      else pend.push_back({hi_nib, dq_o});
      nnib++;
    end
  end

  always @(negedge sck) if (!cs_n && nbits == 8 && cmd == 8'h05) rd_idx = (rd_idx + 1) % 8;

  always @(posedge cs_n) begin
    if (nbits >= 8) begin
      if (busy_cnt > 0 && cmd != 8'h05) n_denied++;
      else case (cmd)
        8'h06: begin wel = 1; n_wren++; end
        8'h34: if (wel && nbits == 40) begin
          n_prog++;
          foreach (pend[i]) begin
            logic [31:0] a;
            a = {addr[31:8], 8'(addr[7:0] + 8'(i))};         // wraps inside the page
            if (a >= BASE && a < BASE + SIZE) mem[a - BASE] = mem[a - BASE] & pend[i];
          end
          wel = 0; busy_cnt = PROG_CLKS;
        end else n_denied++;
        8'hDC: if (wel && nbits == 40) begin
          n_erase++; last_erase = addr;
          for (int i = 0; i < SIZE; i++)
            if (((BASE + i) >> 16) == (addr >> 16)) mem[i] = 8'hFF;
          wel = 0; busy_cnt = ERASE_CLKS;
        end else n_denied++;
        default: ;
      endcase
    end
  end
endmodule
