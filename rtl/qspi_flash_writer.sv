// qspi_flash_writer: writes FPGA configuration data into a quad-SPI flash.
//
// Each board keeps its FPGA configurations in a 512 Mbit serial flash: a
// protected "golden" configuration at the bottom of the memory and two
// replaceable multi-boot configurations above it. This block carries out one
// flash operation per `start`:
//   op = 0, page program: WRITE ENABLE (06h), then 4-byte-address QUAD INPUT
//          PAGE PROGRAM (34h) with `len` bytes (1..256) from the page buffer,
//          sent on all four data lines, high nibble first;
//   op = 1, sector erase: WRITE ENABLE, then 4-byte SECTOR ERASE (DCh);
// and then polls READ STATUS (05h) until the write-in-progress bit clears.
// Any operation touching the golden area [0, GOLDEN_END) or beyond the end of
// the flash is refused with `prot_err` and nothing is sent.
//
// The page buffer is loaded through `pg_we/pg_addr/pg_data` before `start`.
// Command, address and status use DQ0 out / DQ1 in; program data uses DQ3..0.
// SCK runs at half the clock (62.5 MHz from 125 MHz): data change while SCK
// is low and are taken by the flash on its rising edge; status bits are
// sampled here on the rising edge as well.
//
// Timing: a page of 256 bytes takes 8 (write enable) + 8 + 32 + 512 SCK periods
// (command, address, data nibbles) plus gaps and
// status polling; `busy` is high from `start` to `done`.
//
// From the paper: 512 Mb flash, golden revision in a protected area with no
// permission to write, two multi-boot revisions, 62.5 MHz flash clock, 4-bit
// SPI bus. Command codes, the size of the golden area and the erase command
// are this design's choices (common quad-SPI NOR conventions).
module qspi_flash_writer #(
  parameter int unsigned        FLASH_BYTES = 64 * 1024 * 1024,   // 512 Mbit
  parameter logic [31:0]        GOLDEN_END  = 32'h0155_0000       // 341 x 64 KiB
) (
  input  logic        clk,
  input  logic        rst_n,
  // page buffer load
  input  logic        pg_we,
  input  logic [7:0]  pg_addr,
  input  logic [7:0]  pg_data,
  // operation
  input  logic        start,
  input  logic        op,          // 0 page program, 1 sector erase
  input  logic [31:0] addr,
  input  logic [8:0]  len,         // bytes to program, 1..256
  output logic        busy,
  output logic        done,
  output logic        prot_err,
  // flash pins
  output logic        cs_n,
  output logic        sck,
  output logic [3:0]  dq_o,
  output logic [3:0]  dq_oe,
  input  logic [3:0]  dq_i
);

  typedef enum logic [3:0] {
    S_IDLE, S_WREN, S_GAP1, S_CMD, S_DATA, S_GAP2, S_RDSR, S_RDBITS, S_GAP3
  } state_e;

  state_e      state;
  logic [7:0]  page [256];
  logic [39:0] sh;
  logic [9:0]  cnt;          // bits (or nibbles) left in the current state
  logic        ph;           // 0: SCK low half, 1: SCK high half
  logic [8:0]  nib;          // nibble index in the data phase
  logic [7:0]  status;
  logic        op_q;
  logic [8:0]  len_q;
  logic [7:0]  cur_byte;
  logic        bad;
  logic [31:0] addr_r;       // address of the current operation

  assign bad      = (addr < GOLDEN_END) || ({1'b0, addr} + 33'(len) > 33'(FLASH_BYTES))
                    || (op == 1'b0 && (len == 0 || len > 9'd256));
  assign cur_byte = page[nib[8:1]];

  always_ff @(posedge clk) begin
    if (pg_we) page[pg_addr] <= pg_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        addr_r <= '0;
    else if (state == S_IDLE && start) addr_r <= addr;
  end

  // pins
  always_comb begin
    cs_n  = 1'b1;
    sck   = 1'b0;
    dq_o  = '0;
    dq_oe = '0;
    unique case (state)
      S_WREN, S_CMD, S_RDSR: begin
        cs_n     = 1'b0;
        sck      = ph;
        dq_o[0]  = sh[39];
        dq_oe[0] = 1'b1;
      end
      S_DATA: begin
        cs_n  = 1'b0;
        sck   = ph;
        dq_o  = nib[0] ? cur_byte[3:0] : cur_byte[7:4];
        dq_oe = 4'hF;
      end
      S_RDBITS: begin
        cs_n = 1'b0;
        sck  = ph;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      sh       <= '0;
      cnt      <= '0;
      ph       <= 1'b0;
      nib      <= '0;
      status   <= '0;
      op_q     <= 1'b0;
      len_q    <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      prot_err <= 1'b0;
    end else begin
      done     <= 1'b0;
      prot_err <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          if (bad) begin
            prot_err <= 1'b1;
          end else begin
            busy  <= 1'b1;
            op_q  <= op;
            len_q <= len;
            sh    <= {8'h06, addr};
            cnt   <= 10'd8;
            ph    <= 1'b0;
            state <= S_WREN;
          end
        end
        S_WREN, S_CMD, S_RDSR: begin
          ph <= ~ph;
          if (ph) begin
            sh  <= sh << 1;
            cnt <= cnt - 1'b1;
            if (cnt == 10'd1) begin
              unique case (state)
                S_WREN: state <= S_GAP1;
                S_CMD: begin
                  nib   <= '0;
                  cnt   <= {len_q, 1'b0};
                  state <= op_q ? S_GAP2 : S_DATA;
                end
                default: begin
                  cnt   <= 10'd8;
                  state <= S_RDBITS;
                end
              endcase
            end
          end
        end
        S_GAP1: begin
          sh    <= {op_q ? 8'hDC : 8'h34, addr_r};
          cnt   <= 10'd40;
          state <= S_CMD;
        end
        S_DATA: begin
          ph <= ~ph;
          if (ph) begin
            nib <= nib + 1'b1;
            cnt <= cnt - 1'b1;
            if (cnt == 10'd1) state <= S_GAP2;
          end
        end
        S_GAP2, S_GAP3: begin
          if (state == S_GAP3 && !status[0]) begin
            busy  <= 1'b0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            sh    <= {8'h05, 32'h0};
            cnt   <= 10'd8;
            state <= S_RDSR;
          end
        end
        S_RDBITS: begin
          ph <= ~ph;
          if (ph) begin
            status <= {status[6:0], dq_i[1]};
            cnt    <= cnt - 1'b1;
            if (cnt == 10'd1) state <= S_GAP3;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
