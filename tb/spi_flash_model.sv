// spi_flash_model: behavioural model of an SPI NOR flash (not synthesizable).
// Mode 0, commands 0x03 READ, 0x06 WREN, 0x02 PAGE PROGRAM (bits can only be
// cleared, wraps inside a page), 0x20 4 KB SECTOR ERASE (sets 0xFF) and
// 0x05 READ STATUS (bit0 WIP, bit1 WEL). Program and erase start when chip
// select rises and keep WIP set for PROG_NS / ERASE_NS. The memory `mem` is
// public so testbenches can preload and inspect it; `erases` and `programs`
// count the completed operations. Setting `wp` (write protect) makes the
// part ignore program and erase, to model a flash that cannot be repaired.
// The original names only an SPI flash; the command set is the common
// SPI NOR one, and the short PROG_NS / ERASE_NS are chosen to keep runs short.
module spi_flash_model #(
  parameter int unsigned BYTES      = 32768,
  parameter int unsigned PAGE_BYTES = 256,
  parameter int unsigned PROG_NS    = 300,
  parameter int unsigned ERASE_NS   = 2000
)(
  input  logic sclk,
  input  logic cs_n,
  input  logic mosi,
  output logic miso
);
  logic [7:0] mem [BYTES];
  int unsigned erases = 0, programs = 0;

  logic [7:0] cmd, inb, oshift, next_out;
  int         nbytes, bitcnt;
  logic [23:0] addr;
  logic wel = 0, wip = 0, load = 0;
  bit wp = 0;
  logic [7:0] pbuf [$];
  logic [23:0] paddr;

  initial miso = 1'b0;

  always @(negedge cs_n) begin
    nbytes = 0; bitcnt = 0; load = 0; pbuf.delete();
  end

  always @(posedge sclk) if (!cs_n) begin
    inb = {inb[6:0], mosi};
    bitcnt++;
    if (bitcnt == 8) begin
      bitcnt = 0;
      if (nbytes == 0) cmd = inb;
      else if (nbytes <= 3) addr = {addr[15:0], inb};
      else if (cmd == 8'h02) pbuf.push_back(inb);
      nbytes++;
      next_out = 8'h00;
      if (cmd == 8'h05) next_out = {6'd0, wel, wip};
      if (cmd == 8'h03 && nbytes >= 4) begin
        next_out = mem[addr % BYTES];
        addr = addr + 1;
      end
      load = 1;
    end
  end

  always @(negedge sclk) if (!cs_n) begin
    if (load) begin oshift = next_out; load = 0; end
    miso = oshift[7];
    oshift = {oshift[6:0], 1'b0};
  end

  always @(posedge cs_n) begin
    if (nbytes == 1 && cmd == 8'h06 && !wip) wel = 1;
    else if (nbytes == 4 && cmd == 8'h20 && wel && !wip && !wp) begin
      wel = 0; wip = 1;
      fork begin
        automatic int base = int'(addr) & ~(4096 - 1);
        #(ERASE_NS);
        for (int i = 0; i < 4096; i++) mem[(base + i) % BYTES] = 8'hff;
        erases++; wip = 0;
      end join_none
    end else if (nbytes > 4 && cmd == 8'h02 && wel && !wip && !wp) begin
      wel = 0; wip = 1; paddr = addr;
      fork begin
        automatic int pbase = int'(paddr) & ~(PAGE_BYTES - 1);
        automatic int off = int'(paddr) % PAGE_BYTES;
        automatic logic [7:0] pb[$] = pbuf;
        #(PROG_NS);
        foreach (pb[i]) mem[(pbase + (off + i) % PAGE_BYTES) % BYTES] &= pb[i];
        programs++; wip = 0;
      end join_none
    end
  end
endmodule
