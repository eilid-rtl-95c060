// secure_rom -- read-only memory that holds the trusted CFI software.
//
// SROM_BYTES bytes (2 KB by default) of 16-bit words mapped at SROM_BASE. It
// sits on the core's program-space (instruction fetch) port: when `en` is
// high and `addr` falls inside the window, the addressed word appears on
// `rdata` after the next clock edge; otherwise `rdata` is zero. There is no
// write port at all, which is what makes the software it holds immutable; the
// monitor additionally resets the MCU on any attempt to write the window.
//
// Contents come from INIT_FILE (hex, one 16-bit word per line, word 0 at
// SROM_BASE); with no file the ROM reads as zero. Keeping the trusted code in
// ROM follows the published design; its size, base address and this
// fetch-only port are this implementation's choices.
module secure_rom
  import eilid_pkg::*;
#(
  parameter addr_t       SROM_BASE  = SROM_BASE_D,
  parameter int unsigned SROM_BYTES = 2048,
  parameter string       INIT_FILE  = ""
) (
  input  logic  clk,
  input  logic  en,
  input  addr_t addr,
  output word_t rdata
);
  localparam int unsigned WORDS = SROM_BYTES / 2;
  localparam int unsigned AW    = $clog2(WORDS);
  localparam addr_t       SROM_LAST = SROM_BASE + addr_t'(SROM_BYTES - 1);

  word_t rom [WORDS];
  addr_t offs;

  initial begin
    for (int i = 0; i < WORDS; i++) rom[i] = '0;
    if (INIT_FILE != "") $readmemh(INIT_FILE, rom);
  end

  assign offs = addr - SROM_BASE;

  always_ff @(posedge clk) begin
    if (en && in_range(addr, SROM_BASE, SROM_LAST)) rdata <= rom[offs[AW:1]];
    else                                             rdata <= '0;
  end
endmodule
