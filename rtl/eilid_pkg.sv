// eilid_pkg -- shared types and the default memory map of the EILID
// execution-integrity hardware for a 16-bit MSP430-class MCU.
//
// The MCU has a single 64 KB byte-addressed space. The map below places:
//   * program memory (PMEM, the application's flash)   0xE000 - 0xFFFF
//   * secure ROM holding the trusted CFI software       0xA000 - 0xA7FF
//   * the shadow stack (secure data memory)             0x2000 - 0x20FF
// The shadow-stack base 0x2000 and its 256-byte size are the published
// figures of the design; the PMEM window is chosen so that the application
// addresses used in its examples (0xE200, 0xE400, 0xE500) fall inside it, and
// the ROM window is a free choice of this implementation. Every module takes
// these as parameters, so a different map only needs different parameter
// values.
//
// mem_req_t bundles one bus master's request (the CPU data port, the CPU
// program-space port or a DMA controller). viol_t names the individual rules
// the monitor enforces; one bit per rule so several can fire together.
package eilid_pkg;

  typedef logic [15:0] addr_t;
  typedef logic [15:0] word_t;

  // Default address map (byte addresses, inclusive bounds).
  localparam addr_t PMEM_BASE_D   = 16'hE000;
  localparam addr_t PMEM_LAST_D   = 16'hFFFF;
  localparam addr_t SROM_BASE_D   = 16'hA000;
  localparam addr_t SROM_LAST_D   = 16'hA7FF;
  localparam addr_t SSTACK_BASE_D = 16'h2000;
  localparam int unsigned SSTACK_BYTES_D = 256;

  // One bus request. be selects the low (bit 0) and high (bit 1) byte of a
  // 16-bit word; addr is a byte address.
  typedef struct packed {
    logic       en;
    logic       wr;
    logic [1:0] be;
    addr_t      addr;
    word_t      wdata;
  } mem_req_t;

  // Rules whose breach makes the monitor reset the MCU.
  typedef struct packed {
    logic pmem_write;     // PMEM written by untrusted code or DMA
    logic exec_outside;   // instruction fetched outside PMEM and the secure ROM
    logic rom_entry;      // secure ROM entered other than at its entry point
    logic rom_exit;       // secure ROM left other than from its leave point
    logic rom_irq;        // interrupt taken while the secure ROM runs
    logic rom_dma;        // DMA active while the secure ROM runs
    logic rom_write;      // write to the secure ROM
    logic sstack_access;  // shadow stack touched by untrusted code or DMA
  } viol_t;

  localparam int unsigned NUM_RULES = $bits(viol_t);

  function automatic logic in_range(addr_t a, addr_t lo, addr_t hi);
    return (a >= lo) && (a <= hi);
  endfunction

endpackage
