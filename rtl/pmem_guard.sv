// pmem_guard -- software-immutability rules of the EILID monitor.
//
// Program memory may change only through the secure-update code that runs
// from the secure ROM. A CPU write into the PMEM window while the program
// counter is outside the ROM, or any DMA write into PMEM, raises
// `viol_pmem`. The ROM itself is never writable: any write into its window,
// from the CPU or from DMA, raises `viol_rom`. Both outputs are combinational
// and valid in the cycle of the offending request. The rules are those of
// the CASU root of trust on which the design is built; the signal-level form
// (one request per cycle per master) is this implementation's.
module pmem_guard
  import eilid_pkg::*;
#(
  parameter addr_t PMEM_BASE = PMEM_BASE_D,
  parameter addr_t PMEM_LAST = PMEM_LAST_D,
  parameter addr_t SROM_BASE = SROM_BASE_D,
  parameter addr_t SROM_LAST = SROM_LAST_D
) (
  input  logic     pc_in_rom,   // program counter is inside the secure ROM
  input  mem_req_t cpu_req,     // CPU data-port request
  input  mem_req_t dma_req,     // DMA request
  output logic     viol_pmem,
  output logic     viol_rom
);
  logic cpu_wr, dma_wr;

  always_comb begin
    cpu_wr = cpu_req.en && cpu_req.wr;
    dma_wr = dma_req.en && dma_req.wr;
    viol_pmem = (cpu_wr && !pc_in_rom && in_range(cpu_req.addr, PMEM_BASE, PMEM_LAST))
             || (dma_wr && in_range(dma_req.addr, PMEM_BASE, PMEM_LAST));
    viol_rom  = (cpu_wr && in_range(cpu_req.addr, SROM_BASE, SROM_LAST))
             || (dma_wr && in_range(dma_req.addr, SROM_BASE, SROM_LAST));
  end
endmodule
