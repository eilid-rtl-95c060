// exec_guard -- W^X rule of the EILID monitor.
//
// Code may only run from program memory (PMEM) or from the secure ROM. Any
// valid program-counter value outside those two windows -- data memory, the
// shadow stack, peripherals -- is a code-injection attempt, and the module
// raises `viol` in the same cycle (combinational). `pc_valid` is low while the
// core is held in reset or has not yet fetched, so a meaningless PC does not
// count. The rule itself follows the published design (no execution from
// data memory); treating every address outside PMEM and the ROM as
// non-executable is this implementation's reading of it.
module exec_guard
  import eilid_pkg::*;
#(
  parameter addr_t PMEM_BASE = PMEM_BASE_D,
  parameter addr_t PMEM_LAST = PMEM_LAST_D,
  parameter addr_t SROM_BASE = SROM_BASE_D,
  parameter addr_t SROM_LAST = SROM_LAST_D
) (
  input  logic  pc_valid,
  input  addr_t pc,
  output logic  viol
);
  always_comb begin
    viol = pc_valid
        && !in_range(pc, PMEM_BASE, PMEM_LAST)
        && !in_range(pc, SROM_BASE, SROM_LAST);
  end
endmodule
