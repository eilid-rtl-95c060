// srom_guard -- atomic, single-entry/single-exit execution of the secure ROM.
//
// The trusted software in the ROM is split into an entry section, a body and
// a leave section. Control may enter the ROM only at ENTRY_ADDR and may leave
// it only from LEAVE_ADDR, and nothing may interrupt it in between. The module
// remembers the previous valid program counter (one register stage) and, from
// it and the current one, flags
//   viol_entry : previous PC outside the ROM, current PC inside but not at the
//                entry point;
//   viol_exit  : previous PC inside the ROM but not at the leave point,
//                current PC outside;
//   viol_irq   : an interrupt is accepted while the PC is inside the ROM;
//   viol_dma   : a DMA request is active while the PC is inside the ROM.
// The flags are combinational in the cycle the offending PC or request is
// seen. `clear` (from the reset controller, while the core is being reset)
// forgets the previous PC. The rules are the published ones; the entry and
// leave addresses (first word and last word of the ROM by default) are this
// implementation's choice.
module srom_guard
  import eilid_pkg::*;
#(
  parameter addr_t SROM_BASE  = SROM_BASE_D,
  parameter addr_t SROM_LAST  = SROM_LAST_D,
  parameter addr_t ENTRY_ADDR = SROM_BASE_D,
  parameter addr_t LEAVE_ADDR = SROM_LAST_D - 16'd1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  pc_valid,
  input  addr_t pc,
  input  logic  irq,        // core accepts an interrupt this cycle
  input  logic  dma_en,     // a DMA request is on the bus this cycle
  output logic  pc_in_rom,  // current PC is inside the ROM
  output logic  viol_entry,
  output logic  viol_exit,
  output logic  viol_irq,
  output logic  viol_dma
);
  logic  prev_valid;
  addr_t prev_pc;
  logic  prev_in_rom;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_valid <= 1'b0;
      prev_pc    <= '0;
    end else if (clear) begin
      prev_valid <= 1'b0;
      prev_pc    <= '0;
    end else if (pc_valid) begin
      prev_valid <= 1'b1;
      prev_pc    <= pc;
    end
  end

  always_comb begin
    pc_in_rom   = pc_valid && in_range(pc, SROM_BASE, SROM_LAST);
    prev_in_rom = prev_valid && in_range(prev_pc, SROM_BASE, SROM_LAST);
    viol_entry  = pc_in_rom && !prev_in_rom && (pc != ENTRY_ADDR);
    viol_exit   = pc_valid && !pc_in_rom && prev_in_rom && (prev_pc != LEAVE_ADDR);
    viol_irq    = irq && pc_in_rom;
    viol_dma    = dma_en && pc_in_rom;
  end
endmodule
